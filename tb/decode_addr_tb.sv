// decode_addr_tb: drives random addresses through palp_pkg::decode_addr and
// checks every decoded field
// against a shift-and-mask reference computed in the testbench.
module decode_addr_tb;
  import palp_pkg::*;
  logic [ADDR_W-1:0] addr;
  loc_t loc;
  int checks = 0, failures = 0;

  assign loc = decode_addr(addr);

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h exp %0h (addr %0h)", what, got, exp, addr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] a;
    for (int n = 0; n < 400; n++) begin
      a = {$urandom, $urandom};
      if (n == 0) a = '1;
      if (n == 1) a = '0;
      addr = a[ADDR_W-1:0];
      #1;
      check(64'(loc.rank), (a >> 35) & 64'h3,   "rank");
      check(64'(loc.row),  (a >> 23) & 64'hfff, "row");
      check(64'(loc.col),  (a >> 14) & 64'h1ff, "col");
      check(64'(loc.part), (a >> 11) & 64'h7,   "part");
      check(64'(loc.bank), (a >> 8)  & 64'h7,   "bank");
      check(64'(loc.ch),   (a >> 6)  & 64'h3,   "channel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
