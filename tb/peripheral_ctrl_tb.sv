// peripheral_ctrl_tb: with two partitions (i = 0, j = 1) checks the
// transistor settings of the paper's tables for each operation:
//   write i: M0        read i: M1        write j: M2        read j: M3
//   write i + read j: M0 M3             read i + write j: M1 M2
// plus the decoupled mode (M4), TRANSFER (M5/M6), PRECHARGE, and that
// illegal command orders raise cmd_err. Then random legal sequences on
// the full eight-partition instance never produce an invalid setting.
module peripheral_ctrl_tb;
  import palp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid;
  pcm_cmd_e cmd;
  logic [PART_BITS-1:0] part;
  logic [1:0] wd2, sa2;
  logic m4, m5, m6, inv2, err2;
  logic [1:0] ac2;
  logic [PART_BITS-1:0] fp2, sp2;
  logic [7:0] wd8, sa8;
  logic m4_8, m5_8, m6_8, inv8, err8;
  logic [1:0] ac8;
  logic [PART_BITS-1:0] fp8, sp8;
  logic rst2_n = 0;
  int checks = 0, failures = 0;

  peripheral_ctrl #(.NPART(2)) dut2 (.clk, .rst_n(rst2_n), .cmd_valid, .cmd, .part,
    .wd_sw(wd2), .sa_sw(sa2), .m4, .m5, .m6, .act_cnt(ac2), .first_part(fp2), .second_part(sp2),
    .cfg_invalid(inv2), .cmd_err(err2));
  peripheral_ctrl dut8 (.clk, .rst_n, .cmd_valid, .cmd, .part,
    .wd_sw(wd8), .sa_sw(sa8), .m4(m4_8), .m5(m5_8), .m6(m6_8), .act_cnt(ac8), .first_part(fp8),
    .second_part(sp8), .cfg_invalid(inv8), .cmd_err(err8));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input pcm_cmd_e c, input int p);
    @(negedge clk);
    cmd_valid = 1; cmd = c; part = PART_BITS'(p);
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
  endtask

  // expected {M0, M1, M2, M3}
  task automatic expect_m(input logic [3:0] m, input string what);
    checks++;
    if ({wd2[0], sa2[0], wd2[1], sa2[1]} !== m || inv2) begin
      failures++;
      $display("FAIL %s: M0..M3 = %b exp %b", what, {wd2[0], sa2[0], wd2[1], sa2[1]}, m);
    end
  endtask

  task automatic expect_bus(input logic e4, input logic e5, input logic e6, input string what);
    checks++;
    if ({m4, m5, m6} !== {e4, e5, e6}) begin
      failures++; $display("FAIL %s: M4 M5 M6 = %b%b%b", what, m4, m5, m6);
    end
  endtask

  task automatic reset2();
    @(negedge clk); rst2_n = 0; @(negedge clk); rst2_n = 1;
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_NOP; part = '0;
    repeat (2) @(negedge clk);
    rst_n = 1; rst2_n = 1;
    expect_bus(1, 0, 1, "after reset");
    // Table 2, single-partition operations
    issue(CMD_ACT, 0); issue(CMD_WR, 0);  expect_m(4'b1000, "write to i");  issue(CMD_PRE, 0);
    expect_m(4'b0000, "precharge");
    issue(CMD_ACT, 0); issue(CMD_RD, 0);  expect_m(4'b0100, "read from i"); issue(CMD_PRE, 0);
    issue(CMD_ACT, 1); issue(CMD_WR, 1);  expect_m(4'b0010, "write to j");  issue(CMD_PRE, 0);
    issue(CMD_ACT, 1); issue(CMD_RD, 1);  expect_m(4'b0001, "read from j"); issue(CMD_PRE, 0);
    // Table 3, read-with-write
    issue(CMD_ACT, 0); issue(CMD_ACT, 1); issue(CMD_RWW, 0);
    expect_m(4'b1001, "write i, read j"); expect_bus(1, 0, 1, "RWW keeps write mode"); issue(CMD_PRE, 0);
    issue(CMD_ACT, 1); issue(CMD_ACT, 0); issue(CMD_RWW, 0);
    expect_m(4'b0110, "read i, write j"); issue(CMD_PRE, 0);
    // Table 4 and the data-bus switches, read-with-read
    issue(CMD_ACT, 0); issue(CMD_ACT, 1); issue(CMD_DEC, 0);
    expect_bus(0, 0, 1, "decoupled");
    issue(CMD_RWR, 0);
    expect_m(4'b0110, "SA reads i, verify logic reads j");
    issue(CMD_TRF, 0);
    expect_bus(0, 1, 0, "transfer");
    issue(CMD_PRE, 0);
    expect_bus(1, 0, 1, "precharge restores write mode");
    checks++; if (err2) begin failures++; $display("FAIL spurious cmd_err"); end
    // illegal orders
    issue(CMD_ACT, 0); issue(CMD_ACT, 0);
    checks++; if (!err2) begin failures++; $display("FAIL same partition twice not flagged"); end
    reset2();
    issue(CMD_ACT, 0); issue(CMD_ACT, 1); issue(CMD_RWR, 0);
    checks++; if (!err2) begin failures++; $display("FAIL RWR without DECOUPLE not flagged"); end
    reset2();
    issue(CMD_ACT, 0); issue(CMD_RWW, 0);
    checks++; if (!err2) begin failures++; $display("FAIL RWW with one activation not flagged"); end
    reset2();
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    // random legal sequences on eight partitions
    for (int n = 0; n < 300; n++) begin
      int a, b, k;
      a = $urandom_range(0, 7);
      b = (a + $urandom_range(1, 7)) % 8;
      k = $urandom_range(0, 3);
      issue(CMD_ACT, a);
      case (k)
        0: begin issue(CMD_RD, a); checks++; if (sa8 != 8'(1 << a) || wd8 != 0) begin failures++; $display("FAIL rd8"); end end
        1: begin issue(CMD_WR, a); checks++; if (wd8 != 8'(1 << a) || sa8 != 0) begin failures++; $display("FAIL wr8"); end end
        2: begin issue(CMD_ACT, b); issue(CMD_RWW, 0);
                 checks++; if (wd8 != 8'(1 << a) || sa8 != 8'(1 << b)) begin failures++; $display("FAIL rww8"); end end
        default: begin issue(CMD_ACT, b); issue(CMD_DEC, 0); issue(CMD_RWR, 0);
                 checks++; if (sa8 != 8'(1 << a) || wd8 != 8'(1 << b) || m4_8) begin failures++; $display("FAIL rwr8"); end
                 issue(CMD_TRF, 0); end
      endcase
      checks++; if (inv8 || err8) begin failures++; $display("FAIL invalid config / error on legal sequence"); end
      issue(CMD_PRE, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
