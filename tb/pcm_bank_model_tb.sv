// pcm_bank_model_tb: drives hand-timed command sequences into one bank
// model: writes to several partitions, reads them back alone, with
// READ-WITH-WRITE and with DECOUPLE/READ-WITH-READ/TRANSFER, checking each
// returned line and the cycle of its first beat; then checks that an early
// PRECHARGE after a write and commands to another bank id are handled.
module pcm_bank_model_tb;
  import palp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, wbeat_valid, rbeat_valid, timing_err, cmd_err;
  pcm_cmd_t cmd;
  logic [BEAT_W-1:0] wbeat, rbeat;
  int checks = 0, failures = 0;
  int cyc = 0;

  pcm_bank_model #(.BID(5'd3)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-cycle stimulus program: command and write beat for each future cycle
  pcm_cmd_t prog_cmd [int];
  logic [BEAT_W-1:0] prog_w [int];
  logic [LINE_W-1:0] got_line;
  int got_first;

  always @(negedge clk) begin
    cmd_valid = prog_cmd.exists(cyc);
    cmd = cmd_valid ? prog_cmd[cyc] : '0;
    wbeat_valid = prog_w.exists(cyc);
    wbeat = wbeat_valid ? prog_w[cyc] : '0;
  end

  function automatic pcm_cmd_t c(pcm_cmd_e k, int p = 0, int row = 0, int col = 0, int bid = 3);
    pcm_cmd_t x;
    x.cmd = k; x.bid = BID_BITS'(bid); x.part = PART_BITS'(p); x.row = ROW_BITS'(row); x.col = COL_BITS'(col);
    return x;
  endfunction

  task automatic put_w(int at, logic [LINE_W-1:0] d);
    for (int k = 0; k < 8; k++) prog_w[at + k] = d[k*16 +: 16];
  endtask

  task automatic wait_until(int t);
    while (cyc < t) @(posedge clk);
  endtask

  // collect the first 8-beat burst starting at or after cycle 'from'
  task automatic grab(int from, output logic [LINE_W-1:0] line, output int first);
    int k;
    wait_until(from);
    k = 0; first = -1;
    while (k < 8 && cyc < from + 100) begin
      @(negedge clk);
      #1;
      if (rbeat_valid) begin
        if (first < 0) first = cyc;
        line[k*16 +: 16] = rbeat; k++;
      end
    end
  endtask

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  logic [LINE_W-1:0] d [4];
  initial begin
    int t, t_rww, t_rd, t_rwr, t_z, t_bad, f;
    logic [LINE_W-1:0] l;
    for (int i = 0; i < 4; i++) d[i] = {$urandom, $urandom, $urandom, $urandom};
    // ---- whole command program, laid out before time starts ----
    // plain writes: A@t W@t+1 data t+4..t+11 P@t+46
    t = 10;
    for (int i = 0; i < 2; i++) begin
      prog_cmd[t] = c(CMD_ACT, i + 1, 100 + i, 7); prog_cmd[t + 1] = c(CMD_WR);
      put_w(t + 4, d[i]); prog_cmd[t + 46] = c(CMD_PRE);
      t += 47;
    end
    // RWW: write partition 4 (first ACT), read partition 1 (second ACT)
    t_rww = t;
    prog_cmd[t] = c(CMD_ACT, 4, 300, 9); prog_cmd[t + 1] = c(CMD_ACT, 1, 100, 7);
    prog_cmd[t + 2] = c(CMD_RWW); put_w(t + 5, d[2]); prog_cmd[t + 47] = c(CMD_PRE);
    t += 48;
    // plain read of partition 4 (written by the RWW)
    t_rd = t;
    prog_cmd[t] = c(CMD_ACT, 4, 300, 9); prog_cmd[t + 1] = c(CMD_RD); prog_cmd[t + 18] = c(CMD_PRE);
    t += 19;
    // RWR: partitions 2 (sense amplifier) and 4 (verify logic)
    t_rwr = t;
    prog_cmd[t] = c(CMD_ACT, 2, 101, 7); prog_cmd[t + 1] = c(CMD_ACT, 4, 300, 9);
    prog_cmd[t + 2] = c(CMD_DEC); prog_cmd[t + 3] = c(CMD_RWR); prog_cmd[t + 21] = c(CMD_TRF);
    prog_cmd[t + 29] = c(CMD_PRE);
    t += 30;
    // commands for bank 5 are ignored; a never-written line reads as zero
    t_z = t;
    prog_cmd[t] = c(CMD_ACT, 6, 5, 5, 5); prog_cmd[t + 1] = c(CMD_WR, 0, 0, 0, 5);
    put_w(t + 4, d[3]);
    prog_cmd[t + 20] = c(CMD_ACT, 6, 5, 5); prog_cmd[t + 21] = c(CMD_RD); prog_cmd[t + 38] = c(CMD_PRE);
    t += 40;
    // early PRECHARGE after a write breaks tWR
    t_bad = t;
    prog_cmd[t] = c(CMD_ACT, 3, 1, 1); prog_cmd[t + 1] = c(CMD_WR); put_w(t + 4, d[3]);
    prog_cmd[t + 30] = c(CMD_PRE);

    repeat (2) @(posedge clk);
    rst_n = 1;
    grab(t_rww, l, f);
    chk(l == d[0], "RWW read of partition 1");
    chk(f == t_rww + 15, $sformatf("RWW read burst at +%0d", f - t_rww));
    grab(t_rd, l, f);
    chk(l == d[2], "read back RWW write");
    chk(f == t_rd + 11, $sformatf("read burst at +%0d", f - t_rd));
    grab(t_rwr, l, f);
    chk(l == d[1], "RWR first line from sense amplifier");
    chk(f == t_rwr + 13, $sformatf("RWR first burst at +%0d", f - t_rwr));
    grab(t_rwr + 21, l, f);
    chk(l == d[2], "RWR second line from verify logic");
    chk(f == t_rwr + 22, $sformatf("RWR second burst at +%0d", f - t_rwr));
    grab(t_z + 20, l, f);
    chk(l == '0, "unwritten line reads zero");
    wait_until(t_bad - 1);
    chk(!timing_err && !cmd_err, "no error on legal sequences");
    wait_until(t_bad + 33);
    chk(timing_err, "tWR violation detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
