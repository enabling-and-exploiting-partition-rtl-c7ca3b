// bank_sequencer_tb: runs each of the four sequences (and back-to-back
// restarts) and checks the command trace, the ACTIVATE-to-ACTIVATE spacing
// (19 / 47 / 48 / 30 cycles), the write beats and the assembled read lines
// against expectations written out from the paper's timing.
module bank_sequencer_tb;
  import palp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, cmd_valid, wbeat_valid, resp_valid, sa_active, wd_active;
  op_e start_op;
  q_entry_t start_a, start_b;
  pcm_cmd_t cmd;
  logic [BEAT_W-1:0] wbeat, rbeat;
  rd_resp_t resp;
  int checks = 0, failures = 0;
  int cyc = 0;

  bank_sequencer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // the "memory" answers every read beat with a value derived from the cycle
  assign rbeat = BEAT_W'(cyc * 37 + 5);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  // expected command at offset t of a sequence
  function automatic pcm_cmd_e exp_cmd(op_e op, int t);
    case (op)
      OP_RD:  case (t) 0: return CMD_ACT; 1: return CMD_RD; 18: return CMD_PRE; default: return CMD_NOP; endcase
      OP_WR:  case (t) 0: return CMD_ACT; 1: return CMD_WR; 46: return CMD_PRE; default: return CMD_NOP; endcase
      OP_RWW: case (t) 0, 1: return CMD_ACT; 2: return CMD_RWW; 47: return CMD_PRE; default: return CMD_NOP; endcase
      default: case (t) 0, 1: return CMD_ACT; 2: return CMD_DEC; 3: return CMD_RWR; 21: return CMD_TRF;
                        29: return CMD_PRE; default: return CMD_NOP; endcase
    endcase
  endfunction

  task automatic run(input op_e op, input bit a_is_write, input bit back_to_back);
    int len, t0, t, nresp, act_part [$];
    q_entry_t a, b;
    logic [LINE_W-1:0] expd;
    int wstart, rstarts [$];
    logic [TAG_W-1:0] rtags [$];
    len = (op == OP_RD) ? 19 : (op == OP_WR) ? 47 : (op == OP_RWW) ? 48 : 30;
    a = '0; b = '0;
    a.is_write = a_is_write; a.bid = 5'd9; a.part = 3'd2; a.row = 12'h123; a.col = 9'h45;
    a.data = {$urandom, $urandom, $urandom, $urandom}; a.tag = 8'hA1;
    b.is_write = (op == OP_RWW) && !a_is_write; b.bid = 5'd9; b.part = 3'd6; b.row = 12'h321; b.col = 9'h54;
    b.data = {$urandom, $urandom, $urandom, $urandom}; b.tag = 8'hB2;
    // expected data windows (offsets from the first ACTIVATE)
    wstart = (op == OP_WR) ? 4 : 5;
    case (op)
      OP_RD:  begin rstarts = '{11};     rtags = '{8'hA1}; end
      OP_WR:  begin rstarts = {};        rtags = {}; end
      OP_RWW: begin rstarts = '{15};     rtags = a_is_write ? '{8'hB2} : '{8'hA1}; end
      default: begin rstarts = '{13, 22}; rtags = '{8'hA1, 8'hB2}; end
    endcase
    @(negedge clk);
    start = 1; start_op = op; start_a = a; start_b = b;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    nresp = 0;
    for (t = 0; t < len + 2; t++) begin
      // at negedge: outputs for offset t
      if (t < len) begin
        chk(cmd.cmd == exp_cmd(op, t), $sformatf("%s t=%0d cmd %s", op.name(), t, cmd.cmd.name()));
        if (cmd.cmd == CMD_ACT) act_part.push_back(int'(cmd.part));
        chk(cmd.bid == 5'd9 || !cmd_valid, "bank id");
        chk(busy == (t < len - 1), $sformatf("%s busy at t=%0d", op.name(), t));
      end
      if (op == OP_WR || op == OP_RWW) begin
        q_entry_t w;
        w = (op == OP_RWW && !a_is_write) ? b : a;
        if (t >= wstart && t < wstart + 8)
          chk(wbeat_valid && wbeat == w.data[(t - wstart) * 16 +: 16], $sformatf("write beat t=%0d", t));
        else chk(!wbeat_valid, $sformatf("no write beat t=%0d", t));
      end
      foreach (rstarts[i]) if (t == rstarts[i] + 8) begin
        expd = '0;
        for (int k = 0; k < 8; k++) expd[k*16 +: 16] = 16'((t0 + rstarts[i] + k) * 37 + 5);
        chk(resp_valid && resp.tag == rtags[i] && resp.data == expd, $sformatf("%s read %0d data", op.name(), i));
      end
      if (resp_valid) nresp++;
      if (back_to_back && t == len - 1) begin
        // restart as soon as allowed: the next ACTIVATE must follow at once
        start = 1; start_op = OP_RD; start_a = a; start_b = b; start_a.is_write = 0;
        @(negedge clk); start = 0;
        chk(cmd.cmd == CMD_ACT, "ACT right after PRE cycle");
        chk(cyc - t0 == len, $sformatf("ACT-ACT spacing %0d exp %0d", cyc - t0, len));
        repeat (25) @(negedge clk);
        return;
      end
      @(negedge clk);
    end
    chk(nresp == rstarts.size(), "number of read responses");
    if (op == OP_RWW) chk(act_part[0] == (a_is_write ? 2 : 6), "RWW activates the write partition first");
    if (op == OP_RWR) chk(act_part[0] == 2 && act_part[1] == 6, "RWR activation order");
  endtask

  initial begin
    start = 0; start_op = OP_RD; start_a = '0; start_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(OP_RD, 0, 0);
    run(OP_WR, 1, 0);
    run(OP_RWW, 1, 0);
    run(OP_RWW, 0, 0);
    run(OP_RWR, 0, 0);
    run(OP_RD, 0, 1);
    run(OP_WR, 1, 1);
    run(OP_RWW, 1, 1);
    run(OP_RWR, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
