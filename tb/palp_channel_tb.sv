// palp_channel_tb: one channel controller with its 32 bank models.
//  1. The six-request single-bank example (arrival order W3/120, R1/127,
//     R3/7, R4/12, W1/89, R1/22, partition/row): queued behind a busy bank,
//     it must be served as RWW, RWW, RWR in 48 + 48 + 30 = 126 cycles from
//     the first ACTIVATE to the end of the last PRECHARGE cycle.
//  2. Random traffic concentrated on few banks; every read must return the
//     line written last before it in arrival order (reference memory kept
//     here). Counts each mechanism: single read/write, RWW, RWR, starvation
//     override, RAPL serialisation, bus-slot stall, full queue.
module palp_channel_tb;
  import palp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid;
  mem_req_t req;
  rd_resp_t resp;
  logic pcm_cmd_valid, pcm_wbeat_valid;
  pcm_cmd_t pcm_cmd;
  logic [BEAT_W-1:0] pcm_wbeat, pcm_rbeat;
  chan_events_t events;
  logic [NUM_BID-1:0] rb_valid, t_err, c_err;
  logic [BEAT_W-1:0] rb [NUM_BID];
  int checks = 0, failures = 0;
  int cyc = 0;

  palp_channel #(.RAPL(150)) dut (.*);

  for (genvar b = 0; b < NUM_BID; b++) begin : g_bank
    pcm_bank_model #(.BID(BID_BITS'(b))) u_bank (
      .clk, .rst_n, .cmd_valid(pcm_cmd_valid), .cmd(pcm_cmd), .wbeat_valid(pcm_wbeat_valid),
      .wbeat(pcm_wbeat), .rbeat_valid(rb_valid[b]), .rbeat(rb[b]), .timing_err(t_err[b]), .cmd_err(c_err[b]));
  end
  always_comb begin
    pcm_rbeat = '0;
    for (int b = 0; b < NUM_BID; b++) pcm_rbeat |= rb[b];
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] mkaddr(int rank, int bank, int part, int row, int col);
    logic [ADDR_W-1:0] a = '0;
    a[36:35] = 2'(rank); a[34:23] = 12'(row); a[22:14] = 9'(col); a[13:11] = 3'(part);
    a[10:8] = 3'(bank); a[7:6] = 2'd0;
    return a;
  endfunction

  // ---- reference memory and outstanding reads ----
  logic [LINE_W-1:0] ref_mem [logic [ADDR_W-1:0]];
  logic [LINE_W-1:0] exp_data [int];
  int  n_resp = 0;
  logic [TAG_W-1:0] next_tag = 0;

  always @(posedge clk) if (rst_n && resp_valid) begin
    checks++;
    n_resp++;
    if (!exp_data.exists(int'(resp.tag))) begin
      failures++; $display("FAIL unexpected response tag %0d", resp.tag);
    end else begin
      if (resp.data !== exp_data[int'(resp.tag)]) begin
        failures++; $display("FAIL read tag %0d data %h exp %h", resp.tag, resp.data, exp_data[int'(resp.tag)]);
      end
      exp_data.delete(int'(resp.tag));
    end
  end

  // event counters
  int c_rd = 0, c_wr = 0, c_rww = 0, c_rwr = 0, c_starve = 0, c_rapl = 0, c_stall = 0, c_full = 0;
  always @(posedge clk) if (rst_n) begin
    c_rd += int'(events.issue_rd); c_wr += int'(events.issue_wr);
    c_rww += int'(events.issue_rww); c_rwr += int'(events.issue_rwr);
    c_starve += int'(events.starve_forced); c_rapl += int'(events.rapl_serialized);
    c_stall += int'(events.bus_stall); c_full += int'(events.queue_full);
  end

  // command trace for the example
  pcm_cmd_e trace [$];
  int trace_t [$];
  always @(posedge clk) if (rst_n && pcm_cmd_valid && pcm_cmd.bid == 0 && pcm_cmd.cmd != CMD_ACT)
    begin trace.push_back(pcm_cmd.cmd); trace_t.push_back(cyc); end

  task automatic send(input bit w, input logic [ADDR_W-1:0] a);
    mem_req_t r;
    r.is_write = w; r.addr = a; r.tag = next_tag;
    r.data = {$urandom, $urandom, $urandom, $urandom};
    while (!w && exp_data.exists(int'(next_tag))) @(negedge clk);
    r.tag = next_tag;
    req_valid = 1; req = r;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    // accepted at this edge
    if (w) ref_mem[{a[ADDR_W-1:6], 6'b0}] = r.data;
    else exp_data[int'(r.tag)] = ref_mem.exists({a[ADDR_W-1:6], 6'b0}) ? ref_mem[{a[ADDR_W-1:6], 6'b0}] : '0;
    next_tag++;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int t_first, t_last;
    int ex [6][3] = '{'{1, 3, 120}, '{0, 1, 127}, '{0, 3, 7}, '{0, 4, 12}, '{1, 1, 89}, '{0, 1, 22}};
    req_valid = 0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);   // let the power average settle
    // ---- 1. the example ----
    send(0, mkaddr(0, 0, 7, 1, 0));          // occupies bank 0 for 19 cycles
    for (int i = 0; i < 6; i++) send(ex[i][0], mkaddr(0, 0, ex[i][1], ex[i][2], 0));
    repeat (300) @(negedge clk);
    // trace: RD PRE, then RWW PRE RWW PRE DEC RWR TRF PRE
    checks++;
    if (trace.size() != 10 || trace[2] != CMD_RWW || trace[4] != CMD_RWW || trace[7] != CMD_RWR) begin
      failures++; $display("FAIL example command order (%0d commands)", trace.size());
      foreach (trace[i]) $display("  %s @%0d", trace[i].name(), trace_t[i]);
    end else begin
      t_first = trace_t[2] - 2;               // first ACTIVATE of the first RWW
      t_last  = trace_t[9];                   // final PRECHARGE cycle
      checks++;
      if (t_last - t_first + 1 != 126) begin
        failures++; $display("FAIL example service latency %0d, expected 126", t_last - t_first + 1);
      end else $display("example served in %0d cycles", t_last - t_first + 1);
    end
    checks++;
    if (n_resp != 5 || exp_data.size() != 0) begin failures++; $display("FAIL example: %0d responses", n_resp); end
    // ---- 2. random traffic ----
    for (int n = 0; n < 3000; n++) begin
      int rank, bank, part, row;
      bit hot;
      hot  = ((n / 400) % 2) == 1;
      rank = hot ? 0 : $urandom_range(0, 3);
      bank = hot ? $urandom_range(0, 1) : $urandom_range(0, 7);
      part = $urandom_range(0, 7);
      row  = $urandom_range(0, 3);
      send($urandom_range(0, 99) < 30, mkaddr(rank, bank, part, row, $urandom_range(0, 1)));
    end
    repeat (3000) @(negedge clk);
    checks++;
    if (exp_data.size() != 0) begin failures++; $display("FAIL %0d reads never answered", exp_data.size()); end
    checks++;
    if (|t_err || |c_err) begin failures++; $display("FAIL PCM timing or command error reported"); end
    $display("rd %0d wr %0d rww %0d rwr %0d starve %0d rapl %0d stall %0d full %0d",
             c_rd, c_wr, c_rww, c_rwr, c_starve, c_rapl, c_stall, c_full);
    checks += 8;
    if (c_rd == 0)     begin failures++; $display("FAIL no single read");  end
    if (c_wr == 0)     begin failures++; $display("FAIL no single write"); end
    if (c_rww == 0)    begin failures++; $display("FAIL no RWW");          end
    if (c_rwr == 0)    begin failures++; $display("FAIL no RWR");          end
    if (c_starve == 0) begin failures++; $display("FAIL no starvation override"); end
    if (c_rapl == 0)   begin failures++; $display("FAIL no RAPL serialisation");  end
    if (c_stall == 0)  begin failures++; $display("FAIL no bus stall");    end
    if (c_full == 0)   begin failures++; $display("FAIL queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
