// palp_scheduler_tb: random queue contents (few banks and partitions, so
// pairs, hazards and busy banks are common) checked against a reference
// model of the policy written with testbench queues; plus the six-request
// example of a single bank (W3, R1, R3, R4, W1, R1 in arrival order),
// whose schedule must be RWW, RWW, RWR.
module palp_scheduler_tb;
  import palp_pkg::*;
  localparam int DEPTH = 8, NB = 4, TH = 3;
  localparam int IW = $clog2(DEPTH);
  q_entry_t entries [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [NB-1:0] bank_idle, ok_rr, ok_rw;
  logic sel_valid, sel_dual, starve_forced, rapl_serialized;
  op_e sel_op;
  logic [IW-1:0] idx_a, idx_b;
  int checks = 0, failures = 0;
  int seen_rww = 0, seen_rwr = 0, seen_single = 0, seen_starve = 0, seen_rapl = 0;

  palp_scheduler #(.DEPTH(DEPTH), .NB(NB), .TH_B(TH)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit can_go(int k, int n);
    if (!bank_idle[entries[k].bid]) return 0;
    for (int j = 0; j < k; j++)
      if (entries[j].bid == entries[k].bid && entries[j].part == entries[k].part &&
          entries[j].row == entries[k].row && entries[j].col == entries[k].col &&
          (entries[j].is_write || entries[k].is_write)) return 0;
    return 1;
  endfunction

  function automatic bit pairs(int a, int b, int n);
    return a != b && can_go(a, n) && can_go(b, n) && entries[a].bid == entries[b].bid &&
           entries[a].part != entries[b].part && !(entries[a].is_write && entries[b].is_write);
  endfunction

  // reference: returns valid, dual, op, a, b
  task automatic reference(input int n, output bit v, output bit d, output op_e op,
                           output int a, output int b, output bit starve, output bit rapl);
    int cands [$];
    int w [$], r [$];
    bit ok, rr;
    v = 0; d = 0; op = OP_RD; a = 0; b = 0; starve = 0; rapl = 0;
    for (int k = 0; k < n; k++) if (can_go(k, n)) cands.push_back(k);
    if (cands.size() == 0) return;
    v = 1;
    a = cands[0];
    starve = (entries[a].age >= TH);
    if (!starve)
      foreach (cands[i]) begin
        bit hp = 0;
        for (int j = 0; j < n; j++) if (pairs(cands[i], j, n)) hp = 1;
        if (hp) begin a = cands[i]; break; end
      end
    for (int j = 0; j < n; j++)
      if (j != a && can_go(j, n) && entries[j].bid == entries[a].bid && entries[j].part != entries[a].part)
        if (entries[j].is_write) w.push_back(j); else r.push_back(j);
    if (entries[a].is_write) begin
      if (r.size() > 0) begin b = r[0]; rr = 0; end
    end else if (w.size() > 0) begin b = w[0]; rr = 0; end
    else if (r.size() > 0) begin b = r[0]; rr = 1; end
    if ((entries[a].is_write && r.size() > 0) || (!entries[a].is_write && (w.size() + r.size() > 0))) begin
      ok = rr ? ok_rr[entries[a].bid] : ok_rw[entries[a].bid];
      d = ok; rapl = !ok;
      if (ok) op = rr ? OP_RWR : OP_RWW;
    end
    if (!d) op = entries[a].is_write ? OP_WR : OP_RD;
  endtask

  task automatic compare(input int n);
    bit v, d, st, rp; op_e op; int a, b;
    #1;
    reference(n, v, d, op, a, b, st, rp);
    checks++;
    if (sel_valid !== v) begin failures++; $display("FAIL valid %0b exp %0b", sel_valid, v); return; end
    if (!v) return;
    checks += 4;
    if (sel_dual !== d || sel_op !== op || int'(idx_a) != a || (d && int'(idx_b) != b)) begin
      failures++;
      $display("FAIL n=%0d dual %0b/%0b op %s/%s a %0d/%0d b %0d/%0d", n, sel_dual, d,
               sel_op.name(), op.name(), idx_a, a, idx_b, b);
    end
    if (starve_forced !== st || rapl_serialized !== rp) begin
      failures++; $display("FAIL flags st %0b/%0b rapl %0b/%0b", starve_forced, st, rapl_serialized, rp);
    end
    if (op == OP_RWW) seen_rww++; else if (op == OP_RWR) seen_rwr++; else seen_single++;
    if (st) seen_starve++;
    if (rp) seen_rapl++;
  endtask

  task automatic load_example();
    // {is_write, partition, row} in arrival order, all to bank 0
    int ex [6][3] = '{'{1, 3, 120}, '{0, 1, 127}, '{0, 3, 7}, '{0, 4, 12}, '{1, 1, 89}, '{0, 1, 22}};
    valid = '0;
    for (int i = 0; i < 6; i++) begin
      entries[i] = '0;
      entries[i].is_write = 1'(ex[i][0]);
      entries[i].part = PART_BITS'(ex[i][1]);
      entries[i].row = ROW_BITS'(ex[i][2]);
      entries[i].tag = TAG_W'(i);
      valid[i] = 1'b1;
    end
  endtask

  // remove two entries, compacting like the rwQ
  task automatic drop(input int a, input int b, input bit two);
    q_entry_t t [$];
    for (int i = 0; i < DEPTH; i++)
      if (valid[i] && i != a && !(two && i == b)) t.push_back(entries[i]);
    valid = '0;
    foreach (t[i]) begin entries[i] = t[i]; valid[i] = 1'b1; end
  endtask

  initial begin
    int n;
    // ---- the six-request example ----
    bank_idle = '1; ok_rr = '1; ok_rw = '1;
    load_example();
    #1;
    checks++;
    if (!(sel_dual && sel_op == OP_RWW && entries[idx_a].tag == 0 && entries[idx_b].tag == 1)) begin
      failures++; $display("FAIL example step 1: %s %0d %0d", sel_op.name(), idx_a, idx_b);
    end
    drop(int'(idx_a), int'(idx_b), 1); #1;
    checks++;
    if (!(sel_dual && sel_op == OP_RWW && entries[idx_a].tag == 2 && entries[idx_b].tag == 4)) begin
      failures++; $display("FAIL example step 2: %s %0d %0d", sel_op.name(), entries[idx_a].tag, entries[idx_b].tag);
    end
    drop(int'(idx_a), int'(idx_b), 1); #1;
    checks++;
    if (!(sel_dual && sel_op == OP_RWR && entries[idx_a].tag == 3 && entries[idx_b].tag == 5)) begin
      failures++; $display("FAIL example step 3: %s", sel_op.name());
    end
    // ---- random ----
    for (int it = 0; it < 20000; it++) begin
      n = $urandom_range(0, DEPTH);
      valid = '0;
      for (int i = 0; i < DEPTH; i++) begin
        entries[i] = '0;
        entries[i].is_write = ($urandom_range(0, 2) == 0);
        entries[i].bid  = BID_BITS'($urandom_range(0, NB - 1));
        entries[i].part = PART_BITS'($urandom_range(0, 3));
        entries[i].row  = ROW_BITS'($urandom_range(0, 2));
        entries[i].col  = COL_BITS'($urandom_range(0, 1));
        entries[i].age  = AGE_W'($urandom_range(0, 5));
        entries[i].tag  = TAG_W'(i);
        valid[i] = (i < n);
      end
      bank_idle = NB'($urandom) | NB'($urandom);
      ok_rr = NB'($urandom) | NB'($urandom);
      ok_rw = NB'($urandom) | NB'($urandom);
      compare(n);
    end
    checks++;
    if (seen_rww == 0 || seen_rwr == 0 || seen_single == 0 || seen_starve == 0 || seen_rapl == 0) begin
      failures++; $display("FAIL: some case never occurred");
    end
    $display("rww %0d rwr %0d single %0d starve %0d rapl-serialised %0d",
             seen_rww, seen_rwr, seen_single, seen_starve, seen_rapl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
