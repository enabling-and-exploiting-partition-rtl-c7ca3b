// palp_scheduler: the PALP access-scheduling decision, one per cycle.
//
// Looks at every rwQ entry and picks either one request or a pair of
// requests to different partitions of the same bank that the bank can serve
// together (READ-WITH-WRITE for a read and a write, READ-WITH-READ for two
// reads; two writes can never pair). The decision follows the paper's
// policy:
//   1. next = oldest request. If its age is below the starvation threshold
//      TH_B, next = oldest request that has a partner (falls back to the
//      oldest if none has).
//   2. Partner of a write: the oldest read. Partner of a read: the oldest
//      write; only if there is no such write, the oldest read.
//   3. The pair is served only if the RAPL estimate for its duration
//      (48 cycles R-W, 30 cycles R-R) stays within the limit; otherwise
//      next is served alone.
// Only requests whose bank is idle are candidates ("oldest" means oldest
// among those), and a request is held back while an older request to the
// same memory line is queued and either of the two is a write, so that
// reordering never changes what a read returns. Both rules are this
// design's choices: the paper's policy is written for a single bank.
// The paper's pseudo-code defines the partner sets as requests "to
// partition p" while its text requires "two different partitions within
// the bank"; the text is followed (same bank, different partition).
//
// Purely combinational; idx_a is always the older of the two chosen.
module palp_scheduler
  import palp_pkg::*;
#(
  parameter int DEPTH = 32,
  parameter int NB    = NUM_BID,
  parameter int TH_B  = 8
) (
  input  q_entry_t                 entries [DEPTH],
  input  logic [DEPTH-1:0]         valid,
  input  logic [NB-1:0]            bank_idle,
  input  logic [NB-1:0]            ok_rr,
  input  logic [NB-1:0]            ok_rw,
  output logic                     sel_valid,
  output logic                     sel_dual,
  output op_e                      sel_op,
  output logic [$clog2(DEPTH)-1:0] idx_a,
  output logic [$clog2(DEPTH)-1:0] idx_b,
  output logic                     starve_forced,
  output logic                     rapl_serialized
);
  localparam int IW = $clog2(DEPTH);

  logic [DEPTH-1:0] hazard, elig, has_partner;
  logic [DEPTH-1:0][DEPTH-1:0] same_bank_other_part;

  function automatic logic same_line(q_entry_t x, q_entry_t y);
    return x.bid == y.bid && x.part == y.part && x.row == y.row && x.col == y.col;
  endfunction

  always_comb begin
    for (int k = 0; k < DEPTH; k++) begin
      hazard[k] = 1'b0;
      for (int j = 0; j < DEPTH; j++)
        if (j < k && valid[j] && same_line(entries[j], entries[k]) &&
            (entries[j].is_write || entries[k].is_write))
          hazard[k] = 1'b1;
      elig[k] = valid[k] && bank_idle[entries[k].bid] && !hazard[k];
    end
    for (int k = 0; k < DEPTH; k++) begin
      has_partner[k] = 1'b0;
      for (int j = 0; j < DEPTH; j++) begin
        same_bank_other_part[k][j] = (j != k) && elig[k] && elig[j] &&
                                     entries[j].bid == entries[k].bid &&
                                     entries[j].part != entries[k].part;
        if (same_bank_other_part[k][j] && !(entries[k].is_write && entries[j].is_write))
          has_partner[k] = 1'b1;
      end
    end
  end

  always_comb begin
    logic found_old, found_pal, critical;
    logic found_w, found_r, found_p, use_rr, ok;
    logic [IW-1:0] oldest, oldest_pal, nxt, pw, pr, partner;

    found_old = 1'b0; oldest = '0;
    found_pal = 1'b0; oldest_pal = '0;
    for (int k = DEPTH - 1; k >= 0; k--) begin
      if (elig[k])        begin found_old = 1'b1; oldest = IW'(k); end
      if (has_partner[k]) begin found_pal = 1'b1; oldest_pal = IW'(k); end
    end

    critical = found_old && (int'(entries[oldest].age) >= TH_B);
    nxt = (!critical && found_pal) ? oldest_pal : oldest;

    // oldest write / oldest read in another partition of next's bank
    found_w = 1'b0; pw = '0;
    found_r = 1'b0; pr = '0;
    for (int j = DEPTH - 1; j >= 0; j--) begin
      if (same_bank_other_part[nxt][j]) begin
        if (entries[j].is_write) begin found_w = 1'b1; pw = IW'(j); end
        else                     begin found_r = 1'b1; pr = IW'(j); end
      end
    end

    if (entries[nxt].is_write) begin
      found_p = found_r; partner = pr; use_rr = 1'b0;
    end else if (found_w) begin
      found_p = 1'b1;    partner = pw; use_rr = 1'b0;
    end else begin
      found_p = found_r; partner = pr; use_rr = 1'b1;
    end
    ok = use_rr ? ok_rr[entries[nxt].bid] : ok_rw[entries[nxt].bid];

    sel_valid       = found_old;
    sel_dual        = found_old && found_p && ok;
    idx_a           = nxt;
    idx_b           = partner;
    starve_forced   = found_old && critical;
    rapl_serialized = found_old && found_p && !ok;
    if (sel_dual)                    sel_op = use_rr ? OP_RWR : OP_RWW;
    else if (entries[nxt].is_write)  sel_op = OP_WR;
    else                             sel_op = OP_RD;
  end
endmodule
