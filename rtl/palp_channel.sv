// palp_channel: PALP memory controller for one PCM channel.
//
// Host requests (one 128-bit line each) enter the read-write queue (rwQ).
// Every cycle the PALP scheduler proposes one request, or a pair of requests
// to two partitions of the same bank that the bank can serve together
// (READ-WITH-WRITE or READ-WITH-READ), among the requests whose bank is idle.
// The proposal is dispatched when the command-bus and data-bus slots its
// sequence will need are all still free; otherwise it waits (bus stall) and
// the decision is taken again next cycle. Dispatch removes the request(s)
// from the rwQ and starts the bank's sequencer, which issues the PCM
// commands and moves the data on the channel's shared buses.
//
// Slot bookkeeping: two shift registers hold, for each of the next MAX_DUR
// cycles, whether a command or a data beat is already booked; a dispatch ORs
// in the fixed pattern of its sequence (palp_pkg::cmd_slots/data_slots).
// Because every sequence has a fixed timing, this is sufficient to keep the
// sequences of all banks from colliding on either bus.
//
// One bank_sequencer and one power account (rapl_monitor) per bank of the
// channel (4 ranks x 8 banks). Reads complete on resp (tag and line), one
// at most per cycle; writes complete silently. events pulses report what
// the controller did each cycle.
// The paper describes the scheduling policy; the bus-slot bookkeeping, the
// request/response handshake and the one-decision-per-cycle rate are this
// design's choices.
module palp_channel
  import palp_pkg::*;
#(
  parameter int QDEPTH = 32,
  parameter int TH_B   = 8,
  parameter int P_SA   = 182,
  parameter int P_WD   = 182,
  parameter int RAPL   = 300
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              req_valid,
  input  mem_req_t          req,
  output logic              req_ready,
  output logic              resp_valid,
  output rd_resp_t          resp,
  // PCM side
  output logic              pcm_cmd_valid,
  output pcm_cmd_t          pcm_cmd,
  output logic              pcm_wbeat_valid,
  output logic [BEAT_W-1:0] pcm_wbeat,
  input  logic [BEAT_W-1:0] pcm_rbeat,
  // status
  output chan_events_t      events
);
  localparam int NB = NUM_BID;
  localparam int IW = $clog2(QDEPTH);

  // ---------------- request intake ----------------
  loc_t     loc;
  q_entry_t push_entry;
  assign loc = decode_addr(req.addr);

  always_comb begin
    push_entry          = '0;
    push_entry.is_write = req.is_write;
    push_entry.bid      = {loc.rank, loc.bank};
    push_entry.part     = loc.part;
    push_entry.row      = loc.row;
    push_entry.col      = loc.col;
    push_entry.data     = req.data;
    push_entry.tag      = req.tag;
  end

  // ---------------- rwQ ----------------
  q_entry_t              entries [QDEPTH];
  logic [QDEPTH-1:0]     qvalid;
  logic [$clog2(QDEPTH+1)-1:0] qcount;
  logic                  pop0_en, pop1_en;
  logic [IW-1:0]         idx_a, idx_b;

  rw_queue #(.DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .push_valid(req_valid), .push_entry, .push_ready(req_ready),
    .pop0_en, .pop0_idx(idx_a), .pop1_en, .pop1_idx(idx_b),
    .entries, .valid(qvalid), .count(qcount)
  );

  // ---------------- per-bank state ----------------
  logic [NB-1:0] seq_busy, sa_act, wd_act, ok_rr, ok_rw;
  logic [NB-1:0] seq_cmd_v, seq_wb_v, seq_resp_v, start_vec;
  pcm_cmd_t      seq_cmd  [NB];
  logic [BEAT_W-1:0] seq_wb [NB];
  rd_resp_t      seq_resp [NB];

  rapl_monitor #(.NB(NB), .P_SA(P_SA), .P_WD(P_WD), .RAPL(RAPL)) u_rapl (
    .clk, .rst_n, .sa_active(sa_act), .wd_active(wd_act), .ok_rr, .ok_rw
  );

  // ---------------- scheduling decision ----------------
  logic sel_valid, sel_dual, starve_forced, rapl_serialized;
  op_e  sel_op;

  palp_scheduler #(.DEPTH(QDEPTH), .NB(NB), .TH_B(TH_B)) u_sched (
    .entries, .valid(qvalid), .bank_idle(~seq_busy), .ok_rr, .ok_rw,
    .sel_valid, .sel_dual, .sel_op, .idx_a, .idx_b, .starve_forced, .rapl_serialized
  );

  // ---------------- bus slot bookkeeping ----------------
  slot_mask_t res_cmd, res_data, need_cmd, need_data;
  logic fits, dispatch;

  assign need_cmd  = cmd_slots(sel_op);
  assign need_data = data_slots(sel_op);
  assign fits      = (((res_cmd >> 1) & need_cmd) == '0) && (((res_data >> 1) & need_data) == '0);
  assign dispatch  = sel_valid && fits;
  assign pop0_en   = dispatch;
  assign pop1_en   = dispatch && sel_dual;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_cmd  <= '0;
      res_data <= '0;
    end else begin
      res_cmd  <= (res_cmd >> 1)  | (dispatch ? need_cmd  : '0);
      res_data <= (res_data >> 1) | (dispatch ? need_data : '0);
    end
  end

  always_comb begin
    start_vec = '0;
    if (dispatch) start_vec[entries[idx_a].bid] = 1'b1;
  end

  // ---------------- bank sequencers ----------------
  for (genvar b = 0; b < NB; b++) begin : g_bank
    bank_sequencer u_seq (
      .clk, .rst_n,
      .start(start_vec[b]), .start_op(sel_op), .start_a(entries[idx_a]), .start_b(entries[idx_b]),
      .busy(seq_busy[b]),
      .cmd_valid(seq_cmd_v[b]), .cmd(seq_cmd[b]),
      .wbeat_valid(seq_wb_v[b]), .wbeat(seq_wb[b]),
      .rbeat(pcm_rbeat),
      .resp_valid(seq_resp_v[b]), .resp(seq_resp[b]),
      .sa_active(sa_act[b]), .wd_active(wd_act[b])
    );
  end

  // ---------------- shared buses ----------------
  always_comb begin
    pcm_cmd_valid   = 1'b0;
    pcm_cmd         = '0;
    pcm_wbeat_valid = 1'b0;
    pcm_wbeat       = '0;
    resp_valid      = 1'b0;
    resp            = '0;
    for (int b = 0; b < NB; b++) begin
      if (seq_cmd_v[b])  begin pcm_cmd_valid = 1'b1;   pcm_cmd = seq_cmd[b]; end
      if (seq_wb_v[b])   begin pcm_wbeat_valid = 1'b1; pcm_wbeat = seq_wb[b]; end
      if (seq_resp_v[b]) begin resp_valid = 1'b1;      resp = seq_resp[b]; end
    end
  end

  always_comb begin
    events                 = '0;
    events.issue_rd        = dispatch && sel_op == OP_RD;
    events.issue_wr        = dispatch && sel_op == OP_WR;
    events.issue_rww       = dispatch && sel_op == OP_RWW;
    events.issue_rwr       = dispatch && sel_op == OP_RWR;
    events.starve_forced   = dispatch && starve_forced;
    events.rapl_serialized = dispatch && rapl_serialized;
    events.bus_stall       = sel_valid && !fits;
    events.queue_full      = req_valid && !req_ready;
  end

  // the slot bookkeeping must keep the shared buses collision-free
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert ($onehot0(seq_cmd_v))  else $error("palp_channel: command bus collision");
      assert ($onehot0(seq_wb_v))   else $error("palp_channel: write data collision");
      assert ($onehot0(seq_resp_v)) else $error("palp_channel: response collision");
    end
  end

  logic unused;
  assign unused = ^qcount;
endmodule
