// palp_system: a PALP-controlled PCM main memory.
//
// Four channels, each with its own PALP controller (palp_channel) and its
// 32 PCM banks (4 ranks x 8 banks, 8 partitions per bank, each bank modelled
// by pcm_bank_model with its modified peripheral structures decoded by
// peripheral_ctrl). A host request is routed to the channel named by
// address bits [7:6]; req_ready reflects that channel's queue, so a request
// is accepted in a cycle where req_valid and req_ready are both high. Read
// data returns on the channel's own response port (resp_valid/resp, one per
// channel), in completion order and identified by the request tag; writes
// are posted. events[c] pulses per cycle for every decision channel c makes;
// pcm_error[c] reports a timing or command-order error seen by a bank.
//
// Inside a channel the controller drives a command bus and a 16-bit
// write-data bus shared by its 32 banks; the banks' read beats are ORed onto
// one read-data bus (at most one bank drives it in any cycle, which an
// assertion checks).
//
// The PCM banks are behavioural models (they stand for the PCM chips), so
// this top is a simulation model of the whole memory; the controllers and
// the peripheral switch decoders inside it are synthesizable.
// The channel, rank, bank and partition counts and the address fields
// follow the paper; one shared request port and one response port per
// channel are this design's choices.
module palp_system
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
  input  logic              req_valid,
  input  mem_req_t          req,
  output logic              req_ready,
  output logic              resp_valid [NUM_CH],
  output rd_resp_t          resp       [NUM_CH],
  output chan_events_t      events     [NUM_CH],
  output logic [NUM_CH-1:0] pcm_error
);
  loc_t loc;
  assign loc = decode_addr(req.addr);

  logic [NUM_CH-1:0] ch_ready;
  assign req_ready = ch_ready[loc.ch];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic               cmd_valid, wbeat_valid;
    pcm_cmd_t           cmd;
    logic [BEAT_W-1:0]  wbeat, rbeat;
    logic [NUM_BID-1:0] rb_valid, t_err, c_err;
    logic [BEAT_W-1:0]  rb [NUM_BID];

    palp_channel #(.QDEPTH(QDEPTH), .TH_B(TH_B), .P_SA(P_SA), .P_WD(P_WD), .RAPL(RAPL)) u_ctrl (
      .clk, .rst_n,
      .req_valid(req_valid && loc.ch == c), .req, .req_ready(ch_ready[c]),
      .resp_valid(resp_valid[c]), .resp(resp[c]),
      .pcm_cmd_valid(cmd_valid), .pcm_cmd(cmd),
      .pcm_wbeat_valid(wbeat_valid), .pcm_wbeat(wbeat),
      .pcm_rbeat(rbeat),
      .events(events[c])
    );

    for (genvar b = 0; b < NUM_BID; b++) begin : g_bank
      pcm_bank_model #(.BID(BID_BITS'(b))) u_bank (
        .clk, .rst_n, .cmd_valid, .cmd, .wbeat_valid, .wbeat,
        .rbeat_valid(rb_valid[b]), .rbeat(rb[b]),
        .timing_err(t_err[b]), .cmd_err(c_err[b])
      );
    end

    always_comb begin
      rbeat = '0;
      for (int b = 0; b < NUM_BID; b++) rbeat |= rb[b];
    end

    assign pcm_error[c] = (|t_err) || (|c_err);

    always_ff @(posedge clk) begin
      if (rst_n) assert ($onehot0(rb_valid)) else $error("palp_system: read data collision on channel %0d", c);
    end
  end
endmodule
