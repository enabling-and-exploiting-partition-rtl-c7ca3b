// bank_sequencer: issues the PCM command sequence of one scheduling decision
// to one bank and moves its data.
//
// A start pulse (with op and the one or two requests) begins a sequence on
// the next cycle, t = 0. The four sequences and their offsets are those of
// palp_pkg (READ 19, WRITE 47, READ-WITH-WRITE 48 and READ-WITH-READ 30
// cycles, the paper's service times):
//   READ   ACT(a) RD ... PRE
//   WRITE  ACT(a) WR ... PRE
//   RWW    ACT(write) ACT(read) RWW ... PRE        (write partition first)
//   RWR    ACT(a) ACT(b) DECOUPLE RWR ... TRANSFER ... PRE
// For RWR the first read is served by the sense amplifiers and its data
// leaves first; the second by the write driver's verify logic, whose data
// follows the TRANSFER command. Write data leaves as 8 beats of 16 bits,
// least significant beat first; read beats are gathered the same way and
// the completed line is presented on resp one cycle after its last beat.
//
// busy is high from the cycle after start to the cycle before the last
// (PRECHARGE) cycle, so a new sequence may be started while PRECHARGE is
// on the bus and its ACTIVATE follows right after: the ACTIVATE-to-ACTIVATE
// spacing equals the sequence length. sa_active / wd_active tell the power
// monitor which peripheral units are in use. The channel controller
// guarantees that the command and data-bus slots of concurrent sequences of
// different banks never overlap.
module bank_sequencer
  import palp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  op_e               start_op,
  input  q_entry_t          start_a,
  input  q_entry_t          start_b,
  output logic              busy,
  output logic              cmd_valid,
  output pcm_cmd_t          cmd,
  output logic              wbeat_valid,
  output logic [BEAT_W-1:0] wbeat,
  input  logic [BEAT_W-1:0] rbeat,
  output logic              resp_valid,
  output rd_resp_t          resp,
  output logic              sa_active,
  output logic              wd_active
);
  logic             active;
  logic [CNT_W-1:0] t;
  op_e              op;
  q_entry_t         ra, rb;          // RWW: ra = write, rb = read
  logic [LINE_W-1:0] rbuf;
  int unsigned      dur;

  assign dur = op_duration(op);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      t      <= '0;
      op     <= OP_RD;
      ra     <= '0;
      rb     <= '0;
    end else if (start) begin
      active <= 1'b1;
      t      <= '0;
      op     <= start_op;
      if (start_op == OP_RWW && !start_a.is_write) begin
        ra <= start_b;
        rb <= start_a;
      end else begin
        ra <= start_a;
        rb <= start_b;
      end
    end else if (active) begin
      if (int'(t) == int'(dur) - 1) active <= 1'b0;
      t <= t + 1'b1;
    end
  end

  assign busy      = active && (int'(t) != int'(dur) - 1);
  assign sa_active = active && (op != OP_WR);
  assign wd_active = active && (op != OP_RD);

  function automatic pcm_cmd_t mk(pcm_cmd_e c, q_entry_t e);
    pcm_cmd_t x;
    x.cmd = c; x.bid = e.bid; x.part = e.part; x.row = e.row; x.col = e.col;
    return x;
  endfunction

  // command generation
  always_comb begin
    int ti;
    ti = int'(t);
    cmd = mk(CMD_NOP, ra);
    if (active) begin
      if (ti == int'(dur) - 1) cmd = mk(CMD_PRE, ra);
      else if (ti == 0)        cmd = mk(CMD_ACT, ra);
      else case (op)
        OP_RD:  if (ti == RD_CMD) cmd = mk(CMD_RD, ra);
        OP_WR:  if (ti == WR_CMD) cmd = mk(CMD_WR, ra);
        OP_RWW: if (ti == 1) cmd = mk(CMD_ACT, rb);
                else if (ti == RWW_CMD) cmd = mk(CMD_RWW, ra);
        default: if (ti == 1) cmd = mk(CMD_ACT, rb);
                 else if (ti == RWR_DEC) cmd = mk(CMD_DEC, ra);
                 else if (ti == RWR_CMD) cmd = mk(CMD_RWR, ra);
                 else if (ti == RWR_TRF) cmd = mk(CMD_TRF, ra);
      endcase
    end
    cmd_valid = (cmd.cmd != CMD_NOP);
  end

  // data windows
  logic       in_w, in_r, last_r, r_is_b;
  int         wbase, rbase;
  always_comb begin
    int ti;
    ti = int'(t);
    wbase = (op == OP_RWW) ? RWW_WDATA : WR_DATA;
    in_w  = active && (op == OP_WR || op == OP_RWW) && ti >= wbase && ti < wbase + BEATS;
    r_is_b = 1'b0;
    case (op)
      OP_RD:   rbase = RD_DATA;
      OP_RWW:  begin rbase = RWW_RDATA; r_is_b = 1'b1; end
      OP_RWR:  if (ti >= RWR_DATA2) begin rbase = RWR_DATA2; r_is_b = 1'b1; end
               else rbase = RWR_DATA1;
      default: rbase = 0;
    endcase
    in_r   = active && op != OP_WR && ti >= rbase && ti < rbase + BEATS;
    last_r = in_r && ti == rbase + BEATS - 1;
  end

  assign wbeat_valid = in_w;
  assign wbeat       = in_w ? ra.data[(int'(t) - wbase) * BEAT_W +: BEAT_W] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbuf       <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (in_r) rbuf[(int'(t) - rbase) * BEAT_W +: BEAT_W] <= rbeat;
      if (last_r) begin
        resp_valid <= 1'b1;
        resp.tag   <= r_is_b ? rb.tag : ra.tag;
        resp.data  <= {rbeat, rbuf[LINE_W-BEAT_W-1:0]};
      end
    end
  end

  // a bank may not be restarted while its sequence is still running
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(start && busy)) else $error("bank_sequencer: start while busy");
  end
endmodule
