// pcm_bank_model: behavioural model of one PCM bank, for simulation only.
//
// The cells, sense amplifiers and write drivers of a PCM bank are analog
// circuits; this model reproduces what the controller can observe of them.
// It keeps the contents of the bank's partitions (a sparse table of 128-bit
// lines; a line never written reads as zero), and uses the synthesizable
// peripheral_ctrl switch decoder to decide which partition each unit is
// connected to:
//   - one cycle after READ / RWW / RWR the sense amplifier latches the line
//     of the partition switched to it; after RWR the decoupled verify logic
//     also latches the line of its partition;
//   - the sense-amplifier line is driven on the data bus RL cycles after
//     READ or RWR, and WL + RL cycles after RWW (after the write burst), as
//     8 beats, while M6 connects it; the verify-logic line goes out in the
//     8 cycles after TRANSFER, while M5 connects it;
//   - WRITE / RWW collect 8 write beats starting WL cycles after the
//     command; the cells take the value at PRECHARGE, which must come at
//     least tWR after the last beat (program-and-verify time).
// It only listens to commands carrying its own bank id (BID). timing_err is
// a sticky flag for a command that breaks tRCD or tWR, a missing write
// beat, or an invalid switch setting; cmd_err comes from peripheral_ctrl.
module pcm_bank_model
  import palp_pkg::*;
#(
  parameter logic [BID_BITS-1:0] BID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  pcm_cmd_t          cmd,
  input  logic              wbeat_valid,
  input  logic [BEAT_W-1:0] wbeat,
  output logic              rbeat_valid,
  output logic [BEAT_W-1:0] rbeat,
  output logic              timing_err,
  output logic              cmd_err
);
  localparam int AW = PART_BITS + ROW_BITS + COL_BITS;

  logic mine;
  assign mine = cmd_valid && cmd.bid == BID;

  logic [NUM_PART-1:0] wd_sw, sa_sw;
  logic m4, m5, m6, cfg_invalid;
  logic [1:0] act_cnt;
  logic [PART_BITS-1:0] first_part, second_part;

  peripheral_ctrl #(.NPART(NUM_PART)) u_ctrl (
    .clk, .rst_n, .cmd_valid(mine), .cmd(cmd.cmd), .part(cmd.part),
    .wd_sw, .sa_sw, .m4, .m5, .m6, .act_cnt, .first_part, .second_part,
    .cfg_invalid, .cmd_err
  );

  logic [LINE_W-1:0] cells [logic [AW-1:0]];
  logic [ROW_BITS-1:0] act_row [NUM_PART];
  logic [COL_BITS-1:0] act_col [NUM_PART];

  longint cyc;
  longint last_act, sa_start, vl_start, w_start, last_wbeat;
  logic sense_pend, write_pend;
  logic [LINE_W-1:0] sa_line, vl_line, wbuf;

  function automatic logic [AW-1:0] line_addr(int p);
    return {PART_BITS'(p), act_row[p], act_col[p]};
  endfunction

  function automatic logic [LINE_W-1:0] fetch(logic [AW-1:0] a);
    if (cells.exists(a)) return cells[a];
    return '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; last_act <= -100; sa_start <= -100; vl_start <= -100; w_start <= -100;
      last_wbeat <= -100; sense_pend <= 1'b0; write_pend <= 1'b0;
      sa_line <= '0; vl_line <= '0; wbuf <= '0; timing_err <= 1'b0;
      for (int p = 0; p < NUM_PART; p++) begin act_row[p] <= '0; act_col[p] <= '0; end
    end else begin
      cyc <= cyc + 1;
      // sensing, one cycle after the read command has set the switches
      sense_pend <= 1'b0;
      if (sense_pend) begin
        for (int p = 0; p < NUM_PART; p++) begin
          if (sa_sw[p]) sa_line <= fetch(line_addr(p));
          if (!m4 && wd_sw[p]) vl_line <= fetch(line_addr(p));
        end
      end
      if (cfg_invalid) timing_err <= 1'b1;
      // write data collection
      if (write_pend && cyc >= w_start && cyc < w_start + BEATS) begin
        if (!wbeat_valid) timing_err <= 1'b1;
        wbuf[(cyc - w_start) * BEAT_W +: BEAT_W] <= wbeat;
        last_wbeat <= cyc;
      end
      if (mine) begin
        case (cmd.cmd)
          CMD_ACT: begin
            act_row[cmd.part] <= cmd.row;
            act_col[cmd.part] <= cmd.col;
            last_act <= cyc;
          end
          CMD_RD: begin
            if (cyc - last_act < T_RCD) timing_err <= 1'b1;
            sense_pend <= 1'b1;
            sa_start <= cyc + T_RL;
          end
          CMD_WR: begin
            if (cyc - last_act < T_RCD) timing_err <= 1'b1;
            write_pend <= 1'b1;
            w_start <= cyc + T_WL;
          end
          CMD_RWW: begin
            if (cyc - last_act < T_RCD) timing_err <= 1'b1;
            sense_pend <= 1'b1;
            write_pend <= 1'b1;
            w_start <= cyc + T_WL;
            sa_start <= cyc + T_WL + T_RL;
          end
          CMD_DEC: if (cyc - last_act < T_RCD) timing_err <= 1'b1;
          CMD_RWR: begin
            if (cyc - last_act < T_RCD) timing_err <= 1'b1;
            sense_pend <= 1'b1;
            sa_start <= cyc + T_RL;
          end
          CMD_TRF: begin
            if (cyc < sa_start + BEATS) timing_err <= 1'b1;
            vl_start <= cyc + 1;
          end
          CMD_PRE: begin
            if (write_pend) begin
              if (cyc - last_wbeat < T_WR || cyc < w_start + BEATS) timing_err <= 1'b1;
              for (int p = 0; p < NUM_PART; p++)
                if (wd_sw[p] && m4) cells[line_addr(p)] = wbuf;
              write_pend <= 1'b0;
            end
            if (cyc < sa_start + BEATS - 1) timing_err <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // read data onto the bus
  always_comb begin
    rbeat_valid = 1'b0;
    rbeat       = '0;
    if (cyc >= sa_start && cyc < sa_start + BEATS && m6) begin
      rbeat_valid = 1'b1;
      rbeat       = sa_line[(cyc - sa_start) * BEAT_W +: BEAT_W];
    end else if (cyc >= vl_start && cyc < vl_start + BEATS && m5) begin
      rbeat_valid = 1'b1;
      rbeat       = vl_line[(cyc - vl_start) * BEAT_W +: BEAT_W];
    end
  end
endmodule
