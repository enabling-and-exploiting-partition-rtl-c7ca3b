// palp_pkg: shared types, the address decoder (decode_addr), PCM timing and
// the command/data-bus slot patterns of the four PALP service sequences.
//
// Address map (following the paper's DDR4-style example for 4 channels,
// 4 ranks/channel, 8 banks/rank, 8 partitions/bank):
//   [36:35] rank, [34:23] row, [22:14] column, [13:11] partition,
//   [10:8] bank, [7:6] channel, [5:0] byte within the line (ignored).
//
// PCM timing in memory-clock cycles (paper): tRCD = 1, RL = 10, WL = 3,
// tWR = 35, 8 data beats per memory line. From these the four sequences
// used by the controller are laid out relative to the first ACTIVATE
// (cycle 0):
//   READ   A@0 R@1 P@18, read burst 11..18                     : 19 cycles
//   WRITE  A@0 W@1 P@46, write burst 4..11, tWR 12..46         : 47 cycles
//   RWW    Aw@0 Ar@1 RWW@2 P@47, write burst 5..12,
//          tWR 13..47, read burst 15..22                       : 48 cycles
//   RWR    A@0 A@1 D@2 RWR@3 T@21 P@29, sense-amp burst 13..20,
//          verify-logic burst 22..29                           : 30 cycles
// The 19/47/48/30 totals are the paper's; the placement of the RWW read
// burst (after the write burst, so the two never share the data bus) and
// of PRECHARGE in the last cycle are this design's choices.
package palp_pkg;

  // ---------------- address map ----------------
  localparam int ADDR_W    = 37;
  localparam int CH_BITS   = 2;
  localparam int RANK_BITS = 2;
  localparam int BANK_BITS = 3;
  localparam int PART_BITS = 3;
  localparam int ROW_BITS  = 12;
  localparam int COL_BITS  = 9;

  localparam int NUM_CH    = 1 << CH_BITS;     // 4 channels
  localparam int NUM_RANK  = 1 << RANK_BITS;   // 4 ranks per channel
  localparam int NUM_BANK  = 1 << BANK_BITS;   // 8 banks per rank
  localparam int NUM_PART  = 1 << PART_BITS;   // 8 partitions per bank
  localparam int BID_BITS  = RANK_BITS + BANK_BITS;
  localparam int NUM_BID   = 1 << BID_BITS;    // 32 banks per channel

  // ---------------- data ----------------
  localparam int LINE_W = 128;                 // memory line, 128 peripheral structures
  localparam int BEATS  = 8;                   // data transfer takes 8 cycles
  localparam int BEAT_W = LINE_W / BEATS;      // 16 bits per beat
  localparam int TAG_W  = 8;

  // ---------------- timing ----------------
  localparam int T_RCD = 1;
  localparam int T_RL  = 10;
  localparam int T_WL  = 3;
  localparam int T_WR  = 35;

  // READ alone
  localparam int RD_CMD   = T_RCD;                       // 1
  localparam int RD_DATA  = RD_CMD + T_RL;               // 11
  localparam int RD_DUR   = RD_DATA + BEATS;             // 19
  // WRITE alone
  localparam int WR_CMD   = T_RCD;                       // 1
  localparam int WR_DATA  = WR_CMD + T_WL;               // 4
  localparam int WR_DUR   = WR_DATA + BEATS + T_WR;      // 47
  // READ-WITH-WRITE
  localparam int RWW_CMD   = 1 + T_RCD;                  // 2
  localparam int RWW_WDATA = RWW_CMD + T_WL;             // 5
  localparam int RWW_RDATA = RWW_WDATA + T_RL;           // 15
  localparam int RWW_DUR   = RWW_WDATA + BEATS + T_WR;   // 48
  // DECOUPLE + READ-WITH-READ + TRANSFER
  localparam int RWR_DEC   = 1 + T_RCD;                  // 2
  localparam int RWR_CMD   = RWR_DEC + 1;                // 3
  localparam int RWR_DATA1 = RWR_CMD + T_RL;             // 13
  localparam int RWR_TRF   = RWR_DATA1 + BEATS;          // 21
  localparam int RWR_DATA2 = RWR_TRF + 1;                // 22
  localparam int RWR_DUR   = RWR_DATA2 + BEATS;          // 30

  localparam int MAX_DUR = RWW_DUR;                      // 48
  localparam int CNT_W   = 6;

  typedef logic [MAX_DUR-1:0] slot_mask_t;

  // ---------------- commands ----------------
  typedef enum logic [3:0] {
    CMD_NOP  = 4'd0,
    CMD_ACT  = 4'd1,
    CMD_RD   = 4'd2,
    CMD_WR   = 4'd3,
    CMD_PRE  = 4'd4,
    CMD_RWW  = 4'd5,
    CMD_RWR  = 4'd6,
    CMD_DEC  = 4'd7,
    CMD_TRF  = 4'd8
  } pcm_cmd_e;

  typedef enum logic [1:0] {
    OP_RD  = 2'd0,
    OP_WR  = 2'd1,
    OP_RWW = 2'd2,
    OP_RWR = 2'd3
  } op_e;

  typedef struct packed {
    logic [CH_BITS-1:0]   ch;
    logic [RANK_BITS-1:0] rank;
    logic [BANK_BITS-1:0] bank;
    logic [PART_BITS-1:0] part;
    logic [ROW_BITS-1:0]  row;
    logic [COL_BITS-1:0]  col;
  } loc_t;

  typedef struct packed {
    pcm_cmd_e             cmd;
    logic [BID_BITS-1:0]  bid;     // {rank, bank}
    logic [PART_BITS-1:0] part;
    logic [ROW_BITS-1:0]  row;
    logic [COL_BITS-1:0]  col;
  } pcm_cmd_t;

  // host request
  typedef struct packed {
    logic              is_write;
    logic [ADDR_W-1:0] addr;
    logic [LINE_W-1:0] data;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  // read response
  typedef struct packed {
    logic [TAG_W-1:0]  tag;
    logic [LINE_W-1:0] data;
  } rd_resp_t;

  localparam int AGE_W = 5;

  // one rwQ entry
  typedef struct packed {
    logic                 is_write;
    logic [BID_BITS-1:0]  bid;
    logic [PART_BITS-1:0] part;
    logic [ROW_BITS-1:0]  row;
    logic [COL_BITS-1:0]  col;
    logic [LINE_W-1:0]    data;
    logic [TAG_W-1:0]     tag;
    logic [AGE_W-1:0]     age;     // requests dispatched while this one waited
  } q_entry_t;

  // per-cycle event pulses of one channel controller
  typedef struct packed {
    logic issue_rd;        // single READ sequence started
    logic issue_wr;        // single WRITE sequence started
    logic issue_rww;       // READ-WITH-WRITE pair started
    logic issue_rwr;       // READ-WITH-READ pair started
    logic starve_forced;   // oldest request was past the starvation threshold
    logic rapl_serialized; // a partner existed but RAPL forced a single schedule
    logic bus_stall;       // a choice waited for free command/data bus slots
    logic queue_full;      // rwQ full, host request held off
  } chan_events_t;

  // ---------------- address decoding ----------------
  // Field split of a physical address (bit positions as in the header);
  // the byte offset [5:0] is dropped, every request moves one memory line.
  function automatic loc_t decode_addr(logic [ADDR_W-1:0] addr);
    loc_t l;
    l.rank = addr[36:35];
    l.row  = addr[34:23];
    l.col  = addr[22:14];
    l.part = addr[13:11];
    l.bank = addr[10:8];
    l.ch   = addr[7:6];
    return l;
  endfunction

  // ---------------- slot patterns ----------------
  function automatic slot_mask_t range_mask(int lo, int n);
    slot_mask_t m = '0;
    for (int i = 0; i < MAX_DUR; i++)
      if (i >= lo && i < lo + n) m[i] = 1'b1;
    return m;
  endfunction

  // command-bus slots used by a sequence, relative to its first ACTIVATE
  function automatic slot_mask_t cmd_slots(op_e op);
    slot_mask_t m = '0;
    case (op)
      OP_RD:  begin m[0] = 1'b1; m[RD_CMD] = 1'b1; m[RD_DUR-1] = 1'b1; end
      OP_WR:  begin m[0] = 1'b1; m[WR_CMD] = 1'b1; m[WR_DUR-1] = 1'b1; end
      OP_RWW: begin m[0] = 1'b1; m[1] = 1'b1; m[RWW_CMD] = 1'b1; m[RWW_DUR-1] = 1'b1; end
      default: begin
        m[0] = 1'b1; m[1] = 1'b1; m[RWR_DEC] = 1'b1; m[RWR_CMD] = 1'b1;
        m[RWR_TRF] = 1'b1; m[RWR_DUR-1] = 1'b1;
      end
    endcase
    return m;
  endfunction

  // data-bus slots (either direction) used by a sequence
  function automatic slot_mask_t data_slots(op_e op);
    case (op)
      OP_RD:   return range_mask(RD_DATA, BEATS);
      OP_WR:   return range_mask(WR_DATA, BEATS);
      OP_RWW:  return range_mask(RWW_WDATA, BEATS) | range_mask(RWW_RDATA, BEATS);
      default: return range_mask(RWR_DATA1, BEATS) | range_mask(RWR_DATA2, BEATS);
    endcase
  endfunction

  function automatic int unsigned op_duration(op_e op);
    case (op)
      OP_RD:   return RD_DUR;
      OP_WR:   return WR_DUR;
      OP_RWW:  return RWW_DUR;
      default: return RWR_DUR;
    endcase
  endfunction

endpackage
