// peripheral_ctrl: switch control of a bank's shared peripheral structures.
//
// Each of the bank's 128 peripheral structures holds a sense amplifier and a
// write driver (write pulse shaper plus verify logic) that can be connected
// to any partition. This block turns the PCM commands addressed to the bank
// into the gate controls of those connections, shared by all 128
// structures:
//   wd_sw[p]  partition p to the write-driver node      (M0 / M2 in the
//   sa_sw[p]  partition p to the sense amplifier         paper's two-partition
//                                                          figure: M0 = wd_sw[i],
//                                                          M1 = sa_sw[i],
//                                                          M2 = wd_sw[j],
//                                                          M3 = sa_sw[j])
//   m4        1 = verify logic coupled to the pulse shaper (write mode),
//             0 = decoupled mode, verify logic acts as a second read sensor
//   m5, m6    data-bus selection: m6 = 1 puts the sense amplifier on the
//             internal data bus, m5 = 1 the verify logic
// Command effects (paper, Tables 2-4 and Sec. 3):
//   ACTIVATE  records the partition (at most two, different ones)
//   READ      sense amplifier to the activated partition
//   WRITE     write driver to the activated partition
//   RWW       write driver to the first activated partition, sense
//             amplifier to the second
//   DECOUPLE  m4 = 0
//   RWR       sense amplifier to the first, verify logic to the second
//             (decoupled mode required)
//   TRANSFER  m5 = 1, m6 = 0
//   PRECHARGE all partition switches off, m4 = 1, m5 = 0, m6 = 1
// Which activated partition the RWW write uses (the first) is this design's
// convention, matching the order of the paper's command lists.
// cfg_invalid flags a switch setting the paper marks invalid (two partitions
// on one unit, or one partition on both units). cmd_err is a sticky flag
// for a command given in a state where it is not allowed.
// Outputs are registered and change on the clock edge after the command.
module peripheral_ctrl
  import palp_pkg::*;
#(
  parameter int NPART = NUM_PART
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  pcm_cmd_e         cmd,
  input  logic [PART_BITS-1:0] part,
  output logic [NPART-1:0] wd_sw,
  output logic [NPART-1:0] sa_sw,
  output logic             m4,
  output logic             m5,
  output logic             m6,
  output logic [1:0]       act_cnt,
  output logic [PART_BITS-1:0] first_part,
  output logic [PART_BITS-1:0] second_part,
  output logic             cfg_invalid,
  output logic             cmd_err
);
  function automatic logic [NPART-1:0] onehot(logic [PART_BITS-1:0] p);
    logic [NPART-1:0] v = '0;
    v[p] = 1'b1;
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wd_sw <= '0; sa_sw <= '0;
      m4 <= 1'b1; m5 <= 1'b0; m6 <= 1'b1;
      act_cnt <= '0; first_part <= '0; second_part <= '0;
      cmd_err <= 1'b0;
    end else if (cmd_valid) begin
      case (cmd)
        CMD_ACT: begin
          if (act_cnt == 2'd0) begin
            first_part <= part; act_cnt <= 2'd1;
          end else if (act_cnt == 2'd1 && part != first_part) begin
            second_part <= part; act_cnt <= 2'd2;
          end else cmd_err <= 1'b1;
        end
        CMD_RD: begin
          if (act_cnt != 2'd1) cmd_err <= 1'b1;
          sa_sw <= onehot(first_part);
        end
        CMD_WR: begin
          if (act_cnt != 2'd1 || !m4) cmd_err <= 1'b1;
          wd_sw <= onehot(first_part);
        end
        CMD_RWW: begin
          if (act_cnt != 2'd2 || !m4) cmd_err <= 1'b1;
          wd_sw <= onehot(first_part);
          sa_sw <= onehot(second_part);
        end
        CMD_DEC: begin
          if (act_cnt != 2'd2) cmd_err <= 1'b1;
          m4 <= 1'b0;
        end
        CMD_RWR: begin
          if (act_cnt != 2'd2 || m4) cmd_err <= 1'b1;
          sa_sw <= onehot(first_part);
          wd_sw <= onehot(second_part);
        end
        CMD_TRF: begin
          if (m4) cmd_err <= 1'b1;
          m5 <= 1'b1; m6 <= 1'b0;
        end
        CMD_PRE: begin
          wd_sw <= '0; sa_sw <= '0;
          m4 <= 1'b1; m5 <= 1'b0; m6 <= 1'b1;
          act_cnt <= '0;
        end
        default: ;
      endcase
    end
  end

  assign cfg_invalid = ($countones(wd_sw) > 1) || ($countones(sa_sw) > 1) || (|(wd_sw & sa_sw));
endmodule
