// rapl_monitor: running-average power of every bank and the RAPL test of
// the scheduling policy.
//
// The paper estimates the power of a concurrent schedule as
//   P_est = (N*P + T*P_SA + T*P_WD) / (N + T),
// with N the cycles elapsed, P the running average power, and T = 30 cycles
// for a read-read pair or 48 for a read-write pair; the pair is allowed when
// P_est <= RAPL. Because N*P is simply the energy spent so far (E), the test
// is done without a divider as
//   E + T*(P_SA + P_WD) <= RAPL * (N + T).
// E is accumulated per bank: each cycle a bank adds P_SA while its sense
// amplifiers are busy and P_WD while its write drivers (or, in decoupled
// mode, their verify logic) are busy. N counts cycles since reset.
//
// Units: power values are in thousandths of the paper's pJ/access figures.
// RAPL = 300 is the paper's default limit of 0.3 pJ/access. The paper gives
// no separate P_SA and P_WD; this design splits the 0.364 pJ/access of one
// modified peripheral structure equally (182 + 182).
// Outputs ok_rr/ok_rw are combinational from registered state.
module rapl_monitor
  import palp_pkg::*;
#(
  parameter int NB    = NUM_BID,
  parameter int P_SA  = 182,
  parameter int P_WD  = 182,
  parameter int RAPL  = 300,
  parameter int E_W   = 48
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] sa_active,
  input  logic [NB-1:0] wd_active,
  output logic [NB-1:0] ok_rr,
  output logic [NB-1:0] ok_rw
);
  localparam int T_RR = RWR_DUR;   // 30
  localparam int T_RW = RWW_DUR;   // 48

  logic [E_W-1:0] energy [NB];
  logic [E_W-1:0] n_cyc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cyc <= '0;
      for (int b = 0; b < NB; b++) energy[b] <= '0;
    end else begin
      n_cyc <= n_cyc + 1'b1;
      for (int b = 0; b < NB; b++)
        energy[b] <= energy[b] + (sa_active[b] ? E_W'(P_SA) : '0)
                               + (wd_active[b] ? E_W'(P_WD) : '0);
    end
  end

  logic [E_W+9:0] lim_rr, lim_rw;
  assign lim_rr = (E_W+10)'(RAPL) * (E_W+10)'(n_cyc + E_W'(T_RR));
  assign lim_rw = (E_W+10)'(RAPL) * (E_W+10)'(n_cyc + E_W'(T_RW));

  // energy a pair of each kind would add
  localparam logic [E_W+9:0] ADD_RR = (E_W+10)'(T_RR) * ((E_W+10)'(P_SA) + (E_W+10)'(P_WD));
  localparam logic [E_W+9:0] ADD_RW = (E_W+10)'(T_RW) * ((E_W+10)'(P_SA) + (E_W+10)'(P_WD));

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      ok_rr[b] = ((E_W+10)'(energy[b]) + ADD_RR) <= lim_rr;
      ok_rw[b] = ((E_W+10)'(energy[b]) + ADD_RW) <= lim_rw;
    end
  end
endmodule
