// rapl_monitor_tb: random per-bank activity; the testbench keeps its own
// energy and cycle totals and evaluates the paper's equation with real
// division, P_est <= RAPL, for both pair kinds and every bank.
module rapl_monitor_tb;
  import palp_pkg::*;
  localparam int NB = 4;
  localparam int PSA = 182, PWD = 182, LIM = 300;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] sa_active, wd_active, ok_rr, ok_rw;
  int checks = 0, failures = 0;
  int n_ok = 0, n_deny = 0;

  rapl_monitor #(.NB(NB), .P_SA(PSA), .P_WD(PWD), .RAPL(LIM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e [NB];
    longint n;
    real p, est_rr, est_rw;
    logic exp_rr, exp_rw;
    int busy;
    sa_active = '0; wd_active = '0;
    for (int b = 0; b < NB; b++) e[b] = 0;
    n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // phases of heavy and light activity so both outcomes occur
      busy = ((cyc / 1500) % 2) ? 95 : 20;
      for (int b = 0; b < NB; b++) begin
        sa_active[b] = ($urandom_range(0, 99) < busy);
        wd_active[b] = ($urandom_range(0, 99) < busy);
      end
      #1;
      for (int b = 0; b < NB; b++) begin
        p = (n == 0) ? 0.0 : real'(e[b]) / real'(n);
        est_rr = (real'(n) * p + 30.0 * PSA + 30.0 * PWD) / (real'(n) + 30.0);
        est_rw = (real'(n) * p + 48.0 * PSA + 48.0 * PWD) / (real'(n) + 48.0);
        exp_rr = (est_rr <= real'(LIM) + 1.0e-9);
        exp_rw = (est_rw <= real'(LIM) + 1.0e-9);
        checks += 2;
        if (ok_rr[b] !== exp_rr) begin failures++; $display("FAIL rr b%0d cyc %0d est %f", b, cyc, est_rr); end
        if (ok_rw[b] !== exp_rw) begin failures++; $display("FAIL rw b%0d cyc %0d est %f", b, cyc, est_rw); end
        if (exp_rw) n_ok++; else n_deny++;
      end
      @(negedge clk);
      for (int b = 0; b < NB; b++) e[b] += (sa_active[b] ? PSA : 0) + (wd_active[b] ? PWD : 0);
      n++;
    end
    checks++;
    if (n_ok == 0 || n_deny == 0) begin failures++; $display("FAIL: both outcomes not seen %0d %0d", n_ok, n_deny); end
    $display("allowed %0d denied %0d", n_ok, n_deny);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
