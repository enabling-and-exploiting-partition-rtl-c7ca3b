// rw_queue_tb: random pushes and one/two arbitrary pops per cycle, checked
// against a reference queue kept in the testbench (order, contents, ages,
// count and ready).
module rw_queue_tb;
  import palp_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic push_valid, push_ready, pop0_en, pop1_en;
  q_entry_t push_entry;
  logic [$clog2(DEPTH)-1:0] pop0_idx, pop1_idx;
  q_entry_t entries [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;

  rw_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  q_entry_t ref_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, i0, i1, npop;
    q_entry_t e, tmp [$];
    push_valid = 0; pop0_en = 0; pop1_en = 0; push_entry = '0; pop0_idx = 0; pop1_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (int'(count) != ref_q.size() || push_ready != (ref_q.size() < DEPTH)) begin
        failures++;
        $display("FAIL count %0d exp %0d", count, ref_q.size());
      end
      for (int k = 0; k < ref_q.size() && k < DEPTH; k++) begin
        checks++;
        if (!valid[k] || entries[k] != ref_q[k]) begin
          failures++;
          $display("FAIL cyc %0d entry %0d tag %0h age %0d exp tag %0h age %0d",
                   cyc, k, entries[k].tag, entries[k].age, ref_q[k].tag, ref_q[k].age);
        end
      end
      // drive
      n = ref_q.size();
      push_valid = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 80 : 45));
      push_entry = '0;
      push_entry.is_write = 1'($urandom);
      push_entry.bid  = BID_BITS'($urandom);
      push_entry.part = PART_BITS'($urandom);
      push_entry.row  = ROW_BITS'($urandom);
      push_entry.data = {4{$urandom}};
      push_entry.tag  = TAG_W'(cyc);
      push_entry.age  = AGE_W'($urandom);   // must be ignored
      pop0_en = (n > 0) && ($urandom_range(0, 99) < 40);
      pop1_en = (n > 1) && pop0_en && ($urandom_range(0, 99) < 50);
      i0 = (n > 0) ? $urandom_range(0, n - 1) : 0;
      i1 = (n > 1) ? $urandom_range(0, n - 1) : 0;
      if (pop1_en && i1 == i0) i1 = (i0 + 1) % n;
      pop0_idx = i0[$clog2(DEPTH)-1:0];
      pop1_idx = i1[$clog2(DEPTH)-1:0];
      // reference next state
      npop = int'(pop0_en) + int'(pop1_en);
      tmp = {};
      for (int k = 0; k < n; k++) begin
        if ((pop0_en && k == i0) || (pop1_en && k == i1)) continue;
        e = ref_q[k];
        e.age = (int'(e.age) + npop > 31) ? 5'd31 : e.age + AGE_W'(npop);
        tmp.push_back(e);
      end
      if (push_valid && n < DEPTH) begin
        e = push_entry; e.age = '0;
        tmp.push_back(e);
      end
      @(posedge clk);
      ref_q = tmp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
