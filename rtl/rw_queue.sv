// rw_queue: the controller's read-write queue (rwQ).
//
// Requests are kept in arrival order, entry 0 being the oldest, so "oldest"
// in the scheduling policy is simply the lowest valid index. Unlike a plain
// FIFO, the scheduler may take any one or two entries per cycle (the pair
// it serves concurrently); the remaining entries close up in order, and a
// new request, if accepted, joins at the tail in the same cycle.
//
// Each entry carries an age: the number of requests dispatched from this
// queue while it waited. The starvation threshold of the policy is compared
// with this count (the paper quotes the threshold as "8 accesses").
//
// Interface: push_valid/push_ready handshake (ready while not full, an
// accepted entry is visible on the next cycle); pop*_en with pop*_idx
// remove entries at the clock edge. Reset empties the queue.
// The queue depth is not given by the paper; 32 is this design's choice.
module rw_queue
  import palp_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push_valid,
  input  q_entry_t                 push_entry,
  output logic                     push_ready,
  input  logic                     pop0_en,
  input  logic [$clog2(DEPTH)-1:0] pop0_idx,
  input  logic                     pop1_en,
  input  logic [$clog2(DEPTH)-1:0] pop1_idx,
  output q_entry_t                 entries [DEPTH],
  output logic [DEPTH-1:0]         valid,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  q_entry_t q_r [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt_r;

  q_entry_t q_n [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt_n;

  assign push_ready = (cnt_r < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count      = cnt_r;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      entries[i] = q_r[i];
      valid[i]   = (i < int'(cnt_r));
    end
  end

  always_comb begin
    int unsigned pos;
    int unsigned npop;
    logic [AGE_W-1:0] inc;
    logic keep;
    npop = 32'(pop0_en) + 32'(pop1_en && !(pop0_en && pop1_idx == pop0_idx));
    inc  = AGE_W'(npop);
    pos  = 0;
    for (int i = 0; i < DEPTH; i++) q_n[i] = q_r[i];
    for (int i = 0; i < DEPTH; i++) begin
      keep = (i < int'(cnt_r)) &&
             !(pop0_en && int'(pop0_idx) == i) &&
             !(pop1_en && int'(pop1_idx) == i);
      if (keep) begin
        q_n[pos] = q_r[i];
        if (q_r[i].age > {AGE_W{1'b1}} - inc) q_n[pos].age = '1;
        else                                   q_n[pos].age = q_r[i].age + inc;
        pos++;
      end
    end
    if (push_valid && push_ready) begin
      q_n[pos]     = push_entry;
      q_n[pos].age = '0;
      pos++;
    end
    cnt_n = pos[$clog2(DEPTH+1)-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_r <= '0;
      for (int i = 0; i < DEPTH; i++) q_r[i] <= '0;
    end else begin
      cnt_r <= cnt_n;
      for (int i = 0; i < DEPTH; i++) q_r[i] <= q_n[i];
    end
  end

  // a pop must name a valid entry
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!pop0_en || int'(pop0_idx) < int'(cnt_r)) else $error("rw_queue: pop0 of empty slot");
      assert (!pop1_en || int'(pop1_idx) < int'(cnt_r)) else $error("rw_queue: pop1 of empty slot");
    end
  end
endmodule
