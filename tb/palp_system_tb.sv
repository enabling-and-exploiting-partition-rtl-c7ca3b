// palp_system_tb: end-to-end test of the whole memory at its default
// configuration (4 channels x 32 banks x 8 partitions, rwQ of 32, starvation
// threshold 8, RAPL 0.3 pJ/access).
// Random reads and writes over all channels, alternating between spread-out
// traffic and phases that hammer two banks of every channel. Every read must
// return the line written last before it in arrival order (reference memory
// kept here, independently of the design). The banks must report no timing
// or command error, every read must be answered, and each mechanism must be
// seen at least once on some channel: single READ and WRITE, READ-WITH-WRITE,
// READ-WITH-READ, starvation override, RAPL serialisation, bus-slot stall and
// a full queue.
module palp_system_tb;
  import palp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready;
  mem_req_t req;
  logic resp_valid [NUM_CH];
  rd_resp_t resp [NUM_CH];
  chan_events_t events [NUM_CH];
  logic [NUM_CH-1:0] pcm_error;
  int checks = 0, failures = 0;
  localparam int NREQ = 6000;

  palp_system dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] mkaddr(int ch, int rank, int bank, int part, int row, int col);
    logic [ADDR_W-1:0] a = '0;
    a[36:35] = 2'(rank); a[34:23] = 12'(row); a[22:14] = 9'(col); a[13:11] = 3'(part);
    a[10:8] = 3'(bank); a[7:6] = 2'(ch); a[5:0] = 6'($urandom);   // byte offset is ignored
    return a;
  endfunction

  logic [LINE_W-1:0] ref_mem [logic [ADDR_W-7:0]];
  logic [LINE_W-1:0] exp_data [int];
  int n_resp = 0;
  logic [TAG_W-1:0] next_tag = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NUM_CH; c++) if (resp_valid[c]) begin
      checks++;
      n_resp++;
      if (!exp_data.exists(int'(resp[c].tag))) begin
        failures++; $display("FAIL unexpected response tag %0d on channel %0d", resp[c].tag, c);
      end else begin
        if (resp[c].data !== exp_data[int'(resp[c].tag)]) begin
          failures++; $display("FAIL read tag %0d data mismatch", resp[c].tag);
        end
        exp_data.delete(int'(resp[c].tag));
      end
    end
  end

  int c_rd = 0, c_wr = 0, c_rww = 0, c_rwr = 0, c_starve = 0, c_rapl = 0, c_stall = 0, c_full = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NUM_CH; c++) begin
      c_rd += int'(events[c].issue_rd); c_wr += int'(events[c].issue_wr);
      c_rww += int'(events[c].issue_rww); c_rwr += int'(events[c].issue_rwr);
      c_starve += int'(events[c].starve_forced); c_rapl += int'(events[c].rapl_serialized);
      c_stall += int'(events[c].bus_stall); c_full += int'(events[c].queue_full);
    end
  end

  task automatic send(input bit w, input logic [ADDR_W-1:0] a);
    mem_req_t r;
    while (exp_data.exists(int'(next_tag))) @(negedge clk);
    r.is_write = w; r.addr = a; r.tag = next_tag;
    r.data = {$urandom, $urandom, $urandom, $urandom};
    req_valid = 1; req = r;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    if (w) ref_mem[a[ADDR_W-1:6]] = r.data;
    else exp_data[int'(r.tag)] = ref_mem.exists(a[ADDR_W-1:6]) ? ref_mem[a[ADDR_W-1:6]] : '0;
    next_tag++;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int t0;
    req_valid = 0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = $time;
    for (int n = 0; n < NREQ; n++) begin
      bit hot;
      hot = ((n / 600) % 2) == 0;
      send($urandom_range(0, 99) < 30,
           mkaddr($urandom_range(0, 3), hot ? 0 : $urandom_range(0, 3), hot ? $urandom_range(0, 1) : $urandom_range(0, 7),
                  $urandom_range(0, 7), $urandom_range(0, 3), $urandom_range(0, 1)));
    end
    repeat (3000) @(negedge clk);
    checks++;
    if (exp_data.size() != 0) begin failures++; $display("FAIL %0d reads never answered", exp_data.size()); end
    checks++;
    if (|pcm_error) begin failures++; $display("FAIL PCM timing or command error reported"); end
    $display("requests %0d, read responses %0d, %0d cycles", NREQ, n_resp, ($time - t0) / 10);
    $display("rd %0d wr %0d rww %0d rwr %0d starve %0d rapl %0d stall %0d full %0d",
             c_rd, c_wr, c_rww, c_rwr, c_starve, c_rapl, c_stall, c_full);
    checks += 8;
    if (c_rd == 0)     begin failures++; $display("FAIL no single read");  end
    if (c_wr == 0)     begin failures++; $display("FAIL no single write"); end
    if (c_rww == 0)    begin failures++; $display("FAIL no RWW");          end
    if (c_rwr == 0)    begin failures++; $display("FAIL no RWR");          end
    if (c_starve == 0) begin failures++; $display("FAIL no starvation override"); end
    if (c_rapl == 0)   begin failures++; $display("FAIL no RAPL serialisation");  end
    if (c_stall == 0)  begin failures++; $display("FAIL no bus stall");    end
    if (c_full == 0)   begin failures++; $display("FAIL queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
