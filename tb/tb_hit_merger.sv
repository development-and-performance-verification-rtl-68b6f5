// tb_hit_merger: self-checking test of hit_merger (with its hit_fifo buffers).
//
// Sixteen inputs receive random hits at a random load, the output is read
// with a random ready pattern. The testbench keeps one queue of DEPTH entries
// per input and a round-robin pointer of its own; before every clock edge it
// checks out_valid and out_hit against the queue head that round-robin order
// must choose, and it counts the hits that arrive at a full queue, which must
// match overflow_count. Phases with ready held low force overflow; a final
// drain checks that every buffered hit comes out.
module tb_hit_merger;
  import gandalf_pkg::*;
  localparam int N = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid = '0;
  hit_t [N-1:0] in_hit = '0;
  logic out_valid, out_ready = 0, overflow;
  hit_t out_hit;
  logic [15:0] overflow_count;
  int checks = 0, failures = 0;

  hit_merger #(.N_IN(N), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  hit_t q[N][$];
  int   last = N - 1, lost = 0, delivered = 0, serial = 0;
  bit   stalled = 0;
  int   held = 0;

  task automatic cycle(int load_pct, int ready_pct);
    int sel; bit any;
    // drive inputs
    for (int i = 0; i < N; i++) begin
      in_valid[i] = ($urandom_range(99) < load_pct);
      in_hit[i].ch = CH_W'(i);
      in_hit[i].t = (TIME_W + FINE_W)'(serial++);
      in_hit[i].amp = S_W'($urandom);
      in_hit[i].charge = Q_W'($urandom);
    end
    out_ready = ($urandom_range(99) < ready_pct);
    // expected arbitration
    any = 0; sel = 0;
    if (stalled) begin any = 1; sel = held; end
    else for (int k = 1; k <= N; k++) begin
      int idx = (last + k) % N;
      if (!any && q[idx].size() != 0) begin any = 1; sel = idx; end
    end
    #1;
    checks++;
    if (out_valid !== any || (any && out_hit !== q[sel][0])) begin
      failures++;
      $display("t=%0t valid %b/%b hit ch %0d t %0d, expected ch %0d", $time, out_valid, any,
               out_hit.ch, out_hit.t, sel);
    end
    // model update at the edge
    for (int i = 0; i < N; i++)
      if (in_valid[i] && q[i].size() == DEPTH) lost++;
    if (any && out_ready) begin
      void'(q[sel].pop_front());
      last = sel;
      delivered++;
    end
    stalled = any && !out_ready;
    held = sel;
    for (int i = 0; i < N; i++) begin
      // the FIFO ignores a write while full, judged before this clock's read
      bit was_full;
      was_full = (q[i].size() + ((any && out_ready && sel == i) ? 1 : 0)) == DEPTH;
      if (in_valid[i] && !was_full) q[i].push_back(in_hit[i]);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) cycle(4, 90);     // light load
    for (int n = 0; n < 300; n++)  cycle(30, 0);     // stalled: overflow
    for (int n = 0; n < 2000; n++) cycle(8, 70);     // mixed
    for (int n = 0; n < 400; n++)  cycle(0, 100);    // drain
    checks++;
    if (int'(overflow_count) != lost || lost == 0) begin
      failures++; $display("overflow_count %0d expected %0d", overflow_count, lost);
    end
    checks++;
    if (out_valid) begin failures++; $display("not drained"); end
    $display("delivered %0d lost %0d", delivered, lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
