// tb_pulse_finder: self-checking test of pulse_finder.
//
// Generates streams of synthetic pulses (a triangular rise and exponential-like
// fall on a noisy baseline) with matching dCF values y = s[n] - s[n-2], packs
// them two samples per word with random idle clocks, and compares every
// candidate against a sample-by-sample integer model in the testbench:
// arming above threshold, window length, maximum, sum, first positive-to-
// non-positive crossing of y, drop of windows without a crossing, and the
// re-arm rule. A first directed part checks one pulse against hand-worked
// numbers and the one-clock output latency; ts_reset is exercised in the
// middle of the random part.
module tb_pulse_finder;
  import gandalf_pkg::*;
  localparam int NL = 2;
  logic clk = 0, rst_n = 0, ts_reset = 0, in_valid = 0;
  logic signed [NL-1:0][S_W-1:0] in_s = '0;
  logic signed [NL-1:0][Y_W-1:0] in_y = '0;
  logic signed [S_W-1:0] cfg_threshold = 20;
  logic [WIN_W-1:0] cfg_window = 6;
  logic cand_valid, drop;
  cand_t cand;
  int checks = 0, failures = 0;

  pulse_finder dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  typedef struct { longint t; int y0, y1, amp, q; } exp_t;
  exp_t exp_q[$];
  int   exp_drops = 0, got_drops = 0, got_cands = 0;
  bit   m_armed = 0, m_block = 0, m_found = 0;
  int   m_cnt, m_amax, m_q, m_y0, m_y1, m_yprev = 0;
  longint m_tc, m_t = 0;

  function automatic void model_sample(int s, int y);
    if (!m_armed) begin
      if (m_block && (s <= int'(cfg_threshold) || y > 0)) m_block = 0;
      if (!m_block && s > int'(cfg_threshold)) begin
        m_armed = 1; m_found = 0; m_amax = s; m_q = 0;
        m_cnt = (int'(cfg_window) < NL) ? NL : int'(cfg_window);
      end
    end
    if (m_armed) begin
      if (s > m_amax) m_amax = s;
      m_q += s;
      if (!m_found && m_yprev > 0 && y <= 0) begin
        m_found = 1; m_tc = m_t - 1; m_y0 = m_yprev; m_y1 = y;
      end
      m_cnt--;
      if (m_cnt == 0) begin
        exp_t e;
        m_armed = 0; m_block = 1;
        if (m_found) begin
          e.t = m_tc; e.y0 = m_y0; e.y1 = m_y1; e.amp = m_amax; e.q = m_q;
          exp_q.push_back(e);
        end else exp_drops++;
      end
    end
    m_yprev = y;
    m_t++;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n) begin
    #1;
    if (drop) got_drops++;
    if (cand_valid) begin
      exp_t e;
      got_cands++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected candidate t=%0d", cand.t_coarse);
      end else begin
        e = exp_q.pop_front();
        if (longint'(cand.t_coarse) != e.t || int'(cand.y0) != e.y0 || int'(cand.y1) != e.y1 ||
            int'(cand.amp) != e.amp || int'(cand.charge) != e.q) begin
          failures++;
          $display("cand mismatch: t %0d/%0d y0 %0d/%0d y1 %0d/%0d amp %0d/%0d q %0d/%0d",
                   cand.t_coarse, e.t, cand.y0, e.y0, cand.y1, e.y1, cand.amp, e.amp,
                   cand.charge, e.q);
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  int sbuf[$];     // sample stream to send
  int shist[$];

  task automatic send_stream(bit idle_gaps);
    while (sbuf.size() >= NL) begin
      while (idle_gaps && $urandom_range(4) == 0) begin
        in_valid = 0; @(posedge clk); #1;
      end
      in_valid = 1;
      for (int i = 0; i < NL; i++) begin
        int s, y, d;
        s = sbuf.pop_front();
        shist.push_back(s);
        d = (shist.size() > 2) ? shist[shist.size()-3] : 0;
        y = s - 2 * d;
        in_s[i] = S_W'(s);
        in_y[i] = Y_W'(y);
        model_sample(s, y);
      end
      @(posedge clk); #1;
      in_valid = 0;
    end
  endtask

  task automatic add_pulse(int amp, int len);
    int v;
    for (int k = 0; k < len; k++) begin
      if (k < 3) v = amp * (k + 1) / 3;
      else       v = amp * 3 / (k + 1);
      sbuf.push_back(v + $urandom_range(4) - 2);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // ---- directed: samples 0 0 | 30 60 | 90 45 | 30 22 | 0 0 | 0 0
    // y = s - 2*s[n-2]: 0 0 | 30 60 | 30 -75 | -150 -68 | -60 -44 | 0 0
    // arm at sample 2 (30 > 20), window 6 = samples 2..7: max 90, sum 277,
    // crossing between sample 4 (y=30) and 5 (y=-75): t0 = 4.
    begin
      int ds[12] = '{0, 0, 30, 60, 90, 45, 30, 22, 0, 0, 0, 0};
      foreach (ds[k]) sbuf.push_back(ds[k]);
      send_stream(0);
      checks++;
      if (got_cands != 1) begin failures++; $display("directed: %0d candidates", got_cands); end
    end
    begin
      exp_t e;
      checks++;
      // model and hand-worked numbers must agree (the model was already checked
      // against the DUT by the monitor)
      e.t = 4;
      if (!(m_tc == 4 && m_y0 == 30 && m_y1 == -75 && m_amax == 90 && m_q == 277)) begin
        failures++; $display("directed numbers differ: %0d %0d %0d %0d %0d", m_tc, m_y0, m_y1, m_amax, m_q);
      end
    end
    // ---- random pulses
    for (int run = 0; run < 4; run++) begin
      cfg_window    = WIN_W'((run == 3) ? 1 : 4 + 3 * run);
      cfg_threshold = S_W'(10 + 10 * run);
      for (int p = 0; p < 150; p++) begin
        repeat ($urandom_range(12)) sbuf.push_back($urandom_range(6) - 3);
        add_pulse($urandom_range(400) + 5, 4 + $urandom_range(12));
      end
      repeat (40) sbuf.push_back(0);
      if (sbuf.size() % 2) sbuf.push_back(0);
      send_stream(1);
      // time-stamp reset between runs
      @(posedge clk); #1 ts_reset = 1;
      @(posedge clk); #1 ts_reset = 0;
      m_t = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d candidates missing", exp_q.size()); end
    checks++;
    if (got_drops != exp_drops || exp_drops == 0) begin
      failures++; $display("drops %0d expected %0d", got_drops, exp_drops);
    end
    $display("candidates %0d drops %0d", got_cands, got_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
