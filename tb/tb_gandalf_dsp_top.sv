// tb_gandalf_dsp_top: end-to-end test of the 16-channel pulse-processing
// datapath at its default size.
//
// The testbench synthesises ADC data for all 16 channels: photomultiplier-like
// pulses with the Moyal shape
//   f(t) = A * exp(-(u + exp(-u) - 1) / 2),  u = (t - t0) / (0.69 * tr),
// rise time tr = 1.5 ADC clocks, on a baseline of 200 codes with +-1 code of
// noise, at random fractional arrival times t0. An interleaved pair gets the
// same signal on both ADCs, the second sampled half a clock later.
//
// Two segments are run, separated by a quiet gap, a mode switch and a
// time-stamp reset: in segment 0 pairs 0-3 are interleaved and pairs 4-7 are
// normal, in segment 1 the other way round. Channel 15 has the fraction set
// to zero, so its dCF value never crosses zero and every pulse must be
// dropped; small pulses below threshold test the zero suppression; the
// readout is stalled for a stretch so that the merger overflows. One pulse in
// six is followed by a second one 7-12 clocks later, which must be found by
// the re-arm on a new leading edge (pile-up).
//
// Expected hits are derived from the generated samples by an integer model
// of each stream (baseline, y = s - F*s[n-D], arming, window, crossing,
// interpolation). Because the time-stamp origin depends on the word phase,
// times are compared relative to the first hit of each channel and segment.
// The time stamps are also converted back to ADC clocks and compared with the
// injected arrival times, like a two-pulse timing measurement. Each mechanism
// (interleaved and normal streams, mode switch, zero suppression, drop,
// pile-up re-arm, readout stall, overflow, time-stamp reset) is counted and
// must occur. Piled-up pulses are left out of the arrival-time comparison,
// since the tail of the first pulse shifts their crossing.
module tb_gandalf_dsp_top;
  import gandalf_pkg::*;
  localparam int NP = 8, NC = 16;
  localparam int SEGLEN = 4000;      // clocks per segment
  localparam int GAP = 60;           // quiet clocks around a mode switch
  localparam int NCYC = 2 * SEGLEN;
  localparam int BASE = 200, THR = 30, FRAC = 128;  // F = 2.0
  localparam real TR = 1.5, KK = 0.69;

  logic clk = 0, rst_n = 0, ts_reset = 0;
  logic [NC-1:0][SAMPLE_W-1:0] adc = '0;
  logic [NP-1:0] interleave = '0;
  logic [NC-1:0][DLY_W-1:0] cfg_delay;
  logic [NC-1:0][FRAC_W-1:0] cfg_fraction;
  logic [NC-1:0][SAMPLE_W-1:0] cfg_baseline;
  logic [NC-1:0][S_W-1:0] cfg_threshold;
  logic [NC-1:0][WIN_W-1:0] cfg_window;
  logic [NC-1:0] trig_valid, drop;
  hit_t [NC-1:0] trig_hit;
  logic ro_valid, ro_ready = 1, ro_overflow;
  hit_t ro_hit;
  logic [15:0] ro_overflow_count;
  int checks = 0, failures = 0;

  gandalf_dsp_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus data ----------------
  int samp [NC][NCYC];
  typedef struct { real t0; int a; bit piled; } pulse_t;
  localparam int MAXP = 200;
  pulse_t pulses [NC][MAXP];        // per ADC channel (physical signal)
  int     npul [NC];
  bit il_seg [2][NP];               // interleave per segment and pair

  function automatic real moyal(real t, real t0, int a);
    real u;
    u = (t - t0) / (KK * TR);
    if (u < -6.0) return 0.0;
    return a * $exp(-0.5 * (u + $exp(-u) - 1.0));
  endfunction

  function automatic int sig(int ch, real t);
    real v = BASE;
    for (int j = 0; j < npul[ch]; j++)
      if (t > pulses[ch][j].t0 - 10 && t < pulses[ch][j].t0 + 60)
        v += moyal(t, pulses[ch][j].t0, pulses[ch][j].a);
    return int'($floor(v + 0.5));
  endfunction

  // ---------------- expected hits ----------------
  typedef struct { longint tq; int amp, q; real t0; bit piled; } ehit_t;   // tq: stream index * 256 + frac
  ehit_t exp_h [2][NC][MAXP];
  int    nexp [2][NC];
  int    exp_drop [NC];
  int    n_small = 0, n_il_streams = 0, n_nm_streams = 0, n_pile_rearm = 0;

  // model one stream: s[] baseline-subtracted samples, tt[] their times (clocks)
  task automatic model_stream(int seg, int ch, int s[$], real tt[$], int d, int win, int thr,
                              int frac);
    bit armed = 0, block = 0, found = 0, edge_rearm = 0;
    int cnt = 0, amax = 0, q = 0, y0 = 0, y1 = 0, yprev = 0, karm = 0;
    longint kc = 0;
    for (int k = 0; k < s.size(); k++) begin
      int y, sd;
      sd = (k >= d) ? s[k-d] : 0;
      y = s[k] - ((sd * frac) >>> 6);
      if (!armed) begin
        if (block && (s[k] <= thr || y > 0)) begin
          block = 0;
          edge_rearm = (s[k] > thr);
        end
        if (!block && s[k] > thr) begin
          if (edge_rearm) n_pile_rearm++;
          edge_rearm = 0;
          armed = 1; found = 0; amax = s[k]; q = 0; cnt = (win < 2) ? 2 : win; karm = k;
        end
      end
      if (armed) begin
        if (s[k] > amax) amax = s[k];
        q += s[k];
        if (!found && yprev > 0 && y <= 0) begin
          found = 1; kc = k - 1; y0 = yprev; y1 = y;
        end
        cnt--;
        if (cnt == 0) begin
          armed = 0; block = 1;
          if (found) begin
            ehit_t e;
            e.tq = kc * 256 + (longint'(y0) * 256) / (y0 - y1);
            e.amp = amax; e.q = q;
            // arrival time of the pulse that armed the window
            e.t0 = -1.0;
            e.piled = 0;
            for (int j = 0; j < npul[ch]; j++)
              if (pulses[ch][j].t0 < tt[karm] + 4.0 && pulses[ch][j].t0 > tt[karm] - 4.0) begin
                e.t0 = pulses[ch][j].t0;
                e.piled = pulses[ch][j].piled;
              end
            exp_h[seg][ch][nexp[seg][ch]++] = e;
          end else exp_drop[ch]++;
        end
      end
      yprev = y;
    end
  endtask

  // ---------------- checking ----------------
  hit_t  got [2][NC][MAXP];
  int    ngot [2][NC];
  int    seg_now = 0;
  int    got_drop [NC];
  hit_t  ro_ref [NC][2*MAXP];
  int    ro_wr [NC], ro_rd [NC];
  int    n_ro = 0, n_ro_skipped = 0, n_stall = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (trig_valid[c]) begin
        got[seg_now][c][ngot[seg_now][c]++] = trig_hit[c];
        ro_ref[c][ro_wr[c]++] = trig_hit[c];
        checks++;
        if (trig_hit[c].ch != CH_W'(c)) begin failures++; $display("wrong channel field"); end
      end
      if (drop[c]) got_drop[c]++;
    end
    if (ro_valid && !ro_ready) n_stall++;
    if (ro_valid && ro_ready) begin
      automatic int c = int'(ro_hit.ch);
      automatic bit ok = 0;
      n_ro++;
      checks++;
      while (ro_rd[c] < ro_wr[c] && !ok) begin
        if (ro_ref[c][ro_rd[c]] == ro_hit) ok = 1;
        else n_ro_skipped++;
        ro_rd[c]++;
      end
      if (!ok) begin failures++; $display("readout hit not from channel %0d's hits", c); end
    end
  end

  task automatic compare_segment(int seg);
    for (int c = 0; c < NC; c++) begin
      real tunit;
      int p = c / 2;
      tunit = il_seg[seg][p] ? 0.5 : 1.0;
      checks++;
      if (ngot[seg][c] != nexp[seg][c]) begin
        failures++;
        $display("seg %0d ch %0d: %0d hits, expected %0d", seg, c, ngot[seg][c],
                 nexp[seg][c]);
        continue;
      end
      for (int j = 0; j < ngot[seg][c]; j++) begin
        longint dg, de;
        dg = longint'(got[seg][c][j].t) - longint'(got[seg][c][0].t);
        de = exp_h[seg][c][j].tq - exp_h[seg][c][0].tq;
        checks++;
        if (dg != de || int'(got[seg][c][j].amp) != exp_h[seg][c][j].amp ||
            int'(got[seg][c][j].charge) != exp_h[seg][c][j].q) begin
          failures++;
          $display("seg %0d ch %0d hit %0d: dt %0d/%0d amp %0d/%0d q %0d/%0d", seg, c, j,
                   dg, de, got[seg][c][j].amp, exp_h[seg][c][j].amp,
                   got[seg][c][j].charge, exp_h[seg][c][j].q);
        end
        // physical timing: time difference in clocks against injected delay
        if (exp_h[seg][c][j].t0 >= 0 && exp_h[seg][c][0].t0 >= 0 && !exp_h[seg][c][j].piled) begin
          real dphys, dinj;
          dphys = real'(dg) / 256.0 * tunit;
          dinj  = exp_h[seg][c][j].t0 - exp_h[seg][c][0].t0;
          checks++;
          if (dphys - dinj > 0.25 || dinj - dphys > 0.25) begin
            failures++;
            $display("seg %0d ch %0d hit %0d: timing error %f clocks", seg, c, j, dphys - dinj);
          end
          n_phys++;
          if (dphys - dinj > max_err) max_err = dphys - dinj;
          if (dinj - dphys > max_err) max_err = dinj - dphys;
        end
      end
    end
  endtask
  real max_err = 0.0;
  int  n_phys = 0;

  // ---------------- main ----------------
  initial begin
    for (int c = 0; c < NC; c++) begin
      npul[c] = 0; exp_drop[c] = 0; got_drop[c] = 0; ro_wr[c] = 0; ro_rd[c] = 0;
      for (int g = 0; g < 2; g++) begin nexp[g][c] = 0; ngot[g][c] = 0; end
    end
    // settings
    for (int c = 0; c < NC; c++) begin
      cfg_fraction[c]  = FRAC_W'((c == 15) ? 0 : FRAC);
      cfg_baseline[c]  = SAMPLE_W'(BASE);
      cfg_threshold[c] = S_W'(THR);
    end
    for (int p = 0; p < NP; p++) begin
      il_seg[0][p] = (p < 4);
      il_seg[1][p] = !(p < 4);
    end
    // pulses: per segment, per physical signal
    for (int seg = 0; seg < 2; seg++)
      for (int c = 0; c < NC; c++) begin
        automatic int p = c / 2;
        automatic real t;
        if (il_seg[seg][p] && c % 2 == 1) continue;    // b follows a's signal
        t = seg * SEGLEN + GAP + 20 + $urandom_range(40);
        while (t < (seg + 1) * SEGLEN - GAP - 80) begin
          automatic pulse_t pl;
          pl.t0 = t + $urandom_range(999) / 1000.0;
          pl.a  = ($urandom_range(7) == 0) ? 12 : 40 + $urandom_range(3200);
          if (pl.a == 12) n_small++;
          pl.piled = (npul[c] > 0) && (pl.t0 - pulses[c][npul[c]-1].t0 < 20.0);
          pulses[c][npul[c]++] = pl;
          // mostly isolated pulses; one in six is followed closely (pile-up)
          if ($urandom_range(5) == 0) t += 7 + $urandom_range(5);
          else t += 45 + $urandom_range(60);
        end
      end
    // samples
    for (int n = 0; n < NCYC; n++) begin
      automatic int seg = n / SEGLEN;
      for (int c = 0; c < NC; c++) begin
        automatic int p = c / 2;
        automatic int v;
        if (il_seg[seg][p]) v = sig(2 * p, n + 0.5 * (c % 2));
        else v = sig(c, n);
        v += $urandom_range(2) - 1;
        if (v < 0) v = 0;
        if (v > 4095) v = 4095;
        samp[c][n] = v;
      end
    end
    // expected hits per segment and stream
    for (int seg = 0; seg < 2; seg++)
      for (int c = 0; c < NC; c++) begin
        automatic int p = c / 2;
        automatic int s[$];
        automatic real tt[$];
        automatic int win;
        win = 8;
        if (il_seg[seg][p]) begin
          if (c % 2 == 1) continue;
          n_il_streams++;
          for (int n = seg * SEGLEN; n < (seg + 1) * SEGLEN; n++) begin
            s.push_back(samp[c][n] - BASE);     tt.push_back(n);
            s.push_back(samp[c + 1][n] - BASE); tt.push_back(n + 0.5);
          end
          model_stream(seg, c, s, tt, 2, win, THR, (c == 15) ? 0 : FRAC);
        end else begin
          n_nm_streams++;
          for (int n = seg * SEGLEN; n < (seg + 1) * SEGLEN; n++) begin
            s.push_back(samp[c][n] - BASE); tt.push_back(n);
          end
          model_stream(seg, c, s, tt, 1, win, THR, (c == 15) ? 0 : FRAC);
        end
      end

    // run
    for (int seg = 0; seg < 2; seg++) begin
      for (int p = 0; p < NP; p++) interleave[p] = il_seg[seg][p];
      for (int c = 0; c < NC; c++) begin
        cfg_delay[c]  = il_seg[seg][c / 2] ? 4'd2 : 4'd1;
        cfg_window[c] = 8'd8;
      end
      for (int n = seg * SEGLEN; n < (seg + 1) * SEGLEN; n++) begin
        for (int c = 0; c < NC; c++) adc[c] = SAMPLE_W'(samp[c][n]);
        if (seg == 0 && n == 2) rst_n = 1;
        ts_reset = (n == seg * SEGLEN + GAP / 2);
        if (n == seg * SEGLEN + GAP / 2 + 3) seg_now = seg;
        // readout: random ready, and a long stall in segment 1
        ro_ready = (seg == 1 && n > SEGLEN + 1000 && n < SEGLEN + 1800) ? 1'b0
                   : ($urandom_range(9) != 0);
        @(posedge clk); #1;
      end
      // let the pipelines finish this segment before its results are compared
      compare_segment(seg);
    end
    ro_ready = 1;
    repeat (300) @(posedge clk);
    #1;

    // drops and mechanism counts
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (got_drop[c] != exp_drop[c]) begin
        failures++; $display("ch %0d drops %0d expected %0d", c, got_drop[c], exp_drop[c]);
      end
    end
    checks++;
    if (n_ro_skipped != int'(ro_overflow_count)) begin
      failures++; $display("readout skipped %0d, overflow_count %0d", n_ro_skipped, ro_overflow_count);
    end
    begin
      automatic int n_hits = 0, n_drops = 0;
      for (int c = 0; c < NC; c++) n_drops += got_drop[c];
      for (int s = 0; s < 2; s++) for (int c = 0; c < NC; c++) n_hits += ngot[s][c];
      $display("hits %0d drops %0d readout %0d overflow %0d stall-cycles %0d small pulses %0d",
               n_hits, n_drops, n_ro, ro_overflow_count, n_stall, n_small);
      $display("interleaved streams %0d normal streams %0d mode switches 1 ts_resets 2 pile-up re-arms %0d",
               n_il_streams, n_nm_streams, n_pile_rearm);
      $display("max timing error %f ADC clocks over %0d hits", max_err, n_phys);
      checks++; if (n_phys < 500) begin failures++; $display("too few timed hits"); end
      checks++; if (n_il_streams == 0) begin failures++; $display("no interleaved stream"); end
      checks++; if (n_nm_streams == 0) begin failures++; $display("no normal stream"); end
      checks++; if (n_small == 0) begin failures++; $display("no zero suppression"); end
      checks++; if (n_drops == 0) begin failures++; $display("no drop"); end
      checks++; if (n_pile_rearm == 0) begin failures++; $display("no pile-up re-arm"); end
      checks++; if (n_stall == 0) begin failures++; $display("no readout stall"); end
      checks++; if (ro_overflow_count == 0) begin failures++; $display("no overflow"); end
      checks++; if (n_hits < 500) begin failures++; $display("too few hits"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
