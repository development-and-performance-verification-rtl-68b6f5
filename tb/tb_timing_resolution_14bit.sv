// tb_timing_resolution_14bit: the two-channel timing measurement of
// tb_timing_resolution, run with the 14-bit, 400 MS/s converter option
// (ADC_W = 14), i.e. 800 MS/s in interleaved mode.
//
// Reproduces the kind of measurement used to qualify the digitiser: the same
// pulse is fed to two interleaved channel pairs (pair 0 -> hits on channel 0,
// pair 1 -> channel 2), the second copy delayed by a constant 3.37 ns, and
// the spread of the difference of the two time stamps gives the timing
// resolution of one channel (divided by sqrt(2)).
//
// Pulses: Moyal shape with 2 ns rise time (k = 0.69), amplitudes from 50 mV
// to 4 V of a 4 V range mapped onto the 14-bit scale (1 code = 4 V / 16384),
// baseline 200 codes, random arrival phase. Each ADC sample gets Gaussian
// noise of 3.05 codes rms: the noise of a 14-bit ADC with 10.6 effective bits
// (SNR = 6.02 * 10.6 + 1.76 dB against a full-scale sine). Clock jitter and
// analog effects are not modelled, so the numbers are the resolution of the
// algorithm with this quantisation and noise only.
//
// Settings: delay D = 2 samples (2.5 ns), fraction F = 2.0, threshold 80
// codes, window 8 samples. Checks: every pulse gives exactly one hit per
// channel and the mean time difference equals the injected delay within
// 20 ps. No resolution figure is published for this option, so the table of
// resolution against amplitude is printed without a limit.
module tb_timing_resolution_14bit;
  import gandalf_pkg::*;
  localparam int NP = 8, NC = 16;
  localparam int NPULSE = 150;            // pulses per amplitude
  localparam int SPACING = 60;            // clocks between pulses
  localparam int BASE = 200;
  localparam int AW = 14;
  localparam real TS = 2.5;             // ADC clock period, ns
  localparam real DELAY_NS = 3.37;
  localparam real TR_NS = 2.0, KK = 0.69, NOISE = 3.05;
  localparam int NAMP = 7;
  localparam real AMP_MV [NAMP] = '{50.0, 100.0, 160.0, 400.0, 1000.0, 2000.0, 3900.0};

  logic clk = 0, rst_n = 0, ts_reset = 0;
  logic [NC-1:0][AW-1:0] adc;
  logic [NP-1:0] interleave;
  logic [NC-1:0][DLY_W-1:0] cfg_delay;
  logic [NC-1:0][FRAC_W-1:0] cfg_fraction;
  logic [NC-1:0][AW-1:0] cfg_baseline;
  logic [NC-1:0][S_W-1:0] cfg_threshold;
  logic [NC-1:0][WIN_W-1:0] cfg_window;
  logic [NC-1:0] trig_valid, drop;
  hit_t [NC-1:0] trig_hit;
  logic ro_valid, ro_ready, ro_overflow;
  hit_t ro_hit;
  logic [15:0] ro_overflow_count;
  int checks = 0, failures = 0;

  gandalf_dsp_top #(.ADC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time unit of the stimulus: ns; one ADC clock = 2.5 ns, samples of an
  // interleaved pair at 2.5n and 2.5n + 1.25 ns
  function automatic real moyal(real t, real t0, real a);
    real u;
    u = (t - t0) / (KK * TR_NS);
    if (u < -6.0) return 0.0;
    return a * $exp(-0.5 * (u + $exp(-u) - 1.0));
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  function automatic logic [AW-1:0] code(real v);
    int c;
    c = int'($floor(v + gauss() * NOISE + 0.5));
    if (c < 0) c = 0;
    if (c > 16383) c = 16383;
    return AW'(c);
  endfunction

  real t0_now, a_now;
  int  h0 = 0, h2 = 0, extra = 0;
  longint t_h0, t_h2;
  real sum_d, sum_d2;
  int  n_d;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++)
      if (trig_valid[c] && c != 0 && c != 2) extra++;
    if (trig_valid[0]) begin h0++; t_h0 = longint'(trig_hit[0].t); end
    if (trig_valid[2]) begin h2++; t_h2 = longint'(trig_hit[2].t); end
  end

  initial begin
    real res [NAMP];
    longint cyc = 0;
    interleave = '0;
    interleave[0] = 1'b1;
    interleave[1] = 1'b1;
    ro_ready = 1'b1;
    for (int c = 0; c < NC; c++) begin
      cfg_delay[c] = 4'd2;
      cfg_fraction[c] = FRAC_W'(128);
      cfg_baseline[c] = AW'(BASE);
      cfg_threshold[c] = S_W'(80);
      cfg_window[c] = 8'd8;
      adc[c] = AW'(BASE);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    ts_reset = 1;
    @(posedge clk); #1 ts_reset = 0; cyc = 1;
    for (int ai = 0; ai < NAMP; ai++) begin
      sum_d = 0; sum_d2 = 0; n_d = 0;
      a_now = AMP_MV[ai] * 16384.0 / 4000.0;
      for (int p = 0; p < NPULSE; p++) begin
        int h0s, h2s;
        h0s = h0; h2s = h2;
        t0_now = TS * real'(cyc) + 20.0 + real'($urandom_range(2499)) / 1000.0;
        for (int n = 0; n < SPACING; n++) begin
          real ta, tb;
          ta = TS * real'(cyc);
          tb = ta + TS / 2.0;
          adc[0] = code(BASE + moyal(ta, t0_now, a_now));
          adc[1] = code(BASE + moyal(tb, t0_now, a_now));
          adc[2] = code(BASE + moyal(ta, t0_now + DELAY_NS, a_now));
          adc[3] = code(BASE + moyal(tb, t0_now + DELAY_NS, a_now));
          @(posedge clk); #1;
          cyc++;
        end
        checks++;
        if (h0 - h0s != 1 || h2 - h2s != 1) begin
          failures++;
          $display("amp %0.0f mV pulse %0d: %0d / %0d hits", AMP_MV[ai], p, h0 - h0s, h2 - h2s);
        end else begin
          real d;
          d = real'(t_h2 - t_h0) / 256.0 * TS / 2.0;   // interleaved sample = 1.25 ns
          sum_d += d; sum_d2 += d * d; n_d++;
        end
      end
      begin
        real mean, sig;
        mean = sum_d / n_d;
        sig = $sqrt(sum_d2 / n_d - mean * mean);
        res[ai] = sig / $sqrt(2.0) * 1000.0;
        $display("amplitude %7.1f mV (%5.1f %% of range): mean dt %6.3f ns, resolution %5.1f ps (%0d pairs)",
                 AMP_MV[ai], AMP_MV[ai] / 40.0, mean, res[ai], n_d);
        checks++;
        if (mean - DELAY_NS > 0.02 || DELAY_NS - mean > 0.02) begin
          failures++; $display("mean time difference off");
        end
      end
    end
    checks++;
    if (extra != 0) begin failures++; $display("%0d hits on idle channels", extra); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
