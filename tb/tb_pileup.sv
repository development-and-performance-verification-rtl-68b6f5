// tb_pileup: double-pulse separation at 1 GS/s through the complete datapath
// at its default size.
//
// Two consecutive pulses (Moyal shape, rise time 3 ns) are fed to the
// interleaved channel pair 0 for every combination of first and second
// amplitude from {5, 10, 25, 50, 90} % of the 12-bit range, with the delay
// between them scanned from 2 ns to 40 ns in 1 ns steps (random arrival
// phase, 1.07 codes rms noise). A pair counts as separated when the channel
// delivers exactly two hits and each lies within 1 ns of the time the same
// pulse gives on its own (its single-pulse offset, measured first). The
// printed table holds, for each amplitude pair, the smallest delay from which
// all larger delays in the scan were separated.
//
// Settings: D = 2 samples, F = 2.0, threshold 20 codes, window 6 samples.
// Checks: every single pulse gives exactly one hit; every amplitude pair is
// separated at the longest delay of the scan; the separation delay is
// reported for each pair; a pair of equal pulses at 40 ns gives two hits in
// order on the readout stream as well.
module tb_pileup;
  import gandalf_pkg::*;
  localparam int NP = 8, NC = 16;
  localparam int BASE = 50;
  localparam real TR_NS = 3.0, KK = 0.69, NOISE = 1.07;
  localparam int NA = 5;
  localparam real AMP_PC [NA] = '{5.0, 10.0, 25.0, 50.0, 90.0};
  localparam int DMIN = 2, DMAX_NS = 40;

  logic clk = 0, rst_n = 0, ts_reset = 0;
  logic [NC-1:0][SAMPLE_W-1:0] adc;
  logic [NP-1:0] interleave;
  logic [NC-1:0][DLY_W-1:0] cfg_delay;
  logic [NC-1:0][FRAC_W-1:0] cfg_fraction;
  logic [NC-1:0][SAMPLE_W-1:0] cfg_baseline;
  logic [NC-1:0][S_W-1:0] cfg_threshold;
  logic [NC-1:0][WIN_W-1:0] cfg_window;
  logic [NC-1:0] trig_valid, drop;
  hit_t [NC-1:0] trig_hit;
  logic ro_valid, ro_ready, ro_overflow;
  hit_t ro_hit;
  logic [15:0] ro_overflow_count;
  int checks = 0, failures = 0;

  gandalf_dsp_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic logic [SAMPLE_W-1:0] code(real v);
    int c;
    c = int'($floor(v + gauss() * NOISE + 0.5));
    if (c < 0) c = 0;
    if (c > 4095) c = 4095;
    return SAMPLE_W'(c);
  endfunction

  // hits of channel 0, time in ns relative to the ts_reset origin
  real hits [8];
  int  nh = 0;
  real ro_t [8];
  int  nro = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    if (trig_valid[0]) begin
      if (nh < 8) hits[nh] = real'(longint'(trig_hit[0].t)) / 256.0;
      nh++;
    end
    if (ro_valid && ro_ready) begin
      if (nro < 8) ro_t[nro] = real'(longint'(ro_hit.t)) / 256.0;
      nro++;
    end
  end

  // one shot: pulses at t1 (amplitude a1) and t1 + dt (a2, if a2 > 0);
  // 80 clocks of signal. Stream sample k of the interleaved pair is at k ns
  // after the origin, so hit times are directly in ns.
  task automatic shot(real a1, real a2, real dt, output real t1);
    nh = 0; nro = 0;
    t1 = 2.0 * real'(cyc) + 30.0 + real'($urandom_range(1999)) / 1000.0;
    for (int n = 0; n < 80; n++) begin
      real ta, tb;
      ta = 2.0 * real'(cyc);
      tb = ta + 1.0;
      adc[0] = code(BASE + moyal(ta, t1, a1) + moyal(ta, t1 + dt, a2));
      adc[1] = code(BASE + moyal(tb, t1, a1) + moyal(tb, t1 + dt, a2));
      @(posedge clk); #1;
      cyc++;
    end
  endtask

  initial begin
    real offs [NA];
    int  sep [NA][NA];
    real t1;
    interleave = '0;
    interleave[0] = 1'b1;
    ro_ready = 1'b1;
    for (int c = 0; c < NC; c++) begin
      cfg_delay[c] = 4'd2;
      cfg_fraction[c] = FRAC_W'(128);
      cfg_baseline[c] = SAMPLE_W'(BASE);
      cfg_threshold[c] = S_W'(20);
      cfg_window[c] = 8'd6;
      adc[c] = SAMPLE_W'(BASE);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    ts_reset = 1;
    @(posedge clk); #1 ts_reset = 0; cyc = 1;   // stream sample 0 = 2 ns
    // single-pulse offsets (time stamp - arrival time), averaged over 20 shots
    for (int i = 0; i < NA; i++) begin
      automatic real acc = 0.0;
      for (int r = 0; r < 20; r++) begin
        shot(AMP_PC[i] * 40.96, 0.0, 0.0, t1);
        checks++;
        if (nh != 1) begin failures++; $display("single pulse %0.0f %%: %0d hits", AMP_PC[i], nh); end
        else acc += hits[0] - (t1 - 2.0);
      end
      offs[i] = acc / 20.0;
    end
    // double pulses
    for (int i = 0; i < NA; i++)
      for (int j = 0; j < NA; j++) begin
        sep[i][j] = -1;
        for (int d = DMAX_NS; d >= DMIN; d--) begin
          bit ok;
          shot(AMP_PC[i] * 40.96, AMP_PC[j] * 40.96, real'(d), t1);
          ok = (nh == 2);
          if (ok) begin
            real e1, e2;
            e1 = hits[0] - (t1 - 2.0) - offs[i];
            e2 = hits[1] - (t1 + d - 2.0) - offs[j];
            ok = (e1 < 1.0 && e1 > -1.0 && e2 < 1.0 && e2 > -1.0);
          end
          if (d == DMAX_NS) begin
            checks++;
            if (!ok) begin
              failures++;
              $display("amplitudes %0.0f/%0.0f %%: not separated at %0d ns (%0d hits: %f %f, t1 %f, offs %f %f)",
                       AMP_PC[i], AMP_PC[j], d, nh, hits[0], hits[1], t1, offs[i], offs[j]);
            end
          end
          if (!ok) break;
          sep[i][j] = d;
        end
      end
    // readout stream carries both hits of an equal pair in order
    shot(1000.0, 1000.0, 40.0, t1);
    checks++;
    if (nro != 2 || !(ro_t[1] > ro_t[0])) begin
      failures++; $display("readout: %0d hits", nro);
    end
    $display("minimum separable delay [ns], rows: first pulse, columns: second pulse (%% of range)");
    $display("          %6.0f %6.0f %6.0f %6.0f %6.0f", AMP_PC[0], AMP_PC[1], AMP_PC[2], AMP_PC[3], AMP_PC[4]);
    for (int i = 0; i < NA; i++)
      $display("  %6.0f  %6d %6d %6d %6d %6d", AMP_PC[i], sep[i][0], sep[i][1], sep[i][2],
               sep[i][3], sep[i][4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
