// gandalf_dsp_top: pulse-processing datapath of the 16-channel transient
// recorder.
//
// The 16 ADC channels (two cards of 8) are grouped into N_PAIR adjacent
// pairs. Each pair passes through adc_pair_merge, which either forms one
// time-interleaved channel at twice the ADC rate (interleave[p] = 1) or two
// independent channels. Each of the two resulting sample streams feeds a
// processing chain:
//
//   cfd_filter  (baseline, y = s - F*s[n-D])
//     -> pulse_finder (zero suppression, window, height, charge, crossing)
//       -> zc_interp  (linear interpolation of the crossing, time stamp)
//
// Chain 2p serves ADC 2p (or the interleaved pair p), chain 2p+1 serves
// ADC 2p+1 and is idle while its pair is interleaved. Each chain's hits are
// brought out on their own port (one per high-speed trigger lane to the
// backplane) and all hits are merged by hit_merger into one readout stream
// with valid/ready flow control.
//
// ADC_W selects the converter: 12 bits (500 MS/s, the default) or 14 bits
// (400 MS/s); everything behind the baseline subtraction is sized for 14.
//
// Time stamps count samples of the chain's own stream since the last
// ts_reset: units of the ADC period for a normal channel, half of it for an
// interleaved one, with FINE_W fractional bits.
//
// Latency from the ADC inputs to a hit: 1 (merge) + 1 (filter) + 1 (finder)
// + FINE_W+2 (interpolation) clocks after the last sample of the window has
// been packed into a word; one more clock to the readout port.
//
// The ADCs, offset DACs, clock synthesiser, trigger/clock receiver, external
// memories, serial links and the VME interface lie outside this module: their
// signals are the ports below. Per-channel settings that a control bus would
// write are plain input ports.
module gandalf_dsp_top
  import gandalf_pkg::*;
#(
  parameter int unsigned N_PAIR = N_CH / 2,
  parameter int unsigned ADC_W  = SAMPLE_W    // 12 (ADS5463) or 14 (ADS5474)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             ts_reset,     // from trigger & clock
  // ADC samples, one per channel per clock
  input  logic [2*N_PAIR-1:0][ADC_W-1:0]   adc,
  // settings
  input  logic [N_PAIR-1:0]                interleave,
  input  logic [2*N_PAIR-1:0][DLY_W-1:0]   cfg_delay,
  input  logic [2*N_PAIR-1:0][FRAC_W-1:0]  cfg_fraction,
  input  logic [2*N_PAIR-1:0][ADC_W-1:0]   cfg_baseline,
  input  logic [2*N_PAIR-1:0][S_W-1:0]     cfg_threshold,
  input  logic [2*N_PAIR-1:0][WIN_W-1:0]   cfg_window,
  // per-channel hits (trigger lanes)
  output logic [2*N_PAIR-1:0]              trig_valid,
  output hit_t [2*N_PAIR-1:0]              trig_hit,
  output logic [2*N_PAIR-1:0]              drop,
  // merged readout stream
  output logic                             ro_valid,
  input  logic                             ro_ready,
  output hit_t                             ro_hit,
  output logic                             ro_overflow,
  output logic [15:0]                      ro_overflow_count
);

  localparam int unsigned NC = 2 * N_PAIR;

  if (ADC_W > SAMPLE_W_MAX || ADC_W < 2) begin : gen_adc_w_check
    $error("ADC_W must lie between 2 and %0d", SAMPLE_W_MAX);
  end

  logic [NC-1:0]                 w_valid;
  logic [NC-1:0][1:0][ADC_W-1:0] w_data;
  logic [NC-1:0]                 f_valid;
  logic signed [NC-1:0][1:0][S_W-1:0] f_s;
  logic signed [NC-1:0][1:0][Y_W-1:0] f_y;
  logic [NC-1:0]                 c_valid;
  cand_t [NC-1:0]                c_data;

  for (genvar p = 0; p < N_PAIR; p++) begin : g_pair
    adc_pair_merge #(.DW(ADC_W)) u_merge (
      .clk, .rst_n,
      .interleave(interleave[p]),
      .adc_a     (adc[2*p]),
      .adc_b     (adc[2*p+1]),
      .s0_valid  (w_valid[2*p]),
      .s0_data   (w_data[2*p]),
      .s1_valid  (w_valid[2*p+1]),
      .s1_data   (w_data[2*p+1])
    );
  end

  for (genvar c = 0; c < NC; c++) begin : g_chain
    cfd_filter #(.DW(ADC_W), .DMAX(15)) u_cfd (
      .clk, .rst_n,
      .in_valid    (w_valid[c]),
      .in_data     (w_data[c]),
      .cfg_delay   (cfg_delay[c]),
      .cfg_fraction(cfg_fraction[c]),
      .cfg_baseline(cfg_baseline[c]),
      .out_valid   (f_valid[c]),
      .out_s       (f_s[c]),
      .out_y       (f_y[c])
    );
    pulse_finder u_find (
      .clk, .rst_n,
      .ts_reset     (ts_reset),
      .in_valid     (f_valid[c]),
      .in_s         (f_s[c]),
      .in_y         (f_y[c]),
      .cfg_threshold(cfg_threshold[c]),
      .cfg_window   (cfg_window[c]),
      .cand_valid   (c_valid[c]),
      .cand         (c_data[c]),
      .drop         (drop[c])
    );
    zc_interp #(.CH(CH_W'(c))) u_interp (
      .clk, .rst_n,
      .cand_valid(c_valid[c]),
      .cand      (c_data[c]),
      .hit_valid (trig_valid[c]),
      .hit       (trig_hit[c])
    );
  end

  hit_merger #(.N_IN(NC), .DEPTH(8)) u_merge_ro (
    .clk, .rst_n,
    .in_valid      (trig_valid),
    .in_hit        (trig_hit),
    .out_valid     (ro_valid),
    .out_ready     (ro_ready),
    .out_hit       (ro_hit),
    .overflow      (ro_overflow),
    .overflow_count(ro_overflow_count)
  );

endmodule
