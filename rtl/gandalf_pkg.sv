// gandalf_pkg: constants and record types shared by the pulse-processing
// datapath of the 16-channel transient recorder.
//
// Samples are unsigned ADC codes of SAMPLE_W bits (12 bits for the 500 MS/s
// converter, the default); the datapath behind the baseline subtraction is
// sized for up to SAMPLE_W_MAX = 14 bits (the 400 MS/s converter). Every processing chain handles a word of LANES = 2 samples per
// clock: the two samples of an interleaved channel pair, or two consecutive
// samples of one channel. After baseline subtraction a sample is signed
// (S_W bits); the constant-fraction value y is signed Y_W bits wide.
//
// A hit is the result of one pulse: channel number, time stamp (coarse sample
// count with FINE_W fractional bits from the zero-crossing interpolation),
// pulse height and integrated charge. Field widths are this design's choice:
// the published design gives only the sample width and the channel count.
package gandalf_pkg;

  localparam int unsigned SAMPLE_W = 12;  // ADS5463: 12 bit (default)
  localparam int unsigned SAMPLE_W_MAX = 14; // ADS5474: 14 bit
  localparam int unsigned LANES    = 2;   // samples per word (channel pair)
  localparam int unsigned N_CH     = 16;  // two cards of 8 channels
  localparam int unsigned CH_W     = 4;   // $clog2(N_CH)
  localparam int unsigned S_W      = SAMPLE_W_MAX + 1; // baseline-subtracted sample
  localparam int unsigned Y_W      = 18;  // constant-fraction value, |y| < 5 * 2^14
  localparam int unsigned TIME_W   = 32;  // coarse time, in samples
  localparam int unsigned FINE_W   = 8;   // fractional bits of the time stamp
  localparam int unsigned Q_W      = 24;  // integrated charge
  localparam int unsigned WIN_W    = 8;   // integration window length field
  localparam int unsigned DLY_W    = 4;   // constant-fraction delay field
  localparam int unsigned FRAC_W   = 8;   // fraction factor, unsigned Q2.6
  localparam int unsigned FRAC_FB  = 6;   // fractional bits of the factor

  // Candidate produced by the pulse finder, before interpolation.
  typedef struct packed {
    logic [TIME_W-1:0]   t_coarse; // sample index of y0 (last sample with y > 0)
    logic signed [Y_W-1:0] y0;     // dCF value before the crossing (> 0)
    logic signed [Y_W-1:0] y1;     // dCF value after the crossing (<= 0)
    logic signed [S_W-1:0] amp;    // pulse height (maximum sample)
    logic signed [Q_W-1:0] charge; // sum of samples in the window
  } cand_t;

  // Finished hit.
  typedef struct packed {
    logic [CH_W-1:0]            ch;
    logic [TIME_W+FINE_W-1:0]   t;      // time stamp, FINE_W fractional bits
    logic signed [S_W-1:0]      amp;
    logic signed [Q_W-1:0]      charge;
  } hit_t;

endpackage
