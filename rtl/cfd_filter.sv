// cfd_filter: digital constant-fraction filter for a word of LANES samples.
//
// Each sample first has a programmable baseline subtracted, s = x - baseline.
// The filter then forms, for every sample n,
//     y[n] = s[n] - F * s[n-D]
// i.e. the samples delayed by D, multiplied by the fraction F and inverted are
// added to the original samples. The zero crossing of y gives the pulse time
// (see pulse_finder and zc_interp). The delay D (1..DMAX samples) and the
// fraction F (unsigned, FFB fractional bits) are run-time settings.
//
// Samples are DW-bit unsigned codes; s is SW bits signed (SW > DW) and y is
// YW bits signed. With the package defaults (SW = 15, YW = 18) a 14-bit
// converter and any F below 4 fit without overflow.
//
// A history of the last DMAX samples is kept; it shifts by LANES samples per
// valid word, so D counts samples of the stream whatever its rate. Before the
// first DMAX samples the history holds zeros.
//
// Timing: one register stage; out_* belong to the word given one valid clock
// earlier (out_valid follows in_valid by one clock).
//
// The structure (delay, multiply, invert, add) follows the published GANDALF
// design. The baseline subtraction, widths, fixed-point format and rounding
// (truncation toward minus infinity of F*s) are this design's choice.
module cfd_filter
  import gandalf_pkg::*;
#(
  parameter int unsigned DW    = SAMPLE_W,   // ADC sample width
  parameter int unsigned SW    = S_W,        // baseline-subtracted width, > DW
  parameter int unsigned NL    = LANES,
  parameter int unsigned DMAX  = 15,
  parameter int unsigned FW    = FRAC_W,
  parameter int unsigned FFB   = FRAC_FB,
  parameter int unsigned YW    = Y_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [NL-1:0][DW-1:0]      in_data,
  input  logic [$clog2(DMAX+1)-1:0]  cfg_delay,     // 1..DMAX
  input  logic [FW-1:0]              cfg_fraction,  // F * 2^FFB
  input  logic [DW-1:0]              cfg_baseline,
  output logic                       out_valid,
  output logic signed [NL-1:0][SW-1:0] out_s,
  output logic signed [NL-1:0][YW-1:0] out_y
);

  localparam int unsigned PW = SW + FW + 1;   // product width

  // hist[k] = sample k positions before the oldest lane of the current word
  logic signed [DMAX-1:0][SW-1:0] hist;
  logic signed [NL-1:0][SW-1:0]   s_now;
  logic signed [DMAX+NL-1:0][SW-1:0] line;   // index 0 = newest
  logic signed [NL-1:0][YW-1:0]   y_now;

  always_comb begin
    for (int i = 0; i < NL; i++)
      s_now[i] = SW'($signed({1'b0, in_data[i]})) - SW'($signed({1'b0, cfg_baseline}));
    // newest first: lane NL-1 ... lane 0, then history
    for (int i = 0; i < NL; i++)
      line[i] = s_now[NL-1-i];
    for (int k = 0; k < DMAX; k++)
      line[NL+k] = hist[k];
  end

  always_comb begin
    for (int i = 0; i < NL; i++) begin
      logic signed [SW-1:0] sd;
      logic signed [PW-1:0] prod;
      logic signed [PW-1:0] yfull;
      int unsigned idx;
      idx   = (NL - 1 - i) + int'(cfg_delay);  // position of s[n-D]
      sd    = (idx < DMAX + NL) ? $signed(line[idx]) : '0;
      prod  = sd * $signed({1'b0, cfg_fraction});
      yfull = PW'($signed(s_now[i])) - (prod >>> FFB);
      y_now[i] = YW'(yfull);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist      <= '0;
      out_valid <= 1'b0;
      out_s     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < DMAX; k++)
          hist[k] <= line[k];
        out_s <= s_now;
        out_y <= y_now;
      end
    end
  end

endmodule
