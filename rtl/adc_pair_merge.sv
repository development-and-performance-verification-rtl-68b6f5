// adc_pair_merge: forms two-sample words from the two ADCs of an adjacent
// channel pair.
//
// Two adjacent channels can be operated time-interleaved: both ADCs see the
// same input signal and the second ADC (b) samples half a clock period after
// the first (a), so the sample sequence in time is a[n], b[n], a[n+1], ...
//
//   interleave = 1 : stream 0 carries {b[n], a[n]} (lane 0 = a, the earlier
//                    sample) every clock, one channel at twice the ADC rate;
//                    stream 1 is idle.
//   interleave = 0 : two independent channels. Stream 0 packs two consecutive
//                    samples of a, stream 1 two of b, into one word every
//                    second clock (lane 0 = the earlier sample).
//
// Inputs are registered once; a word leaves one clock after its last sample
// arrived. A change of mode restarts the packing phase.
//
// The interleave order follows the published GANDALF design (the second ADC
// is clocked at 180 degrees). The word packing and its timing are this
// design's choice, so that one processing chain of two lanes per clock
// serves either mode.
module adc_pair_merge #(
  parameter int unsigned DW = gandalf_pkg::SAMPLE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                interleave,
  input  logic [DW-1:0]       adc_a,
  input  logic [DW-1:0]       adc_b,
  output logic                s0_valid,
  output logic [1:0][DW-1:0]  s0_data,
  output logic                s1_valid,
  output logic [1:0][DW-1:0]  s1_data
);

  logic          phase;     // normal mode: 1 when the held sample is lane 0
  logic          mode_q;
  logic [DW-1:0] hold_a, hold_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= 1'b0;
      mode_q   <= 1'b0;
      hold_a   <= '0;
      hold_b   <= '0;
      s0_valid <= 1'b0;
      s1_valid <= 1'b0;
      s0_data  <= '0;
      s1_data  <= '0;
    end else begin
      mode_q <= interleave;
      if (interleave) begin
        s0_valid <= 1'b1;
        s0_data  <= {adc_b, adc_a};
        s1_valid <= 1'b0;
        phase    <= 1'b0;
      end else if (mode_q || !phase) begin
        // first sample of a word (also after leaving interleaved mode)
        hold_a   <= adc_a;
        hold_b   <= adc_b;
        phase    <= 1'b1;
        s0_valid <= 1'b0;
        s1_valid <= 1'b0;
      end else begin
        s0_valid <= 1'b1;
        s0_data  <= {adc_a, hold_a};
        s1_valid <= 1'b1;
        s1_data  <= {adc_b, hold_b};
        phase    <= 1'b0;
      end
    end
  end

endmodule
