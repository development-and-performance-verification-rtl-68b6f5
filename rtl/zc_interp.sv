// zc_interp: linear interpolation of the zero crossing and assembly of the hit.
//
// A candidate holds the index t0 of the last sample with y > 0 and the values
// y0 = y[t0] > 0 and y1 = y[t0+1] <= 0. The straight line through the two
// points crosses zero at t0 + y0 / (y0 - y1). The quotient lies in (0, 1]; it
// is computed with one integer and FW fractional bits by a restoring divider
// unrolled into FW+1 pipeline stages (one quotient bit per stage), so one
// candidate can enter every clock. The time stamp is t0 * 2^FW + quotient.
//
// Timing: hit_valid follows cand_valid by FW+2 clocks (input register plus
// FW+1 divider stages). The quotient is truncated, never rounded up.
//
// Linear interpolation of the zero crossing follows the published GANDALF
// design. The divider structure and the number of fractional bits are this
// design's choice.
module zc_interp
  import gandalf_pkg::*;
#(
  parameter logic [CH_W-1:0] CH = '0   // channel number written into the hit
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cand_valid,
  input  cand_t  cand,
  output logic   hit_valid,
  output hit_t   hit
);

  localparam int unsigned FW = FINE_W;       // fractional time bits
  localparam int unsigned NS = FW + 1;        // quotient bits / stages
  localparam int unsigned DW = Y_W + 1;       // y0 - y1 needs one more bit

  typedef struct packed {
    logic                  v;
    cand_t                 c;
    logic [DW-1:0]         rem;   // partial remainder (< den)
    logic [DW-1:0]         den;
    logic [NS-1:0]         q;
  } stage_t;

  stage_t pipe [NS+1];

  // trial[k]: shifted partial remainder tested in stage k. Stage 1 decides
  // the integer bit (y0 >= den only when y1 == 0), so it does not shift.
  logic [NS:1][DW:0] trial;
  always_comb begin
    trial[1] = {1'b0, pipe[0].rem};
    for (int k = 2; k <= NS; k++) trial[k] = {pipe[k-1].rem, 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= NS; k++) pipe[k] <= '0;
    end else begin
      // stage 0: register the candidate and form the denominator
      pipe[0].v   <= cand_valid;
      pipe[0].c   <= cand;
      pipe[0].rem <= DW'(cand.y0);
      pipe[0].den <= DW'($signed(cand.y0) - $signed(cand.y1));
      pipe[0].q   <= '0;
      // stages 1..NS: one restoring-division step each
      for (int k = 1; k <= NS; k++) begin
        pipe[k].v   <= pipe[k-1].v;
        pipe[k].c   <= pipe[k-1].c;
        pipe[k].den <= pipe[k-1].den;
        if (trial[k] >= {1'b0, pipe[k-1].den}) begin
          pipe[k].rem <= DW'(trial[k] - {1'b0, pipe[k-1].den});
          pipe[k].q   <= {pipe[k-1].q[NS-2:0], 1'b1};
        end else begin
          pipe[k].rem <= DW'(trial[k]);
          pipe[k].q   <= {pipe[k-1].q[NS-2:0], 1'b0};
        end
      end
    end
  end

  always_comb begin
    hit_valid  = pipe[NS].v;
    hit.ch     = CH;
    hit.t      = {pipe[NS].c.t_coarse, FW'(0)} + (TIME_W+FW)'(pipe[NS].q);
    hit.amp    = pipe[NS].c.amp;
    hit.charge = pipe[NS].c.charge;
  end

endmodule
