// hit_merger: merges the hits of all processing chains into one readout
// stream.
//
// Every input has its own hit_fifo of DEPTH entries. A round-robin arbiter
// picks, among the non-empty FIFOs, the first one after the input granted
// last, and offers its oldest hit on the output with valid/ready flow
// control. The hit is removed from its FIFO in the clock where out_valid and
// out_ready are both high; while out_ready is low the offered hit is held
// (an assertion checks this). out_valid/out_hit are driven combinationally
// from the FIFO heads, so an input hit can leave one clock after it was
// written.
//
// A hit arriving at a full FIFO is lost. The number of lost hits is counted
// in overflow_count (saturating at all ones), and overflow is high for one
// clock after a loss. Reset: asynchronous, active low.
//
// The published design reads the processing results out over one data link
// (S-Link, VME block read or USB). Buffering and arbitration are this
// design's choice.
module hit_merger
  import gandalf_pkg::*;
#(
  parameter int unsigned N_IN  = N_CH,
  parameter int unsigned DEPTH = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_IN-1:0]         in_valid,
  input  hit_t [N_IN-1:0]         in_hit,
  output logic                    out_valid,
  input  logic                    out_ready,
  output hit_t                    out_hit,
  output logic                    overflow,
  output logic [15:0]             overflow_count
);

  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [N_IN-1:0] empty, full, rd_en;
  hit_t [N_IN-1:0] head;
  logic [IW-1:0]   last, sel;
  logic            any;

  for (genvar g = 0; g < N_IN; g++) begin : g_fifo
    hit_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en  (in_valid[g]),
      .wr_data(in_hit[g]),
      .rd_en  (rd_en[g]),
      .rd_data(head[g]),
      .empty  (empty[g]),
      .full   (full[g])
    );
  end

  // round-robin choice: first non-empty input after 'last'. While the
  // output is stalled the choice is held, so that the offered hit stays
  // stable until it is taken.
  logic          stall_q;
  logic [IW-1:0] sel_q, idx;

  always_comb begin
    any = 1'b0;
    sel = last;
    idx = '0;
    if (stall_q) begin
      any = 1'b1;
      sel = sel_q;
    end else for (int k = 1; k <= N_IN; k++) begin
      idx = IW'((int'(last) + k) % N_IN);
      if (!any && !empty[idx]) begin
        any = 1'b1;
        sel = idx;
      end
    end
  end

  assign out_valid = any;
  assign out_hit   = head[sel];

  always_comb begin
    rd_en = '0;
    if (any && out_ready) rd_en[sel] = 1'b1;
  end

  // a FIFO ignores a write while full, even if it is read in that clock
  logic [N_IN-1:0] lost;
  logic [15:0]     n_lost;
  assign lost = in_valid & full;
  always_comb begin
    n_lost = '0;
    for (int k = 0; k < N_IN; k++) n_lost = n_lost + 16'(lost[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last           <= IW'(N_IN - 1);
      stall_q        <= 1'b0;
      sel_q          <= '0;
      overflow       <= 1'b0;
      overflow_count <= '0;
    end else begin
      if (any && out_ready) last <= sel;
      stall_q <= any && !out_ready;
      sel_q   <= sel;
      overflow <= |lost;
      if ({1'b0, overflow_count} + {1'b0, n_lost} > 17'hFFFF)
        overflow_count <= '1;
      else
        overflow_count <= overflow_count + n_lost;
    end
  end

  // a stalled output keeps its hit until it is taken
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_hit));

endmodule
