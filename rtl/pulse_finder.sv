// pulse_finder: zero suppression and per-pulse feature extraction for one
// processing chain.
//
// It receives, per valid clock, a word of NL baseline-subtracted samples s and
// their constant-fraction values y (from cfd_filter), lane 0 being the
// earliest sample. Samples are numbered by a running sample counter that the
// trigger and clock distribution can clear (ts_reset), giving the coarse time.
//
// Operation, sample by sample:
//   * Idle: a sample with s > threshold arms the finder (zero suppression:
//     nothing below threshold produces data). The arming sample opens a window
//     of cfg_window samples (values below NL are raised to NL, so that at
//     most one window ends per word).
//   * In the window the maximum of s (pulse height) and the sum of s
//     (integrated charge) are accumulated, and the first crossing of y from a
//     positive value to a value <= 0 is recorded: the index of the last
//     positive sample and the two y values around the crossing.
//   * At the end of the window a candidate is emitted if a crossing was seen;
//     otherwise the pulse is discarded and 'drop' pulses for one clock.
//   * After a window the finder re-arms only when s has fallen to or below
//     the threshold again, or when a new leading edge appears while s is
//     still above it (y > 0: a piled-up second pulse on the tail of the
//     first). On the falling tail of a single pulse y is negative, so one
//     pulse gives one hit. A second pulse whose crossing falls inside the
//     window of the first is not separated.
//
// Timing: cand_valid/drop are registered and come one clock after the word
// holding the last sample of the window.
//
// The published design names zero suppression, pulse time, pulse height and
// integrated charge as the quantities extracted. The arming threshold, the
// window, the crossing direction (positive to non-positive, as for pulses
// that rise in ADC code) and the re-arm rule are this design's choice.
module pulse_finder
  import gandalf_pkg::*;
#(
  parameter int unsigned NL   = LANES,
  parameter int unsigned SW   = S_W,
  parameter int unsigned YW   = Y_W,
  parameter int unsigned WW   = WIN_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          ts_reset,
  input  logic                          in_valid,
  input  logic signed [NL-1:0][SW-1:0]  in_s,
  input  logic signed [NL-1:0][YW-1:0]  in_y,
  input  logic signed [SW-1:0]          cfg_threshold,
  input  logic [WW-1:0]                 cfg_window,
  output logic                          cand_valid,
  output cand_t                         cand,
  output logic                          drop
);

  typedef struct packed {
    logic                  armed;
    logic                  block;
    logic [WW-1:0]         cnt;
    logic                  found;
    logic signed [SW-1:0]  amax;
    logic signed [Q_W-1:0] qsum;
    logic [TIME_W-1:0]     t_c;
    logic signed [YW-1:0]  y0;
    logic signed [YW-1:0]  y1;
    logic signed [YW-1:0]  y_prev;
  } st_t;

  st_t               st, st_n;
  logic [TIME_W-1:0] tcount;
  logic              emit_n, drop_n;
  cand_t             cand_n;

  always_comb begin
    st_n   = st;
    emit_n = 1'b0;
    drop_n = 1'b0;
    cand_n = '0;
    for (int i = 0; i < NL; i++) begin
      logic [TIME_W-1:0]    t;
      logic signed [SW-1:0] s;
      logic signed [YW-1:0] y;
      t = tcount + TIME_W'(i);
      s = $signed(in_s[i]);   // elements of a packed array are unsigned
      y = $signed(in_y[i]);
      if (!st_n.armed) begin
        // re-arm after the signal fell back to the threshold, or at a new
        // leading edge (y > 0) on the tail of the previous pulse (pile-up)
        if (st_n.block && (s <= cfg_threshold || y > 0))
          st_n.block = 1'b0;
        if (!st_n.block && s > cfg_threshold) begin
          st_n.armed = 1'b1;
          st_n.cnt   = (cfg_window < WW'(NL)) ? WW'(NL) : cfg_window;
          st_n.found = 1'b0;
          st_n.amax  = s;
          st_n.qsum  = '0;
        end
      end
      if (st_n.armed) begin
        if (s > st_n.amax) st_n.amax = s;
        st_n.qsum = st_n.qsum + Q_W'(s);
        if (!st_n.found && st_n.y_prev > 0 && y <= 0) begin
          st_n.found = 1'b1;
          st_n.t_c   = t - TIME_W'(1);
          st_n.y0    = st_n.y_prev;
          st_n.y1    = y;
        end
        st_n.cnt = st_n.cnt - WW'(1);
        if (st_n.cnt == '0) begin
          st_n.armed = 1'b0;
          st_n.block = 1'b1;
          if (st_n.found) begin
            emit_n          = 1'b1;
            cand_n.t_coarse = st_n.t_c;
            cand_n.y0       = st_n.y0;
            cand_n.y1       = st_n.y1;
            cand_n.amp      = st_n.amax;
            cand_n.charge   = st_n.qsum;
          end else
            drop_n = 1'b1;
        end
      end
      st_n.y_prev = y;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= '0;
      tcount     <= '0;
      cand_valid <= 1'b0;
      cand       <= '0;
      drop       <= 1'b0;
    end else begin
      cand_valid <= in_valid && emit_n;
      drop       <= in_valid && drop_n;
      if (in_valid && emit_n) cand <= cand_n;
      if (in_valid) st <= st_n;
      if (ts_reset)      tcount <= '0;
      else if (in_valid) tcount <= tcount + TIME_W'(NL);
    end
  end

endmodule
