// hit_fifo: synchronous first-in first-out buffer of hit records.
//
// DEPTH entries (a power of two) held in a register array with read and write
// pointers one bit wider than the address. A write is accepted when the FIFO
// is not full, a read when it is not empty; both may happen in the same clock.
// rd_data shows the oldest entry whenever empty is low (first-word
// fall-through). A write attempted while full is ignored; the caller counts it.
module hit_fifo
  import gandalf_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  hit_t  wr_data,
  input  logic  rd_en,
  output hit_t  rd_data,
  output logic  empty,
  output logic  full
);

  localparam int unsigned AW = $clog2(DEPTH);

  hit_t          mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign empty   = (wp == rp);
  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

endmodule
