// tb_zc_interp: self-checking test of zc_interp.
//
// Feeds random candidates (y0 > 0, y1 <= 0, including y1 = 0 and extreme
// values) back to back and with gaps. For each one the expected time stamp is
// t0 * 256 + floor(256 * y0 / (y0 - y1)), computed with 64-bit integers, and
// it must leave exactly FINE_W + 2 = 10 clocks after it entered, in order,
// with amplitude, charge and channel number unchanged.
module tb_zc_interp;
  import gandalf_pkg::*;
  localparam int LAT = FINE_W + 2;
  localparam logic [CH_W-1:0] CHN = 4'd9;
  logic clk = 0, rst_n = 0, cand_valid = 0;
  cand_t cand = '0;
  logic hit_valid;
  hit_t hit;
  int checks = 0, failures = 0;
  longint cyc = 0;

  zc_interp #(.CH(CHN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint t; int amp, q; longint c; } exp_t;
  exp_t exp_q[$];

  always @(posedge clk) if (rst_n) begin
    #1;
    if (hit_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected hit"); end
      else begin
        e = exp_q.pop_front();
        if (longint'(hit.t) != e.t || int'(hit.amp) != e.amp || int'(hit.charge) != e.q ||
            hit.ch != CHN || cyc != e.c) begin
          failures++;
          $display("hit mismatch t %0d/%0d amp %0d/%0d q %0d/%0d cycle %0d/%0d",
                   hit.t, e.t, hit.amp, e.amp, hit.charge, e.q, cyc, e.c);
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      exp_t e;
      longint y0, y1, t0;
      if ($urandom_range(3) == 0) begin
        cand_valid = 0; @(posedge clk); #1;
      end
      case (n % 5)
        0: begin y0 = $urandom_range(131071, 1); y1 = -longint'($urandom_range(131072)); end
        1: begin y0 = $urandom_range(50, 1);    y1 = -longint'($urandom_range(50)); end
        2: begin y0 = $urandom_range(131071, 1); y1 = 0; end
        3: begin y0 = 131071; y1 = -131072; end
        default: begin y0 = $urandom_range(2000, 1); y1 = -longint'($urandom_range(2000, 1)); end
      endcase
      t0 = {$urandom, $urandom} & 64'hFFFF_FFFF;
      cand.t_coarse = TIME_W'(t0);
      cand.y0 = Y_W'(y0);
      cand.y1 = Y_W'(y1);
      cand.amp = S_W'($urandom);
      cand.charge = Q_W'($urandom);
      cand_valid = 1;
      e.t = ((t0 << FINE_W) + (y0 << FINE_W) / (y0 - y1)) & ((64'd1 << (TIME_W + FINE_W)) - 1);
      e.amp = int'(cand.amp);
      e.q = int'(cand.charge);
      e.c = cyc + LAT;
      exp_q.push_back(e);
      @(posedge clk); #1;
      cand_valid = 0;
    end
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d hits missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
