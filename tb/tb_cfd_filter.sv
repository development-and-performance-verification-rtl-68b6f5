// tb_cfd_filter: self-checking test of cfd_filter.
//
// Streams random two-sample words (with random idle clocks between them)
// through the filter for several settings of delay, fraction and baseline.
// The testbench keeps the whole sample history as integers and computes the
// expected values independently: s = x - baseline and
// y = s[n] - floor(F * s[n-D] / 64), with s[n-D] = 0 before the stream
// start. It checks both lanes of every output word and that each output word
// appears exactly one clock after its input word.
module tb_cfd_filter;
  import gandalf_pkg::*;
  localparam int DW = 12, NL = 2, DMAX = 15;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [NL-1:0][DW-1:0] in_data = '0;
  logic [3:0]  cfg_delay = 1;
  logic [7:0]  cfg_fraction = 0;
  logic [DW-1:0] cfg_baseline = 0;
  logic out_valid;
  logic signed [NL-1:0][S_W-1:0] out_s;
  logic signed [NL-1:0][Y_W-1:0] out_y;
  int checks = 0, failures = 0;

  cfd_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist[$];   // baseline-subtracted samples of the current run

  function automatic int floordiv64(int v);
    return (v >= 0) ? v / 64 : -((-v + 63) / 64);
  endfunction

  initial begin
    for (int run = 0; run < 6; run++) begin
      rst_n = 0; in_valid = 0;
      hist.delete();
      cfg_delay    = 4'(1 + (run * 5) % DMAX);
      cfg_fraction = 8'((run == 0) ? 64 : $urandom_range(255));
      cfg_baseline = 12'($urandom_range(4095));
      if (run == 5) cfg_delay = 4'(DMAX);
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      for (int w = 0; w < 200; w++) begin
        int exp_s[NL], exp_y[NL];
        // random idle clocks
        while ($urandom_range(3) == 0) begin
          in_valid = 0;
          @(posedge clk); #1;
          checks++;
          if (out_valid) begin failures++; $display("unexpected out_valid"); end
        end
        in_valid = 1;
        for (int i = 0; i < NL; i++) begin
          in_data[i] = 12'($urandom_range(4095));
          exp_s[i] = int'(in_data[i]) - int'(cfg_baseline);
          hist.push_back(exp_s[i]);
        end
        for (int i = 0; i < NL; i++) begin
          int n, sd, m;
          n  = hist.size() - NL + i;
          m  = n - int'(cfg_delay);
          sd = 0;
          if (m >= 0) sd = hist[m];
          exp_y[i] = exp_s[i] - floordiv64(sd * int'(cfg_fraction));
        end
        @(posedge clk); #1;
        in_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("missing out_valid"); end
        for (int i = 0; i < NL; i++) begin
          checks++;
          if (int'($signed(out_s[i])) != exp_s[i] || int'($signed(out_y[i])) != exp_y[i]) begin
            failures++;
            $display("run %0d word %0d lane %0d: s=%0d/%0d y=%0d/%0d (D=%0d F=%0d)", run, w, i,
                     $signed(out_s[i]), exp_s[i], $signed(out_y[i]), exp_y[i], cfg_delay, cfg_fraction);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
