// tb_adc_pair_merge: self-checking test of adc_pair_merge.
//
// Drives counting sample patterns on both ADC inputs (a gets even codes, b odd
// codes) and compares every output word with a reference model kept in the
// testbench: in interleaved mode each clock must give {b, a} of the previous
// clock; in normal mode every second clock must give two consecutive samples
// of a and of b. The mode is switched back and forth several times; the test
// also checks the word rate (one word per clock interleaved, one per two
// clocks per stream otherwise).
module tb_adc_pair_merge;
  localparam int DW = 12;
  logic clk = 0, rst_n = 0, interleave = 0;
  logic [DW-1:0] adc_a = 0, adc_b = 0;
  logic s0_valid, s1_valid;
  logic [1:0][DW-1:0] s0_data, s1_data;
  int checks = 0, failures = 0;

  adc_pair_merge #(.DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  logic          m_mode_q = 0, m_phase = 0;
  logic [DW-1:0] m_ha, m_hb;
  int            n_words0, n_words1;

  task automatic step_and_check();
    logic          exp_v0, exp_v1;
    logic [1:0][DW-1:0] exp_d0, exp_d1;
    exp_v0 = 0; exp_v1 = 0; exp_d0 = '0; exp_d1 = '0;
    if (interleave) begin
      exp_v0 = 1; exp_d0 = {adc_b, adc_a}; m_phase = 0;
    end else if (m_mode_q || !m_phase) begin
      m_ha = adc_a; m_hb = adc_b; m_phase = 1;
    end else begin
      exp_v0 = 1; exp_d0 = {adc_a, m_ha};
      exp_v1 = 1; exp_d1 = {adc_b, m_hb};
      m_phase = 0;
    end
    m_mode_q = interleave;
    @(posedge clk); #1;
    checks++;
    if (s0_valid !== exp_v0 || s1_valid !== exp_v1 ||
        (exp_v0 && s0_data !== exp_d0) || (exp_v1 && s1_data !== exp_d1)) begin
      failures++;
      $display("mismatch t=%0t v0=%b/%b d0=%h/%h v1=%b/%b d1=%h/%h", $time,
               s0_valid, exp_v0, s0_data, exp_d0, s1_valid, exp_v1, s1_data, exp_d1);
    end
    n_words0 += s0_valid;
    n_words1 += s1_valid;
  endtask

  initial begin
    int k = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int seg = 0; seg < 6; seg++) begin
      interleave = seg[0];
      n_words0 = 0; n_words1 = 0;
      for (int i = 0; i < 40; i++) begin
        adc_a = DW'(2*k); adc_b = DW'(2*k + 1 + 16*seg); k++;
        step_and_check();
      end
      // rate check over the segment (first word of a segment may be early/late by one)
      checks++;
      if (seg[0] ? (n_words0 < 39 || n_words1 != 0)
                 : (n_words0 < 19 || n_words0 > 20 || n_words1 != n_words0)) begin
        failures++;
        $display("rate error seg %0d: %0d %0d", seg, n_words0, n_words1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
