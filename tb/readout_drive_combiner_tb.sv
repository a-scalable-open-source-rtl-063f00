// readout_drive_combiner_tb: random readout-generator outputs, compared
// sample by sample with the saturated sum one cycle later; large inputs
// exercise positive and negative saturation.
module readout_drive_combiner_tb;
  import qec_pkg::*;
  localparam int N_IN = 7;
  logic clk = 0, rst = 1;
  dac_word_t in_samples [N_IN];
  dac_word_t out_samples;
  dac_word_t expect_q;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  always #1 clk = ~clk;

  readout_drive_combiner #(.N_IN(N_IN)) dut (.*);

  function automatic dac_word_t ref_sum(input dac_word_t x [N_IN]);
    dac_word_t r;
    for (int n = 0; n < DAC_SPC; n++) begin
      int s;
      s = 0;
      for (int i = 0; i < N_IN; i++) s += int'(x[i][n]);
      r[n] = (s > 32767) ? 16'sd32767 : (s < -32768) ? -16'sd32768 : sample_t'(s);
    end
    return r;
  endfunction

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) in_samples[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N_IN; i++)
        for (int n = 0; n < DAC_SPC; n++)
          in_samples[i][n] <= (t < 200) ? sample_t'($urandom_range(8000) - 4000)
                                        : sample_t'($urandom_range(40000) - 20000);
      @(posedge clk);
      expect_q = ref_sum(in_samples);
      #0.1;
      if (t > 0) begin
        checks++;
        if (out_samples != expect_q) begin failures++; $display("FAIL cycle %0d", t); end
        for (int n = 0; n < DAC_SPC; n++) begin
          if (out_samples[n] == 16'sd32767) sat_hi++;
          if (out_samples[n] == -16'sd32768) sat_lo++;
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
