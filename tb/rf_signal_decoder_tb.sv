// rf_signal_decoder_tb: feeds a tone at the decoder's frequency with the
// readout phase of a |0> response, then a |1> response (phase shifted by
// half a turn), then an off-frequency tone, and checks the 0/1 result, the
// size of the integrated I and Q against the analytic value, and that the
// result appears exactly 3 cycles after the last integrated ADC word.
module rf_signal_decoder_tb;
  import qec_pkg::*;
  localparam int W = 64;                       // window in cycles = 256 samples
  localparam logic [31:0] FD = 32'h0300_0000;  // 3 turns per 256 samples
  localparam real AMP = 8000.0;
  logic clk = 0, rst = 1;
  time_t now = '0;
  adc_word_t adc;
  logic [31:0] freq = FD, phase = 32'h1000_0000, dur_data = W;
  logic start = 0, result_valid, result;
  logic signed [55:0] acc_i, acc_q;
  int checks = 0, failures = 0;
  real sig_phase = 0.0;      // in turns
  real sig_freq  = 0.0;      // turns per sample
  always #1 clk = ~clk;
  always @(posedge clk) now <= rst ? '0 : now + 1;

  // ADC stimulus: sample k of cycle `now`
  always_comb
    for (int k = 0; k < ADC_SPC; k++)
      adc[k] = sample_t'($rtoi(AMP * $sin(2.0 * 3.141592653589793 *
                   (sig_freq * (4.0 * real'(now) + k) + sig_phase))));

  rf_signal_decoder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0d", what, now); end
  endtask

  task automatic measure(input real delta_turns, input bit exp_bit, input bit on_freq);
    time_t t_start, t_res;
    real expect_i, expect_q, got_i, got_q;
    sig_freq  = on_freq ? real'(FD) / 4294967296.0 : real'(FD) / 4294967296.0 * 5.0 / 3.0;
    sig_phase = real'(phase) / 4294967296.0 + delta_turns;
    @(posedge clk);
    start <= 1; t_start = now + 1;   // start is high in the next cycle
    @(posedge clk); start <= 0;
    while (!result_valid) @(posedge clk);
    t_res = now;   // cycle in which result_valid was high
    check(t_res == t_start + W + 3, $sformatf("result latency %0d", t_res - t_start));
    // sin(theta_s) against cos/sin(theta_r): I = N/2*A*32767*sin(d), Q = N/2*A*32767*cos(d)
    expect_i = on_freq ? 0.5 * 4 * W * AMP * 32767.0 * $sin(2.0 * 3.141592653589793 * delta_turns) : 0.0;
    expect_q = on_freq ? 0.5 * 4 * W * AMP * 32767.0 * $cos(2.0 * 3.141592653589793 * delta_turns) : 0.0;
    got_i = real'(acc_i); got_q = real'(acc_q);
    check((got_i - expect_i) < 0.02 * 2 * W * AMP * 32767.0 && (expect_i - got_i) < 0.02 * 2 * W * AMP * 32767.0,
          $sformatf("I %f vs %f", got_i, expect_i));
    check((got_q - expect_q) < 0.02 * 2 * W * AMP * 32767.0 && (expect_q - got_q) < 0.02 * 2 * W * AMP * 32767.0,
          $sformatf("Q %f vs %f", got_q, expect_q));
    if (on_freq) check(result == exp_bit, $sformatf("result bit %0d", result));
    repeat (3) @(posedge clk);
  endtask

  initial begin
    #6000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    measure( 0.25, 1'b0, 1'b1);   // I > 0
    measure(-0.25, 1'b1, 1'b1);   // I < 0
    measure( 0.10, 1'b0, 1'b1);
    measure( 0.60, 1'b1, 1'b1);
    measure( 0.25, 1'b0, 1'b0);   // off-frequency tone integrates to ~0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
