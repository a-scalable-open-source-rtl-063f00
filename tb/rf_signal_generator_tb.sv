// rf_signal_generator_tb: loads a short envelope, programs frequency, phase,
// amplitude and envelope, plays a 4-cycle pulse and compares every one of
// the 16 samples per cycle with env*amp*sin(carrier) computed here from the
// timer, including the 3-cycle start latency, the zero output around the
// pulse, a second pulse at a new frequency and the busy flag.
module rf_signal_generator_tb;
  import qec_pkg::*;
  localparam int ENV_DEPTH = 64;
  logic clk = 0, rst = 1;
  time_t now = '0;
  logic set_freq = 0, set_phase = 0, set_amp = 0, set_env = 0, start = 0;
  logic [31:0] freq_data = 0, phase_data = 0, amp_data = 0, env_data = 0, dur_data = 0;
  logic env_wr_en = 0;
  logic [5:0] env_wr_addr = 0;
  dac_word_t env_wr_data = '0, samples;
  logic busy;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  always @(posedge clk) now <= rst ? '0 : now + 1;

  rf_signal_generator #(.ENV_DEPTH(ENV_DEPTH)) dut (.*);

  function automatic sample_t env_val(int word, int n);
    return sample_t'(1000 * (n + 1) - 9000 + 300 * word);
  endfunction

  function automatic sample_t expect_sample(time_t t, int n, logic [31:0] f, logic [31:0] p,
                                            logic [15:0] a, sample_t e);
    logic [31:0] ph;
    logic signed [15:0] s;
    logic signed [32:0] ea, es;
    ph = f * ((32'(t) << 4) + 32'(n)) + p;
    s  = 16'($rtoi($floor(32767.0 * $sin(2.0 * 3.141592653589793 * ph[31:22] / 1024.0) + 0.5)));
    ea = 33'(e) * $signed({1'b0, a});
    es = 33'(ea >>> 16) * 33'(s);
    return sample_t'(es >>> 15);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0d", what, now); end
  endtask

  // pulse descriptors for the checker
  time_t       ps_start [2];
  logic [31:0] ps_freq [2];
  int          ps_base [2];
  int          ps_dur  [2];
  int          npulses = 0;
  int          busy_cycles = 0;
  logic [31:0] cur_phase = 0;
  logic [15:0] cur_amp = 0;

  always @(posedge clk) if (!rst) begin
    bit in_pulse;
    in_pulse = 0;
    if (busy) busy_cycles++;
    for (int k = 0; k < npulses; k++) begin
      int j;
      j = int'(now - ps_start[k]) - 3;
      if (j >= 0 && j < ps_dur[k]) begin
        in_pulse = 1;
        for (int n = 0; n < DAC_SPC; n++)
          check(samples[n] == expect_sample(now - 2, n, ps_freq[k], cur_phase, cur_amp,
                                            env_val(ps_base[k] + j, n)),
                $sformatf("pulse %0d word %0d lane %0d: got %0d", k, j, n, samples[n]));
      end
    end
    if (!in_pulse && now > 5) check(samples == '0, "silent outside pulses");
  end

  initial begin
    #4000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int w = 0; w < 16; w++) begin
      @(posedge clk);
      env_wr_en <= 1; env_wr_addr <= 6'(w);
      for (int n = 0; n < DAC_SPC; n++) env_wr_data[n] <= env_val(w, n);
    end
    @(posedge clk); env_wr_en <= 0;
    cur_phase = 32'h2000_0000; cur_amp = 16'hC000;
    set_freq <= 1; freq_data <= 32'h0123_4567;
    set_phase <= 1; phase_data <= cur_phase;
    set_amp <= 1; amp_data <= 32'(cur_amp);
    set_env <= 1; env_data <= 32'd3;
    @(posedge clk);
    set_freq <= 0; set_phase <= 0; set_amp <= 0; set_env <= 0;
    repeat (3) @(posedge clk);
    start <= 1; dur_data <= 4;
    ps_start[0] = now + 1; ps_freq[0] = 32'h0123_4567; ps_base[0] = 3; ps_dur[0] = 4; npulses = 1;
    @(posedge clk); start <= 0;
    repeat (12) @(posedge clk);
    // second pulse: new frequency and envelope, released together with start
    set_freq <= 1; freq_data <= 32'h0800_0000;
    @(posedge clk); set_freq <= 0;
    start <= 1; dur_data <= 5; set_env <= 1; env_data <= 32'd9;
    ps_start[1] = now + 1; ps_freq[1] = 32'h0800_0000; ps_base[1] = 9; ps_dur[1] = 5; npulses = 2;
    @(posedge clk); start <= 0; set_env <= 0;
    repeat (15) @(posedge clk);
    check(busy_cycles == 9, $sformatf("busy for 4+5 cycles, got %0d", busy_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
