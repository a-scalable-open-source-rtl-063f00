// controller_core_tb: drives the core's register file over TileLink the way
// a QEC program does and checks the hardware side: gate and readout pulses
// start exactly 3 cycles after their timestamp on the right output, the
// decoder's window opens at its timestamp and its 0/1 result is readable
// (and cleared by the read), syndrome writes and error reads reach the
// aggregator/distributor pins, the timer and register read-back, and the
// late flag for an overdue timestamp.
module controller_core_tb;
  import qec_pkg::*;
  localparam int ENV_DEPTH = 32;
  logic clk = 0, rst = 1;
  time_t now = '0;
  tl_a_t tl_a;
  tl_d_t tl_d;
  logic tl_a_ready, tl_d_ready;
  logic [1:0] env_wr_en = 0;
  logic [4:0] env_wr_addr = 0;
  dac_word_t env_wr_data = '0;
  adc_word_t adc;
  dac_word_t gate_samples, ro_samples;
  logic synd_valid, synd_bit, err_valid = 0, err_bit = 0, err_ack;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  always @(posedge clk) now <= rst ? '0 : now + 1;

  controller_core #(.FIFO_DEPTH(4), .ENV_DEPTH(ENV_DEPTH)) dut (.*);
  tl_host_bfm host (.clk, .tl_a, .tl_a_ready, .tl_d, .tl_d_ready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0d", what, now); end
  endtask

  // ADC: tone at the decoder frequency, phase chosen by the test
  localparam logic [31:0] FD = 32'h0400_0000;
  real tone_phase = 0.0;
  always_comb
    for (int k = 0; k < ADC_SPC; k++)
      adc[k] = sample_t'($rtoi(6000.0 * $sin(2.0 * 3.141592653589793 *
                 (real'(FD) / 4294967296.0 * (4.0 * real'(now) + k) + tone_phase))));

  // activity monitors
  time_t gate_first = '1, ro_first = '1;
  int    gate_cycles = 0, ro_cycles = 0, synd_pulses = 0;
  logic  last_synd_bit;
  always @(posedge clk) if (!rst) begin
    if (gate_samples != '0) begin if (gate_first == '1) gate_first = now; gate_cycles++; end
    if (ro_samples   != '0) begin if (ro_first   == '1) ro_first   = now; ro_cycles++;   end
    if (synd_valid) begin synd_pulses++; last_synd_bit = synd_bit; end
    if (err_ack) err_valid <= 1'b0;
  end

  task automatic set_ts(input time_t t);
    host.write(A_TS_LO, t[31:0]);
    host.write(A_TS_HI, 32'(t[47:32]));
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, lo, hi;
    time_t ts;
    repeat (2) @(posedge clk);
    rst <= 0;
    // envelope word w, lane n = 2000 in both generators
    for (int w = 0; w < ENV_DEPTH; w++) begin
      @(posedge clk);
      env_wr_en <= 2'b11; env_wr_addr <= 5'(w);
      for (int n = 0; n < DAC_SPC; n++) env_wr_data[n] <= 16'sd2000;
    end
    @(posedge clk); env_wr_en <= 0;

    // ---- gate pulse
    ts = now + 60;
    set_ts(ts);
    host.write(A_GATE_BASE + 16'h0, 32'h0123_4567);
    host.write(A_GATE_BASE + 16'h4, 32'h1000_0000);
    host.write(A_GATE_BASE + 16'h8, 32'h0000_FFFF);
    host.write(A_GATE_BASE + 16'hC, 32'd2);
    host.write(A_GATE_BASE + 16'h10, 32'd5);
    wait (now > ts + 20);
    check(gate_first == ts + 3, $sformatf("gate pulse starts at ts+3 (got %0d, ts %0d)", gate_first, ts));
    check(gate_cycles == 5, $sformatf("gate pulse lasts 5 cycles (%0d)", gate_cycles));
    check(ro_cycles == 0, "readout output silent during gate pulse");

    // ---- readout pulse
    ts = now + 50;
    set_ts(ts);
    host.write(A_RO_BASE + 16'h0, 32'h0200_0000);
    host.write(A_RO_BASE + 16'h8, 32'h0000_8000);
    host.write(A_RO_BASE + 16'h10, 32'd7);
    wait (now > ts + 20);
    check(ro_first == ts + 3, $sformatf("readout pulse starts at ts+3 (got %0d)", ro_first));
    check(ro_cycles == 7, $sformatf("readout pulse lasts 7 cycles (%0d)", ro_cycles));
    check(gate_cycles == 5, "gate output silent during readout pulse");

    // ---- decoder registers and measurement, |1> then |0>
    host.write(A_DEC_FREQ, FD);
    host.write(A_DEC_PHASE, 32'h0);
    host.read(A_DEC_FREQ, r);  check(r == FD, "decoder frequency read-back");
    for (int m = 0; m < 2; m++) begin
      time_t t_read;
      tone_phase = (m == 0) ? -0.25 : 0.25;     // I < 0 -> 1, I > 0 -> 0
      ts = now + 40;
      set_ts(ts);
      host.write(A_DEC_DUR, 32'd64);
      do host.read(A_DEC_RESULT, r); while (!r[1]);
      t_read = now;
      check(r[0] == (m == 0), $sformatf("measurement %0d result %0d", m, r[0]));
      check(t_read >= ts + 64 + 3, "result not before window end");
      host.read(A_DEC_RESULT, r);
      check(!r[1], "result valid cleared by read");
    end

    // ---- syndrome write
    host.write(A_SYNDROME, 32'd1);
    host.write(A_SYNDROME, 32'd0);
    @(posedge clk);
    check(synd_pulses == 2 && last_synd_bit == 1'b0, "two syndrome writes reach the aggregator");

    // ---- error read
    host.read(A_ERROR, r);
    check(r[1:0] == 2'b00, "no error before the distributor has one");
    err_bit <= 1; err_valid <= 1;
    @(posedge clk);
    host.read(A_ERROR, r);
    check(r[1:0] == 2'b11, "error read returns valid and bit");
    @(posedge clk);
    check(!err_valid, "error read acknowledged");

    // ---- timer
    host.read(A_TIMER_LO, lo);
    host.read(A_TIMER_HI, hi);
    check({hi[15:0], lo} <= now && {hi[15:0], lo} + 5 >= now, "timer read");

    // ---- late release
    set_ts(now - 10);
    host.write(A_GATE_BASE + 16'h4, 32'h0);
    repeat (2) @(posedge clk);
    host.read(A_STATUS, r);
    check(r[11 + 1] == 1'b1, "late flag of the gate phase FIFO");
    host.read(A_STATUS, r);
    check(r[11 + 1] == 1'b0, "late flags clear on read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
