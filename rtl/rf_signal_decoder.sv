// rf_signal_decoder: readout demodulator that turns ADC samples into a
// 0/1 measurement result.
//
// A local DDS at the programmed frequency and phase produces cos and sin for
// each of the ADC_SPC ADC samples of a cycle; the decoder integrates
//   I = sum adc[k]*cos(theta_k)   Q = sum adc[k]*sin(theta_k)
// over an integration window of `dur` cycles and reports result = (I < 0):
// the phase register rotates the reference so that the two qubit states fall
// on opposite sides of the I axis. The reference phase of ADC sample k of
// cycle `now` is freq*(ADC_SPC*now + k) + phase, a function of the global
// timer like the generators' carrier, so a decoder programmed with 4x a
// generator's per-sample increment (2 GS/s against 8 GS/s) is phase-locked
// to that generator; the phase register absorbs the fixed loop delay.
//
// Frequency and phase are plain registers written by the core; the window
// start comes from the core's Duration timed FIFO. A start strobe in cycle t
// integrates the ADC words of cycles t+1 .. t+dur; result_valid pulses
// 3 cycles after the last of them, with acc_i/acc_q holding the integrals.
//
// The register set (frequency, phase, duration, 0/1 result) follows the
// architecture; the I-sign threshold, ADC rate and widths are this design's.
module rf_signal_decoder
  import qec_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  time_t              now,
  input  adc_word_t          adc,
  input  logic [31:0]        freq,        // phase increment per ADC sample
  input  logic [31:0]        phase,
  input  logic               start,
  input  logic [31:0]        dur_data,    // [15:0] window length in cycles
  output logic               result_valid,
  output logic               result,
  output logic signed [55:0] acc_i,
  output logic signed [55:0] acc_q
);

  localparam int unsigned ROM_AW = 10;

  logic signed [15:0] sine_rom [2**ROM_AW];
  initial begin
    for (int i = 0; i < 2**ROM_AW; i++)
      sine_rom[i] = 16'($rtoi($floor(32767.0 * $sin(2.0 * 3.141592653589793 * i / (2.0 ** ROM_AW)) + 0.5)));
  end

  logic [15:0] remaining;

  always_ff @(posedge clk) begin
    if (rst)                                    remaining <= '0;
    else if (start && dur_data[15:0] != '0)     remaining <= dur_data[15:0];
    else if (remaining != '0)                   remaining <= remaining - 1'b1;
  end

  // stage 1: window flag, ADC word and reference lookup
  adc_word_t          adc_q;
  logic signed [15:0] cos_q [ADC_SPC];
  logic signed [15:0] sin_q [ADC_SPC];
  logic               win_q;

  always_ff @(posedge clk) begin
    adc_q <= adc;
    for (int k = 0; k < ADC_SPC; k++) begin
      logic [31:0]       ph;
      logic [ROM_AW-1:0] idx;
      ph  = freq * ((now[31:0] << $clog2(ADC_SPC)) + 32'(k)) + phase;
      idx = ph[31 -: ROM_AW];
      sin_q[k] <= sine_rom[idx];
      cos_q[k] <= sine_rom[idx + ROM_AW'(2**ROM_AW / 4)];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      win_q <= 1'b0;
    end else begin
      win_q <= (remaining != '0);
    end
  end

  // stage 2: multiply-accumulate
  logic signed [55:0] sum_i, sum_q;
  always_comb begin
    sum_i = '0;
    sum_q = '0;
    for (int k = 0; k < ADC_SPC; k++) begin
      sum_i += 56'(32'(adc_q[k]) * 32'(cos_q[k]));
      sum_q += 56'(32'(adc_q[k]) * 32'(sin_q[k]));
    end
  end

  logic window_open;
  always_ff @(posedge clk) begin
    if (rst) begin
      acc_i <= '0; acc_q <= '0; window_open <= 1'b0;
      result_valid <= 1'b0; result <= 1'b0;
    end else begin
      result_valid <= 1'b0;
      if (win_q) begin
        acc_i       <= window_open ? acc_i + sum_i : sum_i;
        acc_q       <= window_open ? acc_q + sum_q : sum_q;
        window_open <= 1'b1;
      end else if (window_open) begin
        window_open  <= 1'b0;
        result_valid <= 1'b1;
        result       <= acc_i[55];
      end
    end
  end

endmodule
