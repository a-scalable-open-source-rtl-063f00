// rf_signal_generator: DDS pulse generator for one DAC channel.
//
// Produces DAC_SPC (16) samples per 500 MHz cycle, i.e. 8 GS/s:
//
//   s[n] = env[n] * amp * sin(2*pi*(freq*(DAC_SPC*now + n) + phase) / 2^32)
//
// The carrier phase is a function of the global timer `now`, not of a local
// accumulator, so every pulse of a given frequency is phase-coherent with
// every other pulse of that frequency on any generator or readout decoder of
// any board whose timer is aligned. freq is the phase increment per sample, phase a
// fixed offset (both full turn = 2^32), amp an unsigned gain with 0xFFFF ~ 1.0,
// env the first word of the pulse envelope in the envelope memory (one word =
// DAC_SPC signed samples), and a Duration release starts a pulse that plays
// that many words (cycles). Outside a pulse the output is 0.
//
// The five parameters arrive as one-cycle strobes from the core's timed
// FIFOs. Frequency, phase, amplitude and envelope take effect for the next
// cycle; a start strobe in cycle t puts the first pulse samples on `samples`
// in cycle t+3 (address, memory/ROM read, multiply); the carrier of a sample
// shown in cycle d is evaluated at now = d-2.
//
// The parameter set follows the architecture (frequency, phase, amplitude,
// envelope, duration through timed FIFOs; 8 GS/s). The envelope-table
// organisation, the 1024-entry sine ROM, the widths and the free-running
// timer-derived carrier are this design's choices. The ROM is filled by an initial
// block from $sin, which FPGA tools map to a ROM.
module rf_signal_generator
  import qec_pkg::*;
#(
  parameter int unsigned ENV_DEPTH = 2048,
  localparam int unsigned EAW = $clog2(ENV_DEPTH)
) (
  input  logic            clk,
  input  logic            rst,
  input  time_t           now,
  input  logic            set_freq,
  input  logic [31:0]     freq_data,
  input  logic            set_phase,
  input  logic [31:0]     phase_data,
  input  logic            set_amp,
  input  logic [31:0]     amp_data,     // [15:0] used
  input  logic            set_env,
  input  logic [31:0]     env_data,     // [EAW-1:0] used
  input  logic            start,
  input  logic [31:0]     dur_data,     // [15:0] cycles
  input  logic            env_wr_en,
  input  logic [EAW-1:0]  env_wr_addr,
  input  dac_word_t       env_wr_data,
  output dac_word_t       samples,
  output logic            busy
);

  localparam int unsigned ROM_AW = 10;

  logic signed [15:0] sine_rom [2**ROM_AW];
  initial begin
    for (int i = 0; i < 2**ROM_AW; i++)
      sine_rom[i] = 16'($rtoi($floor(32767.0 * $sin(2.0 * 3.141592653589793 * i / (2.0 ** ROM_AW)) + 0.5)));
  end

  dac_word_t env_mem [ENV_DEPTH];
  always_ff @(posedge clk) begin
    if (env_wr_en) env_mem[env_wr_addr] <= env_wr_data;
  end

  // ---------------------------------------------------------------- parameters
  logic [31:0]    freq, phase_off;
  logic [15:0]    amp;
  logic [EAW-1:0] env_base, env_addr;
  logic [15:0]    remaining;

  always_ff @(posedge clk) begin
    if (rst) begin
      freq <= '0; phase_off <= '0; amp <= '0; env_base <= '0;
    end else begin
      if (set_freq)  freq      <= freq_data;
      if (set_phase) phase_off <= phase_data;
      if (set_amp)   amp       <= amp_data[15:0];
      if (set_env)   env_base  <= env_data[EAW-1:0];
    end
  end

  // ---------------------------------------------------------------- stage 0: pulse sequencer
  always_ff @(posedge clk) begin
    if (rst) begin
      remaining <= '0;
      env_addr  <= '0;
    end else if (start && dur_data[15:0] != '0) begin
      remaining <= dur_data[15:0];
      env_addr  <= set_env ? env_data[EAW-1:0] : env_base;
    end else if (remaining != '0) begin
      remaining <= remaining - 1'b1;
      env_addr  <= env_addr + 1'b1;
    end
  end
  assign busy = (remaining != '0);

  // ---------------------------------------------------------------- stage 1: envelope and sine lookup
  dac_word_t          env_q;
  logic signed [15:0] sin_q [DAC_SPC];
  logic               act_q;
  logic [15:0]        amp_q;

  always_ff @(posedge clk) begin
    env_q <= env_mem[env_addr];
    amp_q <= amp;
    for (int n = 0; n < DAC_SPC; n++) begin
      logic [31:0] ph;
      ph = freq * ((now[31:0] << $clog2(DAC_SPC)) + 32'(n)) + phase_off;
      sin_q[n] <= sine_rom[ph[31 -: ROM_AW]];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) act_q <= 1'b0;
    else     act_q <= busy;
  end

  // ---------------------------------------------------------------- stage 2: scale
  always_ff @(posedge clk) begin
    if (rst) samples <= '0;
    else begin
      for (int n = 0; n < DAC_SPC; n++) begin
        logic signed [32:0] ea;
        logic signed [32:0] es;
        ea = 33'(env_q[n]) * $signed({1'b0, amp_q});
        es = 33'(ea >>> 16) * 33'(sin_q[n]);
        samples[n] <= act_q ? sample_t'(es >>> 15) : '0;
      end
    end
  end

endmodule
