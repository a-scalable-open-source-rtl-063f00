// controller_core: the peripheral side of one qubit's controller.
//
// One RISC-V core (outside this module) drives one qubit through this block.
// Its TileLink-UL peripheral port lands on a memory-mapped register file
// (addresses in qec_pkg). Writing a pulse parameter does not change the
// generator at once: the value is pushed, tagged with the timestamp held in
// TS_LO/TS_HI, into that parameter's timed FIFO, which releases it when the
// global timer reaches the timestamp. There are 11 timed FIFOs: frequency,
// phase, amplitude, envelope and duration for the gate generator and for the
// readout generator, and duration for the readout decoder, whose frequency
// and phase are plain registers. The decoder's 0/1 result, the global timer,
// the syndrome aggregator (write) and the error distributor (read) are also
// reached through this register file, so a QEC program needs only loads and
// stores.
//
// Bus timing: one request accepted per cycle when no response is pending;
// the response (AccessAck / AccessAckData) follows in the next cycle and is
// held until tl_d_ready. A release strobe reaches a generator in the cycle
// the timer equals the timestamp.
//
// The architecture fixes the register set and the timed-FIFO structure; the
// address map, the timestamp register, the status word and TileLink-UL with
// only 32-bit Get/PutFullData are this design's choices.
module controller_core
  import qec_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned ENV_DEPTH  = 2048,
  localparam int unsigned EAW = $clog2(ENV_DEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  // TileLink-UL slave
  input  tl_a_t          tl_a,
  output logic           tl_a_ready,
  output tl_d_t          tl_d,
  input  logic           tl_d_ready,
  // time base
  input  time_t          now,
  // envelope loading (host side): bit 0 gate generator, bit 1 readout generator
  input  logic [1:0]     env_wr_en,
  input  logic [EAW-1:0] env_wr_addr,
  input  dac_word_t      env_wr_data,
  // RF
  input  adc_word_t      adc,
  output dac_word_t      gate_samples,
  output dac_word_t      ro_samples,
  // syndrome aggregator / error distributor
  output logic           synd_valid,
  output logic           synd_bit,
  input  logic           err_valid,
  input  logic           err_bit,
  output logic           err_ack
);

  localparam int unsigned N_FIFO = 2 * N_GEN_PARAMS + 1;
  localparam int unsigned F_DEC  = 2 * N_GEN_PARAMS;

  // ---------------------------------------------------------------- bus front end
  logic        d_pending;
  logic        acc_req, is_wr;
  logic [15:0] addr;

  assign tl_a_ready = !d_pending || tl_d_ready;
  assign acc_req    = tl_a.valid && tl_a_ready;
  assign is_wr      = (tl_a.opcode == TL_PUT_FULL);
  assign addr       = tl_a.address;

  // ---------------------------------------------------------------- registers
  time_t       ts_reg;
  logic [31:0] dec_freq, dec_phase;
  logic        res_valid, res_bit;
  logic [15:0] timer_hi_latch;
  logic [N_FIFO-1:0] late_sticky;

  // FIFO push decode
  logic [N_FIFO-1:0] fifo_push, fifo_full, fifo_empty, fifo_fire, fifo_late;
  logic [31:0]       fifo_data [N_FIFO];

  always_comb begin
    fifo_push = '0;
    if (acc_req && is_wr) begin
      for (int p = 0; p < N_GEN_PARAMS; p++) begin
        if (addr == A_GATE_BASE + 16'(4 * p)) fifo_push[p] = 1'b1;
        if (addr == A_RO_BASE   + 16'(4 * p)) fifo_push[N_GEN_PARAMS + p] = 1'b1;
      end
      if (addr == A_DEC_DUR) fifo_push[F_DEC] = 1'b1;
    end
  end

  for (genvar f = 0; f < N_FIFO; f++) begin : g_fifo
    timed_fifo #(.DATA_W(32), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .push      (fifo_push[f]),
      .push_time (ts_reg),
      .push_data (tl_a.data),
      .full      (fifo_full[f]),
      .empty     (fifo_empty[f]),
      .now,
      .fire      (fifo_fire[f]),
      .fire_data (fifo_data[f]),
      .late      (fifo_late[f])
    );
  end

  // ---------------------------------------------------------------- read data and side effects
  logic [31:0] rdata;
  logic        rd_result, rd_error, rd_status;
  always_comb begin
    rdata     = '0;
    rd_result = 1'b0;
    rd_error  = 1'b0;
    rd_status = 1'b0;
    unique case (addr)
      A_TS_LO:      rdata = ts_reg[31:0];
      A_TS_HI:      rdata = 32'(ts_reg[TIME_W-1:32]);
      A_DEC_FREQ:   rdata = dec_freq;
      A_DEC_PHASE:  rdata = dec_phase;
      A_DEC_RESULT: begin rdata = {30'd0, res_valid, res_bit}; rd_result = 1'b1; end
      A_TIMER_LO:   rdata = now[31:0];
      A_TIMER_HI:   rdata = {16'd0, timer_hi_latch};
      A_ERROR:      begin rdata = {30'd0, err_valid, err_bit}; rd_error = 1'b1; end
      A_STATUS:     begin rdata = 32'({late_sticky, fifo_full}); rd_status = 1'b1; end
      default:      rdata = '0;
    endcase
  end

  logic dec_result_valid, dec_result;

  always_ff @(posedge clk) begin
    if (rst) begin
      d_pending      <= 1'b0;
      tl_d           <= '0;
      ts_reg         <= '0;
      dec_freq       <= '0;
      dec_phase      <= '0;
      res_valid      <= 1'b0;
      res_bit        <= 1'b0;
      timer_hi_latch <= '0;
      late_sticky    <= '0;
    end else begin
      if (tl_d_ready) begin
        d_pending  <= 1'b0;
        tl_d.valid <= 1'b0;
      end
      late_sticky <= late_sticky | fifo_late;
      if (dec_result_valid) begin
        res_valid <= 1'b1;
        res_bit   <= dec_result;
      end
      if (acc_req) begin
        d_pending  <= 1'b1;
        tl_d.valid <= 1'b1;
        if (is_wr) begin
          tl_d.opcode <= TL_ACCESS_ACK;
          tl_d.data   <= '0;
          unique case (addr)
            A_TS_LO:     ts_reg[31:0]        <= tl_a.data;
            A_TS_HI:     ts_reg[TIME_W-1:32] <= tl_a.data[TIME_W-33:0];
            A_DEC_FREQ:  dec_freq            <= tl_a.data;
            A_DEC_PHASE: dec_phase           <= tl_a.data;
            default: ;
          endcase
        end else begin
          tl_d.opcode <= TL_ACCESS_ACK_DATA;
          tl_d.data   <= rdata;
          if (addr == A_TIMER_LO) timer_hi_latch <= now[TIME_W-1:32];
          if (rd_result && !dec_result_valid) res_valid <= 1'b0;
          if (rd_status) late_sticky <= fifo_late;
        end
      end
    end
  end

  assign synd_valid = acc_req && is_wr && (addr == A_SYNDROME);
  assign synd_bit   = tl_a.data[0];
  assign err_ack    = acc_req && !is_wr && rd_error && err_valid;

  // ---------------------------------------------------------------- RF datapath
  rf_signal_generator #(.ENV_DEPTH(ENV_DEPTH)) u_gate_gen (
    .clk, .rst, .now,
    .set_freq  (fifo_fire[P_FREQ]),  .freq_data  (fifo_data[P_FREQ]),
    .set_phase (fifo_fire[P_PHASE]), .phase_data (fifo_data[P_PHASE]),
    .set_amp   (fifo_fire[P_AMP]),   .amp_data   (fifo_data[P_AMP]),
    .set_env   (fifo_fire[P_ENV]),   .env_data   (fifo_data[P_ENV]),
    .start     (fifo_fire[P_DUR]),   .dur_data   (fifo_data[P_DUR]),
    .env_wr_en (env_wr_en[0]), .env_wr_addr, .env_wr_data,
    .samples   (gate_samples),
    .busy      ()
  );

  rf_signal_generator #(.ENV_DEPTH(ENV_DEPTH)) u_ro_gen (
    .clk, .rst, .now,
    .set_freq  (fifo_fire[N_GEN_PARAMS + P_FREQ]),  .freq_data  (fifo_data[N_GEN_PARAMS + P_FREQ]),
    .set_phase (fifo_fire[N_GEN_PARAMS + P_PHASE]), .phase_data (fifo_data[N_GEN_PARAMS + P_PHASE]),
    .set_amp   (fifo_fire[N_GEN_PARAMS + P_AMP]),   .amp_data   (fifo_data[N_GEN_PARAMS + P_AMP]),
    .set_env   (fifo_fire[N_GEN_PARAMS + P_ENV]),   .env_data   (fifo_data[N_GEN_PARAMS + P_ENV]),
    .start     (fifo_fire[N_GEN_PARAMS + P_DUR]),   .dur_data   (fifo_data[N_GEN_PARAMS + P_DUR]),
    .env_wr_en (env_wr_en[1]), .env_wr_addr, .env_wr_data,
    .samples   (ro_samples),
    .busy      ()
  );

  rf_signal_decoder u_dec (
    .clk, .rst, .now,
    .adc,
    .freq         (dec_freq),
    .phase        (dec_phase),
    .start        (fifo_fire[F_DEC]),
    .dur_data     (fifo_data[F_DEC]),
    .result_valid (dec_result_valid),
    .result       (dec_result),
    .acc_i        (),
    .acc_q        ()
  );

  // Bus rule: a response is never dropped while the master is not ready.
  a_resp_held : assert property (@(posedge clk) disable iff (rst)
                                 tl_d.valid && !tl_d_ready |=> tl_d.valid);

endmodule
