// leaf_node: one controller board, attached directly to its qubits.
//
// N_CORES controller cores (one per qubit), each with its own local memory
// and its own RISC-V processor outside this module (the two TileLink ports
// per core are the processor's peripheral and memory buses). Qubits come in
// groups of GROUP: in each group every core drives its own gate DAC, the
// readout generators of the group are summed onto one shared readout DAC,
// and one ADC feeds the readout decoders of the group. With the defaults
// (14 cores, groups of 7) the DACs are numbered as on the board:
//   dac[0..6]  gate DACs of cores 0..6      dac[7]  readout sum of cores 0..6
//   dac[8..14] gate DACs of cores 7..13     dac[15] readout sum of cores 7..13
//   adc[0] -> cores 0..6                    adc[1] -> cores 7..13
//
// The QEC path: cores write syndrome bits -> leaf_syndrome_aggregator ->
// net_core -> root; ERROR messages from the root -> leaf_error_distributor
// -> cores read their error bit. PTP messages from the root go to
// ptp_slave, which steps the global timer. The leaf's link transmitter
// serves the syndrome message first and the PTP reply second.
//
// Envelope tables are loaded by the host through env_wr_* (core select,
// generator select: 0 gate, 1 readout).
module leaf_node
  import qec_pkg::*;
#(
  parameter int unsigned N_CORES   = 14,
  parameter int unsigned GROUP     = 7,
  parameter int unsigned ENV_DEPTH = 2048,
  parameter int unsigned MEM_BYTES = 8192,
  localparam int unsigned N_GROUPS = N_CORES / GROUP,
  localparam int unsigned N_DAC    = N_CORES + N_GROUPS,
  localparam int unsigned EAW      = $clog2(ENV_DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clk_net,
  input  logic               rst_net,
  input  logic [3:0]         node_id,
  input  logic [N_CORES-1:0] ancilla_mask,
  // processor buses
  input  tl_a_t              core_tl_a       [N_CORES],
  output logic               core_tl_a_ready [N_CORES],
  output tl_d_t              core_tl_d       [N_CORES],
  input  logic               core_tl_d_ready [N_CORES],
  input  tl_a_t              mem_tl_a        [N_CORES],
  output logic               mem_tl_a_ready  [N_CORES],
  output tl_d_t              mem_tl_d        [N_CORES],
  input  logic               mem_tl_d_ready  [N_CORES],
  // host envelope loading
  input  logic               env_wr_en,
  input  logic [7:0]         env_wr_core,
  input  logic               env_wr_gen,
  input  logic [EAW-1:0]     env_wr_addr,
  input  dac_word_t          env_wr_data,
  // data converters
  output dac_word_t          dac [N_DAC],
  input  adc_word_t          adc [N_GROUPS],
  // link
  output logic [65:0]        gt_tx_block,
  input  logic [65:0]        gt_rx_block,
  output logic               gt_rx_slip,
  // status
  output time_t              now,
  output logic               rx_locked,
  output logic               ptp_synced,
  output time_t              ptp_offset,
  output logic               synd_overflow
);

  // ---------------------------------------------------------------- time base
  logic  adj_valid;
  time_t adj_offset;
  global_timer u_timer (.clk, .rst, .adj_valid, .adj_offset, .time_o (now));

  // ---------------------------------------------------------------- cores
  logic [N_CORES-1:0] synd_valid, synd_bit, err_valid, err_bit, err_ack;
  dac_word_t          ro_samples [N_CORES];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    localparam int unsigned G = c / GROUP;
    localparam int unsigned I = c % GROUP;
    logic [1:0] env_en;
    assign env_en = (env_wr_en && env_wr_core == 8'(c)) ? (env_wr_gen ? 2'b10 : 2'b01) : 2'b00;

    controller_core #(.ENV_DEPTH(ENV_DEPTH)) u_core (
      .clk, .rst,
      .tl_a        (core_tl_a[c]),
      .tl_a_ready  (core_tl_a_ready[c]),
      .tl_d        (core_tl_d[c]),
      .tl_d_ready  (core_tl_d_ready[c]),
      .now,
      .env_wr_en   (env_en),
      .env_wr_addr,
      .env_wr_data,
      .adc         (adc[G]),
      .gate_samples(dac[G*(GROUP+1) + I]),
      .ro_samples  (ro_samples[c]),
      .synd_valid  (synd_valid[c]),
      .synd_bit    (synd_bit[c]),
      .err_valid   (err_valid[c]),
      .err_bit     (err_bit[c]),
      .err_ack     (err_ack[c])
    );

    local_memory #(.BYTES(MEM_BYTES)) u_mem (
      .clk, .rst,
      .tl_a       (mem_tl_a[c]),
      .tl_a_ready (mem_tl_a_ready[c]),
      .tl_d       (mem_tl_d[c]),
      .tl_d_ready (mem_tl_d_ready[c])
    );
  end

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_group
    readout_drive_combiner #(.N_IN(GROUP)) u_comb (
      .clk, .rst,
      .in_samples  (ro_samples[g*GROUP +: GROUP]),
      .out_samples (dac[g*(GROUP+1) + GROUP])
    );
  end

  // ---------------------------------------------------------------- QEC path
  logic agg_valid, agg_ready, ptp_valid, ptp_ready, tx_valid, tx_ready, rx_valid;
  msg_t agg_msg, ptp_msg, tx_msg, rx_msg;

  leaf_syndrome_aggregator #(.N_CORES(N_CORES)) u_agg (
    .clk, .rst, .node_id, .ancilla_mask,
    .synd_valid, .synd_bit,
    .tx_valid (agg_valid), .tx_ready (agg_ready), .tx_msg (agg_msg),
    .overflow (synd_overflow)
  );

  leaf_error_distributor #(.N_CORES(N_CORES)) u_dist (
    .clk, .rst, .node_id,
    .rx_valid, .rx_msg,
    .err_valid, .err_bit, .err_round (), .err_ack
  );

  ptp_slave u_ptp (
    .clk, .rst, .node_id, .now,
    .tx_valid (ptp_valid), .tx_ready (ptp_ready), .tx_msg (ptp_msg),
    .rx_valid, .rx_msg,
    .adj_valid, .adj_offset,
    .offset (ptp_offset), .synced (ptp_synced)
  );

  // transmit arbitration: syndrome first
  assign tx_valid  = agg_valid || ptp_valid;
  assign tx_msg    = agg_valid ? agg_msg : ptp_msg;
  assign agg_ready = tx_ready;
  assign ptp_ready = tx_ready && !agg_valid;

  net_core u_net (
    .clk, .rst, .clk_net, .rst_net,
    .tx_valid, .tx_ready, .tx_msg,
    .rx_valid, .rx_msg, .rx_locked,
    .gt_tx_block, .gt_rx_block, .gt_rx_slip
  );

endmodule
