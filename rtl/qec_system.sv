// qec_system: the distributed real-time QEC control system.
//
// N_LEAF leaf boards, each controlling N_CORES qubits, report syndrome
// rounds to one root board, which hands complete rounds to the decoder and
// sends the decoded errors back to the leaves; all boards run one time line
// aligned by PTP. The boards share a reference clock, so clk (500 MHz
// control) and clk_net (156.25 MHz link) are common inputs.
//
// Parts that are not logic of this design are ports of this module:
//   * the transceiver lanes and fibres between each leaf and the root
//     (leaf_gt_tx[l] must reach root_gt_rx[l] and root_gt_tx[l] leaf_gt_rx[l]),
//   * the QEC decoder at the root (dec_*),
//   * the RISC-V processors of every core (core_tl_* and mem_tl_*),
//   * the DACs and ADCs of every leaf (dac, adc),
//   * the host's configuration writes (env_wr_*, masks, ptp_start).
// Leaf l has node id l and sits on root link l.
module qec_system
  import qec_pkg::*;
#(
  parameter int unsigned N_LEAF    = 4,
  parameter int unsigned N_CORES   = 14,
  parameter int unsigned GROUP     = 7,
  parameter int unsigned ENV_DEPTH = 2048,
  parameter int unsigned MEM_BYTES = 8192,
  localparam int unsigned N_GROUPS = N_CORES / GROUP,
  localparam int unsigned N_DAC    = N_CORES + N_GROUPS,
  localparam int unsigned EAW      = $clog2(ENV_DEPTH),
  localparam int unsigned N_SYND   = N_LEAF * N_CORES
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clk_net,
  input  logic               rst_net,
  // host configuration
  input  logic [N_LEAF-1:0]  leaf_mask,
  input  logic [N_CORES-1:0] ancilla_mask [N_LEAF],
  input  logic               ptp_start,
  input  logic [N_LEAF-1:0]  env_wr_en,
  input  logic [7:0]         env_wr_core,
  input  logic               env_wr_gen,
  input  logic [EAW-1:0]     env_wr_addr,
  input  dac_word_t          env_wr_data,
  // processors
  input  tl_a_t              core_tl_a       [N_LEAF][N_CORES],
  output logic               core_tl_a_ready [N_LEAF][N_CORES],
  output tl_d_t              core_tl_d       [N_LEAF][N_CORES],
  input  logic               core_tl_d_ready [N_LEAF][N_CORES],
  input  tl_a_t              mem_tl_a        [N_LEAF][N_CORES],
  output logic               mem_tl_a_ready  [N_LEAF][N_CORES],
  output tl_d_t              mem_tl_d        [N_LEAF][N_CORES],
  input  logic               mem_tl_d_ready  [N_LEAF][N_CORES],
  // data converters
  output dac_word_t          dac [N_LEAF][N_DAC],
  input  adc_word_t          adc [N_LEAF][N_GROUPS],
  // transceiver lanes
  output logic [65:0]        leaf_gt_tx [N_LEAF],
  input  logic [65:0]        leaf_gt_rx [N_LEAF],
  output logic [65:0]        root_gt_tx [N_LEAF],
  input  logic [65:0]        root_gt_rx [N_LEAF],
  // decoder
  output logic               dec_frame_valid,
  input  logic               dec_frame_ready,
  output logic [N_SYND-1:0]  dec_syndrome,
  output logic [7:0]         dec_round,
  input  logic               dec_err_valid,
  output logic               dec_err_ready,
  input  logic [N_SYND-1:0]  dec_err_vec,
  input  logic [7:0]         dec_err_round,
  // status
  output time_t              root_now,
  output time_t              leaf_now      [N_LEAF],
  output logic [N_LEAF-1:0]  leaf_locked,
  output logic [N_LEAF-1:0]  root_locked,
  output logic [N_LEAF-1:0]  leaf_synced,
  output logic [N_LEAF-1:0]  ptp_busy,
  output logic [N_LEAF-1:0]  synd_overflow,
  output logic               round_mismatch,
  output logic               frame_overflow
);

  for (genvar l = 0; l < N_LEAF; l++) begin : g_leaf
    leaf_node #(
      .N_CORES (N_CORES), .GROUP (GROUP), .ENV_DEPTH (ENV_DEPTH), .MEM_BYTES (MEM_BYTES)
    ) u_leaf (
      .clk, .rst, .clk_net, .rst_net,
      .node_id         (4'(l)),
      .ancilla_mask    (ancilla_mask[l]),
      .core_tl_a       (core_tl_a[l]),
      .core_tl_a_ready (core_tl_a_ready[l]),
      .core_tl_d       (core_tl_d[l]),
      .core_tl_d_ready (core_tl_d_ready[l]),
      .mem_tl_a        (mem_tl_a[l]),
      .mem_tl_a_ready  (mem_tl_a_ready[l]),
      .mem_tl_d        (mem_tl_d[l]),
      .mem_tl_d_ready  (mem_tl_d_ready[l]),
      .env_wr_en       (env_wr_en[l]),
      .env_wr_core, .env_wr_gen, .env_wr_addr, .env_wr_data,
      .dac             (dac[l]),
      .adc             (adc[l]),
      .gt_tx_block     (leaf_gt_tx[l]),
      .gt_rx_block     (leaf_gt_rx[l]),
      .gt_rx_slip      (),
      .now             (leaf_now[l]),
      .rx_locked       (leaf_locked[l]),
      .ptp_synced      (leaf_synced[l]),
      .ptp_offset      (),
      .synd_overflow   (synd_overflow[l])
    );
  end

  root_node #(.N_LEAF (N_LEAF), .N_CORES (N_CORES)) u_root (
    .clk, .rst, .clk_net, .rst_net,
    .leaf_mask, .ptp_start,
    .gt_tx_block (root_gt_tx),
    .gt_rx_block (root_gt_rx),
    .gt_rx_slip  (),
    .dec_frame_valid, .dec_frame_ready, .dec_syndrome, .dec_round,
    .dec_err_valid, .dec_err_ready, .dec_err_vec, .dec_err_round,
    .now (root_now),
    .rx_locked (root_locked),
    .ptp_busy,
    .round_mismatch, .frame_overflow
  );

endmodule
