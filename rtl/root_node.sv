// root_node: the decoder board at the top of the tree.
//
// One net_core per child link (N_LEAF, leaves attached directly). Incoming
// syndrome messages go to root_syndrome_aggregator, whose complete round
// frame is the decoder input (dec_frame_*); the decoder's result
// (dec_err_*) goes to root_error_distributor, which queues one ERROR message
// per leaf. The decoder itself sits outside this module, so any decoder with
// this valid/ready frame interface can be attached. Each link also has a
// ptp_master; `ptp_start` launches a synchronisation on every link at once.
// A link's transmitter serves the error message first and PTP second.
module root_node
  import qec_pkg::*;
#(
  parameter int unsigned N_LEAF  = 4,
  parameter int unsigned N_CORES = 14
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      clk_net,
  input  logic                      rst_net,
  input  logic [N_LEAF-1:0]         leaf_mask,
  input  logic                      ptp_start,
  // links
  output logic [65:0]               gt_tx_block [N_LEAF],
  input  logic [65:0]               gt_rx_block [N_LEAF],
  output logic [N_LEAF-1:0]         gt_rx_slip,
  // decoder
  output logic                      dec_frame_valid,
  input  logic                      dec_frame_ready,
  output logic [N_LEAF*N_CORES-1:0] dec_syndrome,
  output logic [7:0]                dec_round,
  input  logic                      dec_err_valid,
  output logic                      dec_err_ready,
  input  logic [N_LEAF*N_CORES-1:0] dec_err_vec,
  input  logic [7:0]                dec_err_round,
  // status
  output time_t                     now,
  output logic [N_LEAF-1:0]         rx_locked,
  output logic [N_LEAF-1:0]         ptp_busy,
  output logic                      round_mismatch,
  output logic                      frame_overflow
);

  global_timer u_timer (.clk, .rst, .adj_valid (1'b0), .adj_offset ('0), .time_o (now));

  logic [N_LEAF-1:0] rx_valid, dist_valid, dist_ready, ptp_valid, ptp_ready, tx_valid, tx_ready;
  msg_t              rx_msg [N_LEAF];
  msg_t              dist_msg [N_LEAF];
  msg_t              ptp_msg [N_LEAF];
  msg_t              tx_msg [N_LEAF];

  root_syndrome_aggregator #(.N_LEAF(N_LEAF), .N_CORES(N_CORES)) u_agg (
    .clk, .rst, .leaf_mask,
    .rx_valid, .rx_msg,
    .frame_valid (dec_frame_valid), .frame_ready (dec_frame_ready),
    .frame_syndrome (dec_syndrome), .frame_round (dec_round),
    .round_mismatch, .overflow (frame_overflow)
  );

  root_error_distributor #(.N_LEAF(N_LEAF), .N_CORES(N_CORES)) u_dist (
    .clk, .rst, .leaf_mask,
    .err_valid (dec_err_valid), .err_ready (dec_err_ready),
    .err_vec (dec_err_vec), .err_round (dec_err_round),
    .tx_valid (dist_valid), .tx_ready (dist_ready), .tx_msg (dist_msg)
  );

  for (genvar l = 0; l < N_LEAF; l++) begin : g_link
    ptp_master u_ptp (
      .clk, .rst, .node_id (4'(l)), .now,
      .start (ptp_start && leaf_mask[l]),
      .tx_valid (ptp_valid[l]), .tx_ready (ptp_ready[l]), .tx_msg (ptp_msg[l]),
      .rx_valid (rx_valid[l]), .rx_msg (rx_msg[l]),
      .busy (ptp_busy[l]), .done ()
    );

    assign tx_valid[l]   = dist_valid[l] || ptp_valid[l];
    assign tx_msg[l]     = dist_valid[l] ? dist_msg[l] : ptp_msg[l];
    assign dist_ready[l] = tx_ready[l];
    assign ptp_ready[l]  = tx_ready[l] && !dist_valid[l];

    net_core u_net (
      .clk, .rst, .clk_net, .rst_net,
      .tx_valid (tx_valid[l]), .tx_ready (tx_ready[l]), .tx_msg (tx_msg[l]),
      .rx_valid (rx_valid[l]), .rx_msg (rx_msg[l]), .rx_locked (rx_locked[l]),
      .gt_tx_block (gt_tx_block[l]), .gt_rx_block (gt_rx_block[l]), .gt_rx_slip (gt_rx_slip[l])
    );
  end

endmodule
