// leaf_error_distributor: hands the decoded errors of a round to the cores.
//
// An ERROR message from the root addressed to this node (node id match)
// carries one error bit per core (bit k = core k). The distributor stores
// each bit with a valid flag; core k reads them through its ERROR register,
// which pulses err_ack[k] and clears its flag. A new message overwrites the
// bits and sets all flags again; other message types are ignored.
//
// Timing: an accepted message is visible on err_valid/err_bit in the next
// cycle. err_round gives the round number the root attached.
// The layout and the per-core valid flags are this design's choices.
module leaf_error_distributor
  import qec_pkg::*;
#(
  parameter int unsigned N_CORES = 14
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [3:0]         node_id,
  input  logic               rx_valid,
  input  msg_t               rx_msg,
  output logic [N_CORES-1:0] err_valid,
  output logic [N_CORES-1:0] err_bit,
  output logic [7:0]         err_round,
  input  logic [N_CORES-1:0] err_ack
);

  logic take;
  assign take = rx_valid && rx_msg.mtype == MSG_ERROR && rx_msg.node == node_id;

  always_ff @(posedge clk) begin
    if (rst) begin
      err_valid <= '0; err_bit <= '0; err_round <= '0;
    end else if (take) begin
      err_valid <= '1;
      err_bit   <= rx_msg.payload[N_CORES-1:0];
      err_round <= rx_msg.round;
    end else begin
      err_valid <= err_valid & ~err_ack;
    end
  end

endmodule
