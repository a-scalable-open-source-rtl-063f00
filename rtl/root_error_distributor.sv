// root_error_distributor: turns the decoder's error vector into one ERROR
// message per leaf.
//
// Error bit l*N_CORES + k belongs to core k of leaf l (the same order the
// aggregator uses). When the decoder offers a result (err_valid) and every
// link's message slot is free, the distributor accepts it and fills one slot
// per leaf selected by leaf_mask; each slot is offered to its link until
// tx_ready, independently of the others, so a busy link delays only its own
// leaf. The round number of the result is carried along.
//
// Timing: err_ready is high when all slots are empty; messages are valid in
// the cycle after acceptance.
module root_error_distributor
  import qec_pkg::*;
#(
  parameter int unsigned N_LEAF  = 4,
  parameter int unsigned N_CORES = 14
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [N_LEAF-1:0]         leaf_mask,
  input  logic                      err_valid,
  output logic                      err_ready,
  input  logic [N_LEAF*N_CORES-1:0] err_vec,
  input  logic [7:0]                err_round,
  output logic [N_LEAF-1:0]         tx_valid,
  input  logic [N_LEAF-1:0]         tx_ready,
  output msg_t                      tx_msg [N_LEAF]
);

  assign err_ready = (tx_valid == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_valid <= '0;
      for (int l = 0; l < N_LEAF; l++) tx_msg[l] <= '0;
    end else begin
      for (int l = 0; l < N_LEAF; l++)
        if (tx_valid[l] && tx_ready[l]) tx_valid[l] <= 1'b0;
      if (err_valid && err_ready) begin
        for (int l = 0; l < N_LEAF; l++) begin
          tx_valid[l]       <= leaf_mask[l];
          tx_msg[l].mtype   <= MSG_ERROR;
          tx_msg[l].node    <= 4'(l);
          tx_msg[l].round   <= err_round;
          tx_msg[l].payload <= 48'(err_vec[l*N_CORES +: N_CORES]);
        end
      end
    end
  end

endmodule
