// root_syndrome_aggregator: assembles the leaves' syndrome messages of one
// measurement round into the decoder's input frame.
//
// Link l carries the messages of leaf l. For every link the aggregator keeps
// the syndrome bits of the current round and a `got` flag. When every leaf
// selected by leaf_mask has delivered, the bits are copied into the frame
// register, the per-leaf store is cleared for the next round, and the frame
// is offered to the decoder (frame_valid until frame_ready). Core k of leaf l
// lands at frame bit l*N_CORES + k, so the frame is the round's syndrome in
// global ancilla order.
//
// Timing: the frame is valid in the cycle after the last message arrives.
// round_mismatch flags a frame whose parts carried different round numbers;
// overflow flags a round that completed while the previous frame was still
// waiting (that frame is then replaced).
// The index mapping and the flags are this design's choices.
module root_syndrome_aggregator
  import qec_pkg::*;
#(
  parameter int unsigned N_LEAF  = 4,
  parameter int unsigned N_CORES = 14
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [N_LEAF-1:0]          leaf_mask,
  input  logic [N_LEAF-1:0]          rx_valid,
  input  msg_t                       rx_msg [N_LEAF],
  output logic                       frame_valid,
  input  logic                       frame_ready,
  output logic [N_LEAF*N_CORES-1:0]  frame_syndrome,
  output logic [7:0]                 frame_round,
  output logic                       round_mismatch,
  output logic                       overflow
);

  logic [N_CORES-1:0] bits   [N_LEAF];
  logic [7:0]         rounds [N_LEAF];
  logic [N_LEAF-1:0]  got, got_n, take;
  logic               complete;

  always_comb begin
    for (int l = 0; l < N_LEAF; l++)
      take[l] = rx_valid[l] && rx_msg[l].mtype == MSG_SYNDROME;
    got_n    = got | take;
    complete = (leaf_mask != '0) && ((got_n & leaf_mask) == leaf_mask);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      got <= '0; frame_valid <= 1'b0; frame_syndrome <= '0; frame_round <= '0;
      round_mismatch <= 1'b0; overflow <= 1'b0;
      for (int l = 0; l < N_LEAF; l++) begin bits[l] <= '0; rounds[l] <= '0; end
    end else begin
      overflow <= 1'b0;
      if (frame_valid && frame_ready) frame_valid <= 1'b0;
      for (int l = 0; l < N_LEAF; l++)
        if (take[l]) begin
          bits[l]   <= rx_msg[l].payload[N_CORES-1:0];
          rounds[l] <= rx_msg[l].round;
        end
      if (complete) begin
        logic [7:0] r0;
        logic       mism;
        r0   = '0;
        mism = 1'b0;
        for (int l = N_LEAF-1; l >= 0; l--)
          if (leaf_mask[l]) r0 = take[l] ? rx_msg[l].round : rounds[l];
        for (int l = 0; l < N_LEAF; l++) begin
          logic [N_CORES-1:0] b;
          logic [7:0]         r;
          b = take[l] ? rx_msg[l].payload[N_CORES-1:0] : bits[l];
          r = take[l] ? rx_msg[l].round : rounds[l];
          frame_syndrome[l*N_CORES +: N_CORES] <= leaf_mask[l] ? b : '0;
          if (leaf_mask[l] && r != r0) mism = 1'b1;
        end
        if (frame_valid && !frame_ready) overflow <= 1'b1;
        frame_valid    <= 1'b1;
        frame_round    <= r0;
        round_mismatch <= mism;
        got            <= '0;
      end else begin
        got <= got_n;
      end
    end
  end

endmodule
