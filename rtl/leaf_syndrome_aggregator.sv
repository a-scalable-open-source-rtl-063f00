// leaf_syndrome_aggregator: packs one measurement round of a leaf board into
// a single syndrome message.
//
// After measuring its ancilla, each core stores the 0/1 syndrome bit to its
// SYNDROME register, which pulses synd_valid[k]. The aggregator keeps the
// bits of the current round; once every core selected by ancilla_mask has
// reported, it emits one SYNDROME message (qec_pkg layout: node id, 8-bit
// round number, bit k = core k) toward the net core and starts the next
// round. A core that reports twice in a round overwrites its bit.
//
// Timing: the message is valid in the cycle after the last bit arrives and
// is held until tx_ready; bits of the next round that arrive meanwhile are
// collected normally (the message is a snapshot).
//
// The round number, the node id field and the mask input are this design's
// choices; the one-message-per-round packing follows the architecture.
module leaf_syndrome_aggregator
  import qec_pkg::*;
#(
  parameter int unsigned N_CORES = 14
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [3:0]         node_id,
  input  logic [N_CORES-1:0] ancilla_mask,
  input  logic [N_CORES-1:0] synd_valid,
  input  logic [N_CORES-1:0] synd_bit,
  output logic               tx_valid,
  input  logic               tx_ready,
  output msg_t               tx_msg,
  output logic               overflow    // a round completed while the previous message was still waiting
);

  logic [N_CORES-1:0] bits, seen, bits_n, seen_n;
  logic [7:0]         round;
  logic               complete;

  always_comb begin
    bits_n = bits;
    seen_n = seen;
    for (int k = 0; k < N_CORES; k++)
      if (synd_valid[k]) begin
        bits_n[k] = synd_bit[k];
        seen_n[k] = 1'b1;
      end
    complete = (ancilla_mask != '0) && ((seen_n & ancilla_mask) == ancilla_mask);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bits <= '0; seen <= '0; round <= '0;
      tx_valid <= 1'b0; tx_msg <= '0; overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (tx_valid && tx_ready) tx_valid <= 1'b0;
      if (complete) begin
        if (tx_valid && !tx_ready) overflow <= 1'b1;
        tx_valid       <= 1'b1;
        tx_msg.mtype   <= MSG_SYNDROME;
        tx_msg.node    <= node_id;
        tx_msg.round   <= round;
        tx_msg.payload <= 48'(bits_n & ancilla_mask);
        round <= round + 1'b1;
        bits  <= '0;
        seen  <= '0;
      end else begin
        bits <= bits_n;
        seen <= seen_n;
      end
    end
  end

  tx_held : assert property (@(posedge clk) disable iff (rst)
                             tx_valid && !tx_ready && !complete |=> tx_valid && $stable(tx_msg));

endmodule
