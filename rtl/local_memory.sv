// local_memory: private RAM of one controller core.
//
// Each core owns its memory, so an access never waits for another core and
// its latency is fixed: a request accepted in cycle t is answered in cycle
// t+1, every time. The port is TileLink-UL (32-bit Get / PutFullData with
// byte mask); the request is accepted whenever no response is pending or the
// pending one is taken in the same cycle.
//
// Distributed per-core memory follows the architecture. The 8 KiB default is
// derived from the resource budget (two 36-kbit block RAMs per core); byte
// masks and the bus protocol subset are this design's choices.
module local_memory
  import qec_pkg::*;
#(
  parameter int unsigned BYTES = 8192,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned WAW   = $clog2(WORDS)
) (
  input  logic  clk,
  input  logic  rst,
  input  tl_a_t tl_a,
  output logic  tl_a_ready,
  output tl_d_t tl_d,
  input  logic  tl_d_ready
);

  logic [31:0] mem [WORDS];
  logic        acc_req;
  logic [WAW-1:0] widx;

  assign tl_a_ready = !tl_d.valid || tl_d_ready;
  assign acc_req    = tl_a.valid && tl_a_ready;
  assign widx       = tl_a.address[WAW+1:2];

  always_ff @(posedge clk) begin
    if (acc_req && tl_a.opcode == TL_PUT_FULL)
      for (int b = 0; b < 4; b++)
        if (tl_a.mask[b]) mem[widx][8*b +: 8] <= tl_a.data[8*b +: 8];
  end

  always_ff @(posedge clk) begin
    if (rst) tl_d <= '0;
    else if (acc_req) begin
      tl_d.valid  <= 1'b1;
      tl_d.opcode <= (tl_a.opcode == TL_PUT_FULL) ? TL_ACCESS_ACK : TL_ACCESS_ACK_DATA;
      tl_d.data   <= (tl_a.opcode == TL_PUT_FULL) ? 32'd0 : mem[widx];
    end else if (tl_d_ready) tl_d.valid <= 1'b0;
  end

  resp_held : assert property (@(posedge clk) disable iff (rst)
                               tl_d.valid && !tl_d_ready |=> tl_d.valid);

endmodule
