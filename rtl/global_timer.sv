// global_timer: the board-wide time base.
//
// A free-running counter of 500 MHz control-clock cycles. Every timed FIFO
// of every controller core on the board compares against this one value, so
// all pulses of a board are scheduled on a common time line. Across boards
// the counters run from a shared reference clock and are aligned by PTP
// (ptp_slave), which steps the counter by a signed offset through adj_*.
//
// Timing: time_o advances by one each cycle; an adjustment in cycle n takes
// effect on the value seen in cycle n+1 (time + 1 + offset).
// The 48-bit width and the step-style correction are this design's choices.
module global_timer
  import qec_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  adj_valid,
  input  time_t adj_offset,   // two's complement step
  output time_t time_o
);

  always_ff @(posedge clk) begin
    if (rst)            time_o <= '0;
    else if (adj_valid) time_o <= time_o + 1'b1 + adj_offset;
    else                time_o <= time_o + 1'b1;
  end

endmodule
