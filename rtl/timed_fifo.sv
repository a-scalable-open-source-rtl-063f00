// timed_fifo: FIFO that releases each entry at its own timestamp.
//
// The processor pushes (timestamp, value) pairs whenever its program reaches
// them; the FIFO hands the head value to the RF signal generator or decoder
// in the exact cycle the global timer reaches the timestamp. This decouples
// instruction timing from pulse timing: as long as software stays ahead of
// the timeline, every parameter change lands on its cycle.
//
// Interface: push/push_time/push_data (ignored when full), now (global
// timer), fire/fire_data (one-cycle strobe with the released value).
// Timing: an entry is released in the first cycle with now >= timestamp
// (wrap-safe signed compare); an entry already due when it reaches the head
// is released at once and marked by the `late` strobe. Release registers
// nothing: fire is combinational from the head and now.
// Depth and the late flag are this design's choices.
module timed_fifo
  import qec_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              push,
  input  time_t             push_time,
  input  logic [DATA_W-1:0] push_data,
  output logic              full,
  output logic              empty,
  input  time_t             now,
  output logic              fire,
  output logic [DATA_W-1:0] fire_data,
  output logic              late
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  time_t             ts_mem  [DEPTH];
  logic [DATA_W-1:0] dat_mem [DEPTH];
  logic [AW:0]       wr_ptr, rd_ptr;

  time_t diff;

  assign empty = (wr_ptr == rd_ptr);
  assign full  = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);

  always_comb begin
    diff      = now - ts_mem[rd_ptr[AW-1:0]];
    fire      = !empty && !diff[TIME_W-1];
    late      = fire && (diff != '0);
    fire_data = dat_mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push && !full) begin
        ts_mem [wr_ptr[AW-1:0]] <= push_time;
        dat_mem[wr_ptr[AW-1:0]] <= push_data;
        wr_ptr <= wr_ptr + 1'b1;
      end
      if (fire) rd_ptr <= rd_ptr + 1'b1;
    end
  end

endmodule
