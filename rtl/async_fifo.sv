// async_fifo: dual-clock FIFO for crossing between the 500 MHz control clock
// and the 156.25 MHz link clock.
//
// Classic Gray-code design: each side keeps a binary and a Gray pointer, the
// Gray pointer of the other side is brought over through two flip-flops, and
// full/empty are computed from the local pointer and the synchronised remote
// one. DEPTH must be a power of two. A word written in write cycle t becomes
// visible to the reader 2-3 read-clock cycles later, which is where the
// cycle-to-cycle spread of the link latency comes from.
// Read side is first-word-fall-through: rdata shows the head while !rempty.
module async_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             winc,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rinc,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;
  logic [AW:0] wbin_n, rbin_n;

  assign wbin_n = wbin + (AW+1)'(winc && !wfull);
  assign rbin_n = rbin + (AW+1)'(rinc && !rempty);

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0;
    end else begin
      wbin      <= wbin_n;
      wgray     <= (wbin_n >> 1) ^ wbin_n;
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0;
    end else begin
      rbin      <= rbin_n;
      rgray     <= (rbin_n >> 1) ^ rbin_n;
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
    end
  end

  assign wfull  = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});
  assign rempty = (rgray == rq2_wgray);
  assign rdata  = mem[rbin[AW-1:0]];

endmodule
