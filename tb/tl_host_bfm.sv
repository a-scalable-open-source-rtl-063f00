// tl_host_bfm: bus-functional model of a processor's TileLink-UL master
// port, used by the testbenches in place of a RISC-V core. write() and
// read() issue one 32-bit request, wait for acceptance and return when the
// response arrives; `last_latency` is the number of cycles from request
// issue to response.
module tl_host_bfm
  import qec_pkg::*;
(
  input  logic  clk,
  output tl_a_t tl_a,
  input  logic  tl_a_ready,
  input  tl_d_t tl_d,
  output logic  tl_d_ready
);
  int last_latency = 0;
  initial begin
    tl_a = '0;
    tl_d_ready = 1'b1;
  end

  task automatic access(input tl_a_op_e op, input logic [15:0] addr, input logic [31:0] wdata,
                        input logic [3:0] mask, output logic [31:0] rdata, output tl_d_op_e dop);
    int n;
    n = 0;
    tl_a.valid   <= 1'b1;
    tl_a.opcode  <= op;
    tl_a.address <= addr;
    tl_a.mask    <= mask;
    tl_a.data    <= wdata;
    @(posedge clk);
    while (!tl_a_ready) begin n++; @(posedge clk); end
    tl_a.valid <= 1'b0;
    do begin n++; @(posedge clk); end while (!tl_d.valid);
    rdata = tl_d.data;
    dop   = tl_d.opcode;
    last_latency = n;
  endtask

  task automatic write(input logic [15:0] addr, input logic [31:0] data, input logic [3:0] mask = 4'hF);
    logic [31:0] r;
    tl_d_op_e o;
    access(TL_PUT_FULL, addr, data, mask, r, o);
  endtask

  task automatic read(input logic [15:0] addr, output logic [31:0] data);
    tl_d_op_e o;
    access(TL_GET, addr, 32'd0, 4'hF, data, o);
  endtask
endmodule
