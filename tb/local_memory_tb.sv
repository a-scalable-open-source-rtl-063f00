// local_memory_tb: random word writes and read-back against a reference
// array, byte-masked writes, and the fixed one-cycle response latency.
module local_memory_tb;
  import qec_pkg::*;
  localparam int BYTES = 1024;
  logic clk = 0, rst = 1;
  tl_a_t tl_a;
  tl_d_t tl_d;
  logic tl_a_ready, tl_d_ready;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [BYTES/4];
  always #1 clk = ~clk;

  local_memory #(.BYTES(BYTES)) dut (.*);
  tl_host_bfm host (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < BYTES/4; i++) begin
      ref_mem[i] = $urandom;
      host.write(16'(4*i), ref_mem[i]);
    end
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(BYTES/4 - 1);
      host.read(16'(4*a), r);
      check(r == ref_mem[a], $sformatf("word %0d: %h vs %h", a, r, ref_mem[a]));
      check(host.last_latency == 1, "one-cycle latency");
    end
    for (int i = 0; i < 50; i++) begin
      int a;
      logic [3:0] m;
      logic [31:0] d;
      a = $urandom_range(BYTES/4 - 1);
      m = 4'($urandom);
      d = $urandom;
      host.write(16'(4*a), d, m);
      for (int b = 0; b < 4; b++) if (m[b]) ref_mem[a][8*b +: 8] = d[8*b +: 8];
      host.read(16'(4*a), r);
      check(r == ref_mem[a], $sformatf("masked word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
