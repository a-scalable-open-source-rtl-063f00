// leaf_error_distributor_tb: sends ERROR messages for this node, for another
// node and of another type; checks that only the first are taken, that each
// core's bit and valid flag appear in the next cycle, and that a core's
// acknowledge clears only its own flag.
module leaf_error_distributor_tb;
  import qec_pkg::*;
  localparam int N = 14;
  logic clk = 0, rst = 1;
  logic [3:0] node_id = 4'd2;
  logic rx_valid = 0;
  msg_t rx_msg = '0;
  logic [N-1:0] err_valid, err_bit, err_ack = '0;
  logic [7:0] err_round;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  leaf_error_distributor #(.N_CORES(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input msg_type_e t, input logic [3:0] node, input logic [7:0] rnd, input logic [N-1:0] bits);
    rx_valid <= 1;
    rx_msg   <= '{mtype: t, node: node, round: rnd, payload: 48'(bits)};
    @(posedge clk);
    rx_valid <= 0;
    #0.1;
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [N-1:0] b;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #0.1;
    check(err_valid == '0, "nothing valid after reset");
    for (int i = 0; i < 20; i++) begin
      b = N'($urandom);
      send(MSG_ERROR, node_id, 8'(i), b);
      check(err_valid == '1 && err_bit == b && err_round == 8'(i), $sformatf("message %0d taken", i));
      send(MSG_ERROR, 4'd3, 8'(i), ~b);
      check(err_bit == b, "other node ignored");
      send(MSG_SYNDROME, node_id, 8'(i), ~b);
      check(err_bit == b, "other type ignored");
      for (int k = 0; k < N; k++) begin
        err_ack <= '0; err_ack[k] <= 1'b1;
        @(posedge clk); #0.1;
        check(err_valid == ~((N'(1) << (k + 1)) - 1'b1), $sformatf("ack core %0d", k));
      end
      err_ack <= '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
