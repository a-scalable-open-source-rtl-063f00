// ptp_master_tb: the testbench plays the slave. For repeated exchanges with
// random back-pressure and reply delays it checks that SYNC carries the
// master time at the cycle it is accepted, that unrelated messages are
// ignored while waiting, that DELAY_RSP carries the master time at which the
// DELAY_REQ arrived, and that busy/done behave.
module ptp_master_tb;
  import qec_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic [3:0] node_id = 4'd0;
  time_t now;
  logic start = 0, tx_valid, tx_ready = 0, rx_valid = 0, busy, done;
  msg_t tx_msg, rx_msg = '0;
  int checks = 0, failures = 0, n_done = 0;

  ptp_master dut (.*);

  always_ff @(posedge clk) now <= rst ? time_t'(48'h1234_0000_0000) : now + 1'b1;
  always @(posedge clk) if (!rst && done) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic exchange();
    time_t t_req;
    int n0;
    n0 = n_done;
    @(negedge clk) start <= 1;
    @(negedge clk) start <= 0;
    check(busy && tx_valid, "sync offered after start");
    // random back-pressure before accepting SYNC
    repeat ($urandom_range(5, 0)) begin
      @(negedge clk);
      check(tx_valid && tx_msg.mtype == MSG_PTP_SYNC, "sync held");
    end
    tx_ready <= 1;
    @(posedge clk);
    check(tx_msg.mtype == MSG_PTP_SYNC && tx_msg.payload == now && tx_msg.node == node_id,
          $sformatf("sync time %0d vs %0d", tx_msg.payload, now));
    @(negedge clk) tx_ready <= 0;
    check(!tx_valid && busy, "waiting for request");
    // a stray message of another type must not be taken as the request
    rx_valid <= 1; rx_msg <= '0; rx_msg.mtype <= MSG_SYNDROME; rx_msg.payload <= 48'hABC;
    @(negedge clk) rx_valid <= 0;
    repeat ($urandom_range(30, 1)) @(negedge clk);
    check(!tx_valid, "no reply to stray message");
    rx_valid <= 1; rx_msg.mtype <= MSG_PTP_DELAY_REQ;
    @(posedge clk) t_req = now;
    @(negedge clk) rx_valid <= 0;
    repeat ($urandom_range(3, 0)) @(negedge clk);
    tx_ready <= 1;
    @(posedge clk);
    check(tx_valid && tx_msg.mtype == MSG_PTP_DELAY_RSP && tx_msg.payload == t_req,
          $sformatf("response time %0d vs %0d", tx_msg.payload, t_req));
    @(negedge clk) tx_ready <= 0;
    @(negedge clk);
    check(!busy && n_done == n0 + 1, "done once, idle again");
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst <= 0;
    @(negedge clk);
    check(!busy && !tx_valid, "idle after reset");
    for (int i = 0; i < 20; i++) exchange();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
