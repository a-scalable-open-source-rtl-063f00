// net_core_tb: two link cores joined back to back through a short fibre delay
// line. Checks block lock after reset, that random messages arrive in order
// and unchanged in both directions, that a burst of corrupted sync headers
// drops lock, and that the link locks again and carries traffic afterwards.
module net_core_tb;
  import qec_pkg::*;
  localparam int DLY = 5;  // link delay in 156.25 MHz blocks
  logic clk = 0, clk_net = 0, rst = 1, rst_net = 1;
  always #1   clk = ~clk;       // 500 MHz
  always #3.2 clk_net = ~clk_net; // 156.25 MHz

  logic       a_tx_valid = 0, b_tx_valid = 0, a_tx_ready, b_tx_ready;
  msg_t       a_tx_msg = '0, b_tx_msg = '0, a_rx_msg, b_rx_msg;
  logic       a_rx_valid, b_rx_valid, a_locked, b_locked, a_slip, b_slip;
  logic [65:0] a_gt_tx, b_gt_tx, a_gt_rx, b_gt_rx;
  logic [65:0] ab_line [DLY], ba_line [DLY];
  logic        corrupt = 0;
  int checks = 0, failures = 0;
  msg_t a_sent [$], b_sent [$];
  int   a_got = 0, b_got = 0, sa = 0, sb = 0;

  net_core a (.clk, .rst, .clk_net, .rst_net,
              .tx_valid (a_tx_valid), .tx_ready (a_tx_ready), .tx_msg (a_tx_msg),
              .rx_valid (a_rx_valid), .rx_msg (a_rx_msg), .rx_locked (a_locked),
              .gt_tx_block (a_gt_tx), .gt_rx_block (a_gt_rx), .gt_rx_slip (a_slip));
  net_core b (.clk, .rst, .clk_net, .rst_net,
              .tx_valid (b_tx_valid), .tx_ready (b_tx_ready), .tx_msg (b_tx_msg),
              .rx_valid (b_rx_valid), .rx_msg (b_rx_msg), .rx_locked (b_locked),
              .gt_tx_block (b_gt_tx), .gt_rx_block (b_gt_rx), .gt_rx_slip (b_slip));

  // fibre: fixed delay, optional sync-header corruption on the A->B direction
  always_ff @(posedge clk_net) begin
    ab_line[0] <= corrupt ? {2'b11, a_gt_tx[63:0]} : a_gt_tx;
    ba_line[0] <= b_gt_tx;
    for (int i = 1; i < DLY; i++) begin
      ab_line[i] <= ab_line[i-1];
      ba_line[i] <= ba_line[i-1];
    end
  end
  assign b_gt_rx = ab_line[DLY-1];
  assign a_gt_rx = ba_line[DLY-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (a_tx_valid && a_tx_ready) begin a_sent.push_back(a_tx_msg); sa++; end
    if (b_tx_valid && b_tx_ready) begin b_sent.push_back(b_tx_msg); sb++; end
    if (b_rx_valid) begin
      msg_t e;
      e = a_sent.pop_front();
      check(b_rx_msg == e, $sformatf("A->B %h vs %h", b_rx_msg, e));
      a_got++;
    end
    if (a_rx_valid) begin
      msg_t e;
      e = b_sent.pop_front();
      check(a_rx_msg == e, $sformatf("B->A %h vs %h", a_rx_msg, e));
      b_got++;
    end
  end

  // senders: random gaps, driven on the falling edge; the monitor above
  // records what was accepted
  task automatic send_burst(input int n);
    sa = 0; sb = 0;
    while (sa < n || sb < n) begin
      msg_t ma, mb;
      ma = msg_t'({$urandom, $urandom}); ma.mtype = MSG_SYNDROME;
      mb = msg_t'({$urandom, $urandom}); mb.mtype = MSG_ERROR;
      a_tx_valid <= sa + int'(a_tx_valid) < n && ($urandom_range(3, 0) == 0);
      b_tx_valid <= sb + int'(b_tx_valid) < n && ($urandom_range(3, 0) == 0);
      a_tx_msg <= ma; b_tx_msg <= mb;
      @(negedge clk);
    end
    a_tx_valid <= 0; b_tx_valid <= 0;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (4) @(posedge clk_net);
    rst_net <= 0;
    @(posedge clk); rst <= 0;
    check(!a_locked && !b_locked, "unlocked after reset");
    wait (a_locked && b_locked);
    check(1, "both ends locked");
    send_burst(200);
    repeat (200) @(posedge clk);
    check(a_got == 200 && b_got == 200, $sformatf("200 each way, got %0d/%0d", a_got, b_got));
    check(a_sent.size() == 0 && b_sent.size() == 0, "nothing left over");
    // corrupt 20 consecutive sync headers: lock must drop
    @(posedge clk_net); corrupt <= 1;
    repeat (20) @(posedge clk_net);
    corrupt <= 0;
    repeat (DLY + 8) @(posedge clk);
    check(!b_locked, "lock lost after corrupted headers");
    check(a_locked, "other direction unaffected");
    wait (b_locked);
    check(1, "re-locked");
    a_got = 0; b_got = 0;
    send_burst(100);
    repeat (200) @(posedge clk);
    check(a_got == 100 && b_got == 100, $sformatf("100 each way after relock, got %0d/%0d", a_got, b_got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
