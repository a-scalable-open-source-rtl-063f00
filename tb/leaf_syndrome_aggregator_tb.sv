// leaf_syndrome_aggregator_tb: cores report random syndrome bits in random
// order and at random times; checks one message per round with the right
// bits, node id and round number, that unmasked cores are ignored, that a
// held message survives back-pressure, and that overflow is flagged.
// Stimulus is driven on the falling edge so it never races the DUT.
module leaf_syndrome_aggregator_tb;
  import qec_pkg::*;
  localparam int N = 14;
  logic clk = 0, rst = 1;
  logic [3:0] node_id = 4'd5;
  logic [N-1:0] ancilla_mask = 14'b10_1101_0110_1011;
  logic [N-1:0] synd_valid = '0, synd_bit = '0;
  logic tx_valid, tx_ready = 1, overflow;
  msg_t tx_msg;
  int checks = 0, failures = 0, n_msgs = 0, n_over = 0, round_skip = 0;
  logic [N-1:0] expect_bits [$];
  always #1 clk = ~clk;

  leaf_syndrome_aggregator #(.N_CORES(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (overflow) n_over++;
    if (tx_valid && tx_ready) begin
      logic [N-1:0] e;
      e = expect_bits.pop_front();
      check(tx_msg.mtype == MSG_SYNDROME && tx_msg.node == node_id, "header");
      check(tx_msg.round == 8'(n_msgs + round_skip), $sformatf("round %0d vs %0d", tx_msg.round, n_msgs + round_skip));
      check(tx_msg.payload[N-1:0] == e, $sformatf("bits %b vs %b", tx_msg.payload[N-1:0], e));
      n_msgs++;
    end
  end

  task automatic one_round(input int gap);
    logic [N-1:0] bits;
    int order [N];
    bits = N'($urandom);
    expect_bits.push_back(bits & ancilla_mask);
    for (int k = 0; k < N; k++) order[k] = k;
    for (int k = N - 1; k > 0; k--) begin  // Fisher-Yates shuffle
      int j, t;
      j = $urandom_range(k, 0);
      t = order[k]; order[k] = order[j]; order[j] = t;
    end
    foreach (order[i]) begin
      logic [N-1:0] v;
      v = '0;
      v[order[i]] = 1'b1;
      synd_valid <= v;
      synd_bit   <= bits;
      @(negedge clk);
      if (gap > 0) begin
        synd_valid <= '0;
        repeat (gap) @(negedge clk);
      end
    end
  endtask

  initial begin
    #40000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst <= 0;
    for (int r = 0; r < 20; r++) one_round(r % 3);
    synd_valid <= '0;
    repeat (3) @(negedge clk);
    check(n_msgs == 20, $sformatf("20 messages, got %0d", n_msgs));
    // back-pressure: message must wait unchanged
    tx_ready <= 0;
    one_round(0);
    synd_valid <= '0;
    repeat (10) @(negedge clk);
    check(tx_valid && n_msgs == 20, "message held while not ready");
    // a second round completes meanwhile -> overflow, the newer round replaces it
    one_round(0);
    synd_valid <= '0;
    repeat (2) @(negedge clk);
    check(n_over == 1, "overflow flagged once");
    void'(expect_bits.pop_front());
    round_skip = 1;
    tx_ready <= 1;
    repeat (3) @(negedge clk);
    check(n_msgs == 21, "one message after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
