// root_syndrome_aggregator_tb: four leaves (one masked off) send syndrome
// messages for each round at random, skewed times, mixed with unrelated PTP
// traffic. Checks that one frame per round reaches the decoder with every
// leaf's bits in place, the right round number, no false mismatch, a flagged
// mismatch when one leaf is a round behind, and overflow under back-pressure.
module root_syndrome_aggregator_tb;
  import qec_pkg::*;
  localparam int NL = 4, NC = 14;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic [NL-1:0] leaf_mask = 4'b1011, rx_valid = '0;
  msg_t rx_msg [NL];
  logic frame_valid, frame_ready = 1, round_mismatch, overflow;
  logic [NL*NC-1:0] frame_syndrome;
  logic [7:0] frame_round;
  logic [NL*NC-1:0] expect_q [$];
  logic [7:0]       expect_r [$];
  logic             expect_m [$];
  int checks = 0, failures = 0, n_frames = 0, n_over = 0;

  root_syndrome_aggregator #(.N_LEAF(NL), .N_CORES(NC)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (overflow) n_over++;
    if (frame_valid && frame_ready) begin
      logic [NL*NC-1:0] e;
      logic [7:0] r;
      logic m;
      e = expect_q.pop_front(); r = expect_r.pop_front(); m = expect_m.pop_front();
      check(frame_syndrome == e, $sformatf("syndrome %h vs %h", frame_syndrome, e));
      check(frame_round == r, $sformatf("round %0d vs %0d", frame_round, r));
      check(round_mismatch == m, $sformatf("mismatch %0d vs %0d", round_mismatch, m));
      n_frames++;
    end
  end

  // one round: each leaf sends its message at a random time within a window;
  // 'lag' gives leaf 1 an older round number
  task automatic one_round(input logic [7:0] r, input bit lag);
    logic [NC-1:0] b [NL];
    int t [NL];
    logic [NL*NC-1:0] e;
    e = '0;
    for (int l = 0; l < NL; l++) begin
      b[l] = NC'($urandom);
      t[l] = $urandom_range(12, 0);
      if (leaf_mask[l]) e[l*NC +: NC] = b[l];
    end
    expect_q.push_back(e); expect_r.push_back(r); expect_m.push_back(lag);
    for (int c = 0; c <= 12; c++) begin
      for (int l = 0; l < NL; l++) begin
        rx_valid[l] = 1'b0;
        rx_msg[l]   = '0;
        if (t[l] == c) begin
          rx_valid[l]     = 1'b1;
          rx_msg[l].mtype = MSG_SYNDROME;
          rx_msg[l].node  = 4'(l);
          rx_msg[l].round = (lag && l == 1) ? r - 1 : r;
          rx_msg[l].payload = 48'(b[l]);
        end else if ($urandom_range(7, 0) == 0) begin
          rx_valid[l]     = 1'b1;
          rx_msg[l].mtype = MSG_PTP_DELAY_REQ;
          rx_msg[l].payload = 48'($urandom);
        end
      end
      @(negedge clk);
    end
    rx_valid = '0;
  endtask

  initial begin
    #40000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) rx_msg[l] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 40; r++) one_round(8'(r), 1'b0);
    one_round(8'd40, 1'b1);
    repeat (3) @(negedge clk);
    check(n_frames == 41, $sformatf("41 frames, got %0d", n_frames));
    // back-pressure: two rounds complete while the decoder is busy
    frame_ready = 0;
    one_round(8'd41, 1'b0);
    one_round(8'd42, 1'b0);
    check(n_over == 1, "overflow flagged");
    void'(expect_q.pop_front()); void'(expect_r.pop_front()); void'(expect_m.pop_front());
    frame_ready = 1;
    repeat (3) @(negedge clk);
    check(n_frames == 42, "newest frame delivered after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
