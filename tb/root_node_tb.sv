// root_node_tb: the root board with two leaf links (4 qubits per leaf).
// Each leaf side is a link core, a PTP slave and a timer that starts far
// from the root's. Checks link lock, that one PTP start aligns both leaf
// timers, that syndrome messages from both leaves become one decoder frame
// per round with the bits in place, and that the decoder's error vector is
// split into one error message per leaf with the right slice, node id and
// round; also that PTP traffic does not disturb the error path.
module root_node_tb;
  import qec_pkg::*;
  localparam int NL = 2, NC = 4, LINK_DLY = 9;
  logic clk = 0, clk_net = 0, rst = 1, rst_net = 1;
  always #1   clk = ~clk;
  always #3.2 clk_net = ~clk_net;

  logic [NL-1:0] leaf_mask = '1, gt_rx_slip, rx_locked, ptp_busy;
  logic ptp_start = 0;
  logic [65:0] gt_tx_block [NL], gt_rx_block [NL];
  logic dec_frame_valid, dec_frame_ready = 1, dec_err_valid = 0, dec_err_ready;
  logic [NL*NC-1:0] dec_syndrome, dec_err_vec = '0;
  logic [7:0] dec_round, dec_err_round = '0;
  time_t now;
  logic round_mismatch, frame_overflow;

  root_node #(.N_LEAF(NL), .N_CORES(NC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- leaves
  logic  l_tx_valid [NL], l_tx_ready [NL], l_rx_valid [NL], l_locked [NL], synced [NL];
  msg_t  l_tx_msg [NL], l_rx_msg [NL], s_msg [NL];
  logic  s_valid [NL], s_ready [NL], adj_valid [NL];
  time_t lnow [NL], adj_offset [NL];
  logic  inj_valid [NL];
  msg_t  inj_msg [NL];
  logic [65:0] l_gt_tx [NL], l_gt_rx [NL];
  logic [65:0] up [NL][LINK_DLY], dn [NL][LINK_DLY];
  msg_t  err_q [NL][$];

  for (genvar l = 0; l < NL; l++) begin : g_leaf
    global_timer u_t (.clk, .rst, .adj_valid (adj_valid[l]), .adj_offset (adj_offset[l]), .time_o (lnow[l]));
    ptp_slave u_s (.clk, .rst, .node_id (4'(l)), .now (lnow[l]),
                   .tx_valid (s_valid[l]), .tx_ready (s_ready[l]), .tx_msg (s_msg[l]),
                   .rx_valid (l_rx_valid[l]), .rx_msg (l_rx_msg[l]),
                   .adj_valid (adj_valid[l]), .adj_offset (adj_offset[l]), .offset (), .synced (synced[l]));
    assign l_tx_valid[l] = inj_valid[l] || s_valid[l];
    assign l_tx_msg[l]   = inj_valid[l] ? inj_msg[l] : s_msg[l];
    assign s_ready[l]    = l_tx_ready[l] && !inj_valid[l];
    net_core u_n (.clk, .rst, .clk_net, .rst_net,
                  .tx_valid (l_tx_valid[l]), .tx_ready (l_tx_ready[l]), .tx_msg (l_tx_msg[l]),
                  .rx_valid (l_rx_valid[l]), .rx_msg (l_rx_msg[l]), .rx_locked (l_locked[l]),
                  .gt_tx_block (l_gt_tx[l]), .gt_rx_block (l_gt_rx[l]), .gt_rx_slip ());
    always_ff @(posedge clk_net) begin
      up[l][0] <= l_gt_tx[l]; dn[l][0] <= gt_tx_block[l];
      for (int i = 1; i < LINK_DLY; i++) begin up[l][i] <= up[l][i-1]; dn[l][i] <= dn[l][i-1]; end
    end
    assign gt_rx_block[l] = up[l][LINK_DLY-1];
    assign l_gt_rx[l]     = dn[l][LINK_DLY-1];
    always @(posedge clk) if (!rst && l_rx_valid[l] && l_rx_msg[l].mtype == MSG_ERROR) err_q[l].push_back(l_rx_msg[l]);
  end

  // ---------------------------------------------------------------- decoder model
  logic [NL*NC-1:0] frames [$];
  logic [7:0]       frame_rounds [$];
  always @(posedge clk) if (!rst) begin
    if (dec_frame_valid && dec_frame_ready) begin frames.push_back(dec_syndrome); frame_rounds.push_back(dec_round); end
    if (dec_err_valid && dec_err_ready) dec_err_valid <= 0;
  end

  task automatic leaf_send(input int l, input logic [7:0] r, input logic [NC-1:0] b);
    @(negedge clk);
    inj_valid[l] = 1; inj_msg[l] = '0; inj_msg[l].mtype = MSG_SYNDROME; inj_msg[l].node = 4'(l);
    inj_msg[l].round = r; inj_msg[l].payload = 48'(b);
    do @(posedge clk); while (!l_tx_ready[l]);
    @(negedge clk) inj_valid[l] = 0;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) begin inj_valid[l] = 0; inj_msg[l] = '0; end
    repeat (4) @(posedge clk_net);
    rst_net = 0;
    @(negedge clk) rst = 0;
    wait (rx_locked == '1 && l_locked[0] && l_locked[1]);
    check(1, "all links locked");
    check(!synced[0] && !synced[1], "not synced before PTP");
    @(negedge clk) ptp_start = 1;
    @(negedge clk) ptp_start = 0;
    check(ptp_busy == '1, "PTP running on both links");
    wait (ptp_busy == '0);
    repeat (LINK_DLY * 4 + 20) @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      check(synced[l], $sformatf("leaf %0d synced", l));
      check(lnow[l] - now + 1 <= 2, $sformatf("leaf %0d time %0d vs root %0d", l, lnow[l], now));
    end
    // ---- syndrome rounds
    for (int r = 0; r < 8; r++) begin
      logic [NC-1:0] b0, b1;
      logic [NL*NC-1:0] e;
      b0 = NC'($urandom); b1 = NC'($urandom);
      if (r % 2 == 0) begin leaf_send(0, 8'(r), b0); repeat ($urandom_range(20, 0)) @(negedge clk); leaf_send(1, 8'(r), b1); end
      else            begin leaf_send(1, 8'(r), b1); leaf_send(0, 8'(r), b0); end
      if (r == 5) begin @(negedge clk) ptp_start = 1; @(negedge clk) ptp_start = 0; end  // PTP traffic in between
      repeat (LINK_DLY * 4 + 20) @(negedge clk);
      check(frames.size() == 1, $sformatf("round %0d: one frame (%0d)", r, frames.size()));
      if (frames.size() > 0) begin
        logic [NL*NC-1:0] f;
        logic [7:0] fr;
        f = frames.pop_front(); fr = frame_rounds.pop_front();
        check(f == {b1, b0} && fr == 8'(r), $sformatf("frame %b round %0d, expected %b", f, fr, {b1, b0}));
      end
      check(!round_mismatch, "no mismatch");
      // decoder answers
      e = (NL*NC)'($urandom);
      @(negedge clk);
      dec_err_valid <= 1; dec_err_vec <= e; dec_err_round <= 8'(r);
      repeat (LINK_DLY * 4 + 20) @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        check(err_q[l].size() == 1, $sformatf("round %0d leaf %0d: one error message", r, l));
        if (err_q[l].size() > 0) begin
          msg_t m;
          m = err_q[l].pop_front();
          check(m.node == 4'(l) && m.round == 8'(r) && m.payload == 48'(e[l*NC +: NC]),
                $sformatf("leaf %0d error message node %0d round %0d bits %b", l, m.node, m.round, m.payload[NC-1:0]));
        end
      end
    end
    check(!frame_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
