// leaf_node_tb: one leaf board (reduced to 4 cores in groups of 2) linked to
// a root-side link core and PTP master whose timer runs ahead of the leaf.
// Checks link lock, PTP alignment of the leaf timer to the root's, syndrome
// writes from the ancilla cores arriving at the root as one message per
// round, error messages from the root reaching the right cores (and
// messages for another node being ignored), a gate pulse released at the
// programmed root-time stamp, the readout lines of a group being summed onto
// the group's readout DAC, and the cores' local memories.
module leaf_node_tb;
  import qec_pkg::*;
  localparam int NC = 4, GROUP = 2, NG = NC / GROUP, NDAC = NC + NG, ED = 16;
  localparam int LINK_DLY = 12;
  logic clk = 0, clk_net = 0, rst = 1, rst_net = 1;
  always #1   clk = ~clk;
  always #3.2 clk_net = ~clk_net;

  logic [3:0] node_id = 4'd2;
  logic [NC-1:0] ancilla_mask = 4'b1010;
  tl_a_t core_tl_a [NC], mem_tl_a [NC];
  tl_d_t core_tl_d [NC], mem_tl_d [NC];
  logic  core_tl_a_ready [NC], core_tl_d_ready [NC], mem_tl_a_ready [NC], mem_tl_d_ready [NC];
  logic env_wr_en = 0, env_wr_gen = 0;
  logic [7:0] env_wr_core = '0;
  logic [3:0] env_wr_addr = '0;
  dac_word_t env_wr_data = '0;
  dac_word_t dac [NDAC];
  adc_word_t adc [NG];
  logic [65:0] gt_tx_block, gt_rx_block;
  logic gt_rx_slip, rx_locked, ptp_synced, synd_overflow;
  time_t now, ptp_offset;

  leaf_node #(.N_CORES(NC), .GROUP(GROUP), .ENV_DEPTH(ED), .MEM_BYTES(256)) dut (.*);

  tl_host_bfm cpu0 (.clk, .tl_a (core_tl_a[0]), .tl_a_ready (core_tl_a_ready[0]), .tl_d (core_tl_d[0]), .tl_d_ready (core_tl_d_ready[0]));
  tl_host_bfm cpu1 (.clk, .tl_a (core_tl_a[1]), .tl_a_ready (core_tl_a_ready[1]), .tl_d (core_tl_d[1]), .tl_d_ready (core_tl_d_ready[1]));
  tl_host_bfm cpu2 (.clk, .tl_a (core_tl_a[2]), .tl_a_ready (core_tl_a_ready[2]), .tl_d (core_tl_d[2]), .tl_d_ready (core_tl_d_ready[2]));
  tl_host_bfm cpu3 (.clk, .tl_a (core_tl_a[3]), .tl_a_ready (core_tl_a_ready[3]), .tl_d (core_tl_d[3]), .tl_d_ready (core_tl_d_ready[3]));
  tl_host_bfm ram0 (.clk, .tl_a (mem_tl_a[0]), .tl_a_ready (mem_tl_a_ready[0]), .tl_d (mem_tl_d[0]), .tl_d_ready (mem_tl_d_ready[0]));
  tl_host_bfm ram3 (.clk, .tl_a (mem_tl_a[3]), .tl_a_ready (mem_tl_a_ready[3]), .tl_d (mem_tl_d[3]), .tl_d_ready (mem_tl_d_ready[3]));
  initial begin
    mem_tl_a[1] = '0; mem_tl_a[2] = '0; mem_tl_d_ready[1] = 1; mem_tl_d_ready[2] = 1;
  end

  // readout line loop-back per group
  for (genvar g = 0; g < NG; g++) begin : g_line
    for (genvar k = 0; k < ADC_SPC; k++) begin : g_lane
      assign adc[g][k] = dac[g*(GROUP+1) + GROUP][4*k];
    end
  end

  // ---------------------------------------------------------------- root side
  time_t rnow;
  always_ff @(posedge clk) rnow <= rst ? time_t'(48'h0000_0010_0000) : rnow + 1'b1;
  logic  r_tx_valid, r_tx_ready, r_rx_valid, r_locked, ptp_valid, ptp_busy, ptp_done, ptp_start = 0;
  msg_t  r_tx_msg, r_rx_msg, ptp_msg;
  logic  inj_valid = 0;
  msg_t  inj_msg = '0;
  logic [65:0] r_gt_tx, r_gt_rx;
  logic [65:0] up [LINK_DLY], dn [LINK_DLY];

  ptp_master u_pm (.clk, .rst, .node_id (4'd0), .now (rnow), .start (ptp_start),
                   .tx_valid (ptp_valid), .tx_ready (r_tx_ready && !inj_valid), .tx_msg (ptp_msg),
                   .rx_valid (r_rx_valid), .rx_msg (r_rx_msg), .busy (ptp_busy), .done (ptp_done));
  assign r_tx_valid = inj_valid || ptp_valid;
  assign r_tx_msg   = inj_valid ? inj_msg : ptp_msg;
  net_core u_rnet (.clk, .rst, .clk_net, .rst_net,
                   .tx_valid (r_tx_valid), .tx_ready (r_tx_ready), .tx_msg (r_tx_msg),
                   .rx_valid (r_rx_valid), .rx_msg (r_rx_msg), .rx_locked (r_locked),
                   .gt_tx_block (r_gt_tx), .gt_rx_block (r_gt_rx), .gt_rx_slip ());
  always_ff @(posedge clk_net) begin
    up[0] <= gt_tx_block; dn[0] <= r_gt_tx;
    for (int i = 1; i < LINK_DLY; i++) begin up[i] <= up[i-1]; dn[i] <= dn[i-1]; end
  end
  assign r_gt_rx     = up[LINK_DLY-1];
  assign gt_rx_block = dn[LINK_DLY-1];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  msg_t synd_q [$];
  always @(posedge clk) if (!rst && r_rx_valid && r_rx_msg.mtype == MSG_SYNDROME) synd_q.push_back(r_rx_msg);

  // first nonzero cycle of each DAC output, on the root's time line
  time_t dac_first [NDAC];
  logic  watch = 0;
  always @(posedge clk) if (watch)
    for (int d = 0; d < NDAC; d++) if (dac[d] != '0 && dac_first[d] == '0) dac_first[d] = rnow;

  task automatic send_error(input logic [3:0] node, input logic [7:0] rnd, input logic [NC-1:0] bits);
    @(negedge clk);
    inj_valid = 1; inj_msg = '0; inj_msg.mtype = MSG_ERROR; inj_msg.node = node;
    inj_msg.round = rnd; inj_msg.payload = 48'(bits);
    do @(posedge clk); while (!r_tx_ready);
    @(negedge clk) inj_valid = 0;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v;
    time_t ts;
    for (int d = 0; d < NDAC; d++) dac_first[d] = '0;
    repeat (4) @(posedge clk_net);
    rst_net = 0;
    @(negedge clk) rst = 0;
    check(!ptp_synced && !rx_locked, "idle after reset");
    wait (rx_locked && r_locked);
    check(1, "link locked");
    // ---- time alignment
    check(rnow - now > 1000, "leaf timer starts behind the root");
    @(negedge clk) ptp_start = 1;
    @(negedge clk) ptp_start = 0;
    wait (ptp_done);
    repeat (LINK_DLY * 4 + 20) @(negedge clk);
    check(ptp_synced, "leaf reports synced");
    check(now - rnow + 1 <= 2, $sformatf("leaf time %0d vs root %0d", now, rnow));
    // ---- syndrome rounds and error delivery
    for (int r = 0; r < 6; r++) begin
      logic [NC-1:0] b, e;
      b = NC'($urandom); e = NC'($urandom);
      cpu3.write(A_SYNDROME, {31'd0, b[3]});
      cpu0.write(A_SYNDROME, {31'd0, b[0]});   // not an ancilla: ignored
      cpu1.write(A_SYNDROME, {31'd0, b[1]});
      repeat (LINK_DLY * 4 + 30) @(negedge clk);
      check(synd_q.size() == 1, $sformatf("round %0d: one syndrome message (%0d)", r, synd_q.size()));
      if (synd_q.size() > 0) begin
        msg_t m;
        m = synd_q.pop_front();
        check(m.node == node_id && m.round == 8'(r) && m.payload == 48'(b & ancilla_mask),
              $sformatf("round %0d message node %0d round %0d bits %b", r, m.node, m.round, m.payload[NC-1:0]));
      end
      send_error(4'd1, 8'(r), ~e);   // for another leaf
      send_error(node_id, 8'(r), e);
      repeat (LINK_DLY * 4 + 30) @(negedge clk);
      cpu0.read(A_ERROR, v); check(v[1:0] == {1'b1, e[0]}, "core 0 error");
      cpu1.read(A_ERROR, v); check(v[1:0] == {1'b1, e[1]}, "core 1 error");
      cpu2.read(A_ERROR, v); check(v[1:0] == {1'b1, e[2]}, "core 2 error");
      cpu3.read(A_ERROR, v); check(v[1:0] == {1'b1, e[3]}, "core 3 error");
      cpu2.read(A_ERROR, v); check(v[1] == 1'b0, "error cleared by read");
    end
    check(synd_overflow == 1'b0, "no overflow");
    // ---- envelopes for gate generator of core 2 and readout of cores 0, 1
    for (int w = 0; w < ED; w++) begin
      @(negedge clk);
      env_wr_en = 1; env_wr_addr = 4'(w);
      for (int n = 0; n < DAC_SPC; n++) env_wr_data[n] = 16'sd20000;
      env_wr_core = 8'd2; env_wr_gen = 0;
      @(negedge clk) env_wr_core = 8'd0; env_wr_gen = 1;
      @(negedge clk) env_wr_core = 8'd1;
    end
    @(negedge clk) env_wr_en = 0;
    // ---- timed pulses: gate on core 2, readout on cores 0 and 1
    ts = rnow + 300;
    watch = 1;
    cpu2.write(A_TS_LO, ts[31:0]); cpu2.write(A_TS_HI, 32'(ts[47:32]));
    cpu2.write(A_GATE_BASE + 16'h0, 32'h0200_0000);
    cpu2.write(A_GATE_BASE + 16'h4, 32'h2000_0000);
    cpu2.write(A_GATE_BASE + 16'h8, 32'd20000);
    cpu2.write(A_GATE_BASE + 16'h10, 32'd6);
    cpu0.write(A_TS_LO, ts[31:0] + 50); cpu0.write(A_TS_HI, 32'(ts[47:32]));
    cpu0.write(A_RO_BASE + 16'h0, 32'h0100_0000);
    cpu0.write(A_RO_BASE + 16'h4, 32'h2000_0000);
    cpu0.write(A_RO_BASE + 16'h8, 32'd20000);
    cpu0.write(A_RO_BASE + 16'h10, 32'd8);
    cpu1.write(A_TS_LO, ts[31:0] + 54); cpu1.write(A_TS_HI, 32'(ts[47:32]));
    cpu1.write(A_RO_BASE + 16'h0, 32'h0300_0000);
    cpu1.write(A_RO_BASE + 16'h4, 32'h2000_0000);
    cpu1.write(A_RO_BASE + 16'h8, 32'd20000);
    cpu1.write(A_RO_BASE + 16'h10, 32'd8);
    wait (rnow > ts + 100);
    // DAC map: core c -> (c/2)*3 + c%2, group readout -> g*3 + 2
    check(dac_first[3] - ts + 1 <= 5 && dac_first[3] - ts + 1 >= 3,
          $sformatf("gate pulse of core 2 at %0d, stamp %0d (+3)", dac_first[3], ts));
    check(dac_first[2] - (ts + 50) + 1 <= 6 && dac_first[2] - (ts + 50) + 1 >= 4,
          $sformatf("group 0 readout line at %0d, stamp %0d (+4)", dac_first[2], ts + 50));
    check(dac_first[0] == '0 && dac_first[1] == '0 && dac_first[4] == '0 && dac_first[5] == '0,
          "other DAC outputs silent");
    // ---- local memory
    ram0.write(16'h10, 32'hCAFE_0000);
    ram3.write(16'h10, 32'h0000_BEEF);
    ram0.read(16'h10, v); check(v == 32'hCAFE_0000, "core 0 memory");
    ram3.read(16'h10, v); check(v == 32'h0000_BEEF, "core 3 memory is separate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
