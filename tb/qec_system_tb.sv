// qec_system_tb: end-to-end test of the whole system at its full default
// size (4 leaves x 14 qubit cores, one root), with no parameter overrides.
//
// The testbench supplies what the chip design leaves outside:
//   * a 20-block delay line per fibre direction between each leaf and root,
//   * a readout-line model per group of 7 cores: the combined readout DAC
//     is looped back into that group's ADC (2 GS/s = every 4th DAC lane),
//   * a stand-in decoder at the root with a fixed 56 ns latency that maps a
//     syndrome frame to an error vector with a fixed function,
//   * one TileLink host model per core playing the role of its processor,
//     running the QEC program below.
//
// Program of every core, per round r (timestamps on the common time line):
//   write the readout pulse for time T_r with carrier phase 0 or 180 degrees
//   (standing for the qubit being in |0> or |1>), arm the decoder window at
//   T_r + 3, poll the measurement result, keep it in local memory, and if the
//   core is an ancilla write it to the syndrome aggregator; then poll the
//   error register and, if the decoder flagged this qubit, play a correction
//   pulse on the gate generator.
//
// Mechanisms counted (each must occur, otherwise it counts as a failure):
// link lock, PTP sync, timed pulse release, readout through the shared line,
// local-memory access, syndrome write, syndrome message, root frame,
// decode, error message, error read, correction
// pulse. The syndrome-to-error latency is measured and printed.
module qec_system_tb;
  import qec_pkg::*;
  localparam int NL = 4, NC = 14, GROUP = 7, NG = NC / GROUP, NDAC = NC + NG;
  localparam int NS = NL * NC;
  localparam int LINK_DLY = 20;   // blocks of 6.4 ns per direction
  localparam int DEC_LAT  = 28;   // 56 ns decoder
  localparam int W        = 64;   // readout window, cycles
  localparam int ROUNDS   = 3;
  localparam int PERIOD   = 900;  // cycles between rounds
  localparam logic [31:0] AMP = 32'd8000;

  logic clk = 0, clk_net = 0, rst = 1, rst_net = 1;
  always #1   clk = ~clk;
  always #3.2 clk_net = ~clk_net;

  // ---------------------------------------------------------------- DUT
  logic [NL-1:0] leaf_mask = '1;
  logic [NC-1:0] ancilla_mask [NL];
  logic          ptp_start = 0;
  logic [NL-1:0] env_wr_en = '0;
  logic [7:0]    env_wr_core = '0;
  logic          env_wr_gen = 0;
  logic [10:0]   env_wr_addr = '0;
  dac_word_t     env_wr_data = '0;
  tl_a_t core_tl_a [NL][NC], mem_tl_a [NL][NC];
  tl_d_t core_tl_d [NL][NC], mem_tl_d [NL][NC];
  logic  core_tl_a_ready [NL][NC], core_tl_d_ready [NL][NC];
  logic  mem_tl_a_ready [NL][NC], mem_tl_d_ready [NL][NC];
  dac_word_t dac [NL][NDAC];
  adc_word_t adc [NL][NG];
  logic [65:0] leaf_gt_tx [NL], leaf_gt_rx [NL], root_gt_tx [NL], root_gt_rx [NL];
  logic dec_frame_valid, dec_frame_ready, dec_err_valid = 0, dec_err_ready;
  logic [NS-1:0] dec_syndrome, dec_err_vec = '0;
  logic [7:0] dec_round, dec_err_round = '0;
  time_t root_now, leaf_now [NL];
  logic [NL-1:0] leaf_locked, root_locked, leaf_synced, ptp_busy, synd_overflow;
  logic round_mismatch, frame_overflow;

  qec_system dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_lock = 0, n_ptp = 0, n_timed = 0, n_readout = 0, n_mem = 0, n_synd_wr = 0;
  int n_leaf_msg = 0, n_frame = 0, n_decode = 0, n_leaf_err = 0;
  int n_err_read = 0, n_corr = 0, n_corr_expected = 0, n_done = 0;

  // ---------------------------------------------------------------- fibres
  logic [65:0] up_line [NL][LINK_DLY], dn_line [NL][LINK_DLY];
  always_ff @(posedge clk_net)
    for (int l = 0; l < NL; l++) begin
      up_line[l][0] <= leaf_gt_tx[l];
      dn_line[l][0] <= root_gt_tx[l];
      for (int i = 1; i < LINK_DLY; i++) begin
        up_line[l][i] <= up_line[l][i-1];
        dn_line[l][i] <= dn_line[l][i-1];
      end
    end
  for (genvar l = 0; l < NL; l++) begin : g_fibre
    assign root_gt_rx[l] = up_line[l][LINK_DLY-1];
    assign leaf_gt_rx[l] = dn_line[l][LINK_DLY-1];
  end

  // ---------------------------------------------------------------- readout lines
  for (genvar l = 0; l < NL; l++) begin : g_line
    for (genvar g = 0; g < NG; g++) begin : g_grp
      for (genvar k = 0; k < ADC_SPC; k++) begin : g_lane
        assign adc[l][g][k] = dac[l][g*(GROUP+1) + GROUP][k * (DAC_SPC / ADC_SPC)];
      end
    end
  end

  // ---------------------------------------------------------------- decoder stand-in
  function automatic logic [NS-1:0] decode_fn(input logic [NS-1:0] s);
    for (int i = 0; i < NS; i++) decode_fn[i] = s[i] ^ s[(i + 1) % NS];
  endfunction

  logic          dec_busy = 0;
  int            dec_cnt = 0;
  logic [NS-1:0] dec_held;
  logic [7:0]    dec_held_round;
  time_t         t_frame [ROUNDS];
  assign dec_frame_ready = !dec_busy;
  always @(posedge clk) if (!rst) begin
    if (dec_frame_valid && dec_frame_ready) begin
      dec_busy <= 1; dec_cnt <= DEC_LAT - 1;
      dec_held <= dec_syndrome; dec_held_round <= dec_round;
      if (int'(dec_round) < ROUNDS) t_frame[dec_round] = root_now;
      n_frame++;
    end
    if (dec_busy && !dec_err_valid) begin
      if (dec_cnt == 0) begin
        dec_err_valid <= 1; dec_err_vec <= decode_fn(dec_held); dec_err_round <= dec_held_round;
      end else dec_cnt <= dec_cnt - 1;
    end
    if (dec_err_valid && dec_err_ready) begin
      dec_err_valid <= 0; dec_busy <= 0; n_decode++;
    end
  end

  // ---------------------------------------------------------------- round plan
  logic          go = 0;
  time_t         t_round [ROUNDS];
  logic [NS-1:0] truth [ROUNDS];
  logic [NS-1:0] synd_vec [ROUNDS], err_expect [ROUNDS];
  time_t         t_last_synd [ROUNDS], t_err_last [ROUNDS];

  // ---------------------------------------------------------------- observers
  // Fibre monitors: descramble the 64B/66B data blocks at the receiving end
  // of each fibre and count syndrome messages going up and error messages
  // coming down. Times are taken on the root's time line.
  function automatic logic [63:0] descramble(input logic [63:0] blk, inout logic [57:0] st);
    logic [63:0] d;
    for (int i = 0; i < 64; i++) begin
      d[i] = blk[i] ^ st[38] ^ st[57];
      st   = {st[56:0], blk[i]};
    end
    return d;
  endfunction

  logic [57:0] up_scr [NL], dn_scr [NL];
  always @(posedge clk_net) if (!rst_net)
    for (int l = 0; l < NL; l++) begin
      msg_t m;
      m = msg_t'(descramble(root_gt_rx[l][63:0], up_scr[l]));
      if (root_gt_rx[l][65:64] == 2'b01 && m.mtype == MSG_SYNDROME) n_leaf_msg++;
      m = msg_t'(descramble(leaf_gt_rx[l][63:0], dn_scr[l]));
      if (leaf_gt_rx[l][65:64] == 2'b01 && m.mtype == MSG_ERROR) begin
        n_leaf_err++;
        if (int'(m.round) < ROUNDS) t_err_last[m.round] = root_now;
      end
    end
  // timed release: every readout line must start exactly 4 cycles after T_r
  // (3 in the generator, 1 in the combiner); gate outputs count corrections
  logic [NL-1:0][NG-1:0] ro_prev;
  logic [NL-1:0][NC-1:0] gate_prev;
  int ro_round [NL][NG];
  always @(posedge clk) if (!rst)
    for (int l = 0; l < NL; l++) begin
      for (int g = 0; g < NG; g++) begin
        logic on;
        on = dac[l][g*(GROUP+1) + GROUP] != '0;
        if (on && !ro_prev[l][g] && go) begin
          int r;
          r = ro_round[l][g];
          check(r < ROUNDS && leaf_now[l] == t_round[r] + 4,
                $sformatf("leaf %0d group %0d readout starts at %0d, planned %0d+4", l, g, leaf_now[l], t_round[r]));
          if (r < ROUNDS && leaf_now[l] == t_round[r] + 4) n_timed++;
          ro_round[l][g]++;
        end
        ro_prev[l][g] = on;
      end
      for (int c = 0; c < NC; c++) begin
        logic on;
        on = dac[l][(c / GROUP) * (GROUP+1) + c % GROUP] != '0;
        if (on && !gate_prev[l][c]) n_corr++;
        gate_prev[l][c] = on;
      end
    end

  // ---------------------------------------------------------------- processors
  for (genvar l = 0; l < NL; l++) begin : g_l
    for (genvar c = 0; c < NC; c++) begin : g_c
      localparam int I = c % GROUP;
      localparam int Q = l * NC + c;
      // each core of a group reads out at its own frequency: m whole periods
      // per 256-sample window, so the tones of one line are orthogonal
      localparam logic [31:0] FD  = 32'(3 + 2 * I) << 24;
      localparam logic [31:0] DPH = 32'(0) - 32'(12) * FD - 32'h4000_0000;

      tl_host_bfm u_cpu (.clk, .tl_a (core_tl_a[l][c]), .tl_a_ready (core_tl_a_ready[l][c]),
                         .tl_d (core_tl_d[l][c]), .tl_d_ready (core_tl_d_ready[l][c]));
      tl_host_bfm u_ram (.clk, .tl_a (mem_tl_a[l][c]), .tl_a_ready (mem_tl_a_ready[l][c]),
                         .tl_d (mem_tl_d[l][c]), .tl_d_ready (mem_tl_d_ready[l][c]));

      initial begin
        logic [31:0] v;
        time_t ts;
        wait (go);
        u_cpu.write(A_DEC_FREQ, FD);
        u_cpu.write(A_DEC_PHASE, DPH);
        for (int r = 0; r < ROUNDS; r++) begin
          logic meas;
          wait (leaf_now[l] >= t_round[r] - 200);
          ts = t_round[r];
          u_cpu.write(A_TS_LO, ts[31:0]);
          u_cpu.write(A_TS_HI, 32'(ts[47:32]));
          u_cpu.write(A_RO_BASE + 16'h0, FD >> 2);
          u_cpu.write(A_RO_BASE + 16'h4, truth[r][Q] ? 32'h8000_0000 : 32'h0);
          u_cpu.write(A_RO_BASE + 16'h8, AMP);
          u_cpu.write(A_RO_BASE + 16'hC, 32'd0);
          u_cpu.write(A_RO_BASE + 16'h10, W);
          ts = t_round[r] + 3;
          u_cpu.write(A_TS_LO, ts[31:0]);
          u_cpu.write(A_TS_HI, 32'(ts[47:32]));
          u_cpu.write(A_DEC_DUR, W);
          do u_cpu.read(A_DEC_RESULT, v); while (!v[1]);
          meas = v[0];
          check(meas == truth[r][Q], $sformatf("round %0d qubit %0d measured %0d, prepared %0d", r, Q, meas, truth[r][Q]));
          if (meas == truth[r][Q]) n_readout++;
          // keep the result in local memory and read it back
          u_ram.write(16'(4 * r), {31'd0, meas});
          u_ram.read(16'(4 * r), v);
          check(v == {31'd0, meas}, "local memory read-back");
          n_mem++;
          if (ancilla_mask[l][c]) begin
            u_cpu.write(A_SYNDROME, {31'd0, meas});
            if (root_now > t_last_synd[r]) t_last_synd[r] = root_now;
            n_synd_wr++;
          end
          do u_cpu.read(A_ERROR, v); while (!v[1]);
          n_err_read++;
          check(v[0] == err_expect[r][Q], $sformatf("round %0d qubit %0d error bit %0d, expected %0d", r, Q, v[0], err_expect[r][Q]));
          if (v[0]) begin
            // correction pulse
            ts = leaf_now[l] + 40;
            u_cpu.write(A_TS_LO, ts[31:0]);
            u_cpu.write(A_TS_HI, 32'(ts[47:32]));
            u_cpu.write(A_GATE_BASE + 16'h0, 32'h0100_0000);
            u_cpu.write(A_GATE_BASE + 16'h8, AMP);
            u_cpu.write(A_GATE_BASE + 16'hC, 32'd0);
            u_cpu.write(A_GATE_BASE + 16'h10, 32'd4);
          end
        end
        n_done++;
      end
    end
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    #200000; failures++;
    $display("watchdog: n_done=%0d", n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic need(input int n, input string what);
    check(n > 0, $sformatf("mechanism never happened: %s", what));
    $display("  %-28s %0d", what, n);
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    for (int l = 0; l < NL; l++) begin
      ancilla_mask[l] = 14'b01_0101_0101_0101;  // odd cores are ancillas
      for (int g = 0; g < NG; g++) ro_round[l][g] = 0;
      up_scr[l] = '0; dn_scr[l] = '0;
    end
    ro_prev = '0; gate_prev = '0;
    for (int r = 0; r < ROUNDS; r++) begin t_err_last[r] = '0; t_last_synd[r] = '0; end
    repeat (4) @(posedge clk_net);
    rst_net <= 0;
    @(negedge clk) rst <= 0;

    // envelopes: readout words 0..W-1 and gate words 0..3 at full scale
    for (int c = 0; c < NC; c++)
      for (int gen = 0; gen < 2; gen++)
        for (int w = 0; w < (gen != 0 ? W : 4); w++) begin
          @(negedge clk);
          env_wr_en <= '1; env_wr_core <= 8'(c); env_wr_gen <= 1'(gen); env_wr_addr <= 11'(w);
          for (int n = 0; n < DAC_SPC; n++) env_wr_data[n] <= 16'sd32767;
        end
    @(negedge clk) env_wr_en <= '0;

    // links
    wait (&leaf_locked && &root_locked);
    n_lock++;
    // time alignment
    @(negedge clk) ptp_start <= 1;
    @(negedge clk) ptp_start <= 0;
    wait (&leaf_synced && ptp_busy == '0);
    repeat (40) @(negedge clk);
    // the clock-domain crossings of the links add up to one cycle of
    // asymmetry, so alignment is to within one 2 ns cycle
    for (int l = 0; l < NL; l++)
      check(leaf_now[l] - root_now + 1 <= 2, $sformatf("leaf %0d time %0d vs root %0d", l, leaf_now[l], root_now));
    n_ptp++;

    // plan the rounds
    for (int r = 0; r < ROUNDS; r++) begin
      logic [NS-1:0] m;
      t_round[r] = root_now + 400 + r * PERIOD;
      truth[r] = NS'({$urandom, $urandom});
      for (int l = 0; l < NL; l++) m[l*NC +: NC] = ancilla_mask[l];
      synd_vec[r] = truth[r] & m;
      err_expect[r] = decode_fn(synd_vec[r]);
      for (int q = 0; q < NS; q++) n_corr_expected += int'(err_expect[r][q]);
    end
    go = 1;
    wait (n_done == NL * NC);
    repeat (100) @(negedge clk);

    check(n_corr == n_corr_expected, $sformatf("%0d correction pulses, expected %0d", n_corr, n_corr_expected));
    check(n_frame == ROUNDS && n_decode == ROUNDS, "one frame and one decode per round");
    check(n_leaf_msg == NL * ROUNDS, $sformatf("leaf syndrome messages %0d", n_leaf_msg));
    check(n_timed == NL * NG * ROUNDS, $sformatf("timed readout starts %0d", n_timed));
    check(!round_mismatch, "no round mismatch");
    check(synd_overflow == '0 && !frame_overflow, "no overflow");
    $display("mechanisms:");
    need(n_lock, "link lock");
    need(n_ptp, "PTP time alignment");
    need(n_timed, "timed pulse release");
    need(n_readout, "multiplexed readout");
    need(n_mem, "local memory access");
    need(n_synd_wr, "syndrome write");
    need(n_leaf_msg, "syndrome message on uplink");
    need(n_frame, "root syndrome frame");
    need(n_decode, "decode");
    need(n_leaf_err, "error message on downlink");
    need(n_err_read, "error read by core");
    need(n_corr, "correction pulse");
    for (int r = 0; r < ROUNDS; r++) begin
      longint lat;
      lat = longint'(t_err_last[r]) - longint'(t_last_synd[r]);
      $display("round %0d: last syndrome write -> last error message at a leaf: %0d cycles = %0d ns (frame at decoder after %0d cycles)",
               r, lat, 2 * lat, longint'(t_frame[r]) - longint'(t_last_synd[r]));
      check(lat > 0 && 2 * lat < 1000, "feedback latency below 1 us");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
