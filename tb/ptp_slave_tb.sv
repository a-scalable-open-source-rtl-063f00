// ptp_slave_tb: a PTP master with its own timer talks to the slave through
// two delay lines. After each exchange the slave's global timer must match
// the master's: exactly (within one cycle of rounding) for equal delays, and
// off by half the difference for unequal delays, which is the known limit of
// the two-way method. Also checks the reported offset and that the slave
// keeps tracking after its timer is disturbed.
module ptp_slave_tb;
  import qec_pkg::*;
  localparam int MAXD = 40;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  time_t m_now, s_now;
  logic  m_start = 0, m_tx_valid, m_rx_valid, m_busy, m_done;
  msg_t  m_tx_msg, m_rx_msg, s_tx_msg, s_rx_msg;
  logic  s_tx_valid, s_rx_valid, adj_valid, synced;
  time_t adj_offset, offset;
  logic  kick = 0;
  time_t kick_amt = '0;
  int d_ms = 8, d_sm = 8;  // one-way delays in cycles
  logic [MAXD-1:0] ms_v = '0, sm_v = '0;
  msg_t ms_m [MAXD], sm_m [MAXD];
  int checks = 0, failures = 0;

  // master timer starts far from the slave timer
  always_ff @(posedge clk) m_now <= rst ? time_t'(48'h0000_7000_0123) : m_now + 1'b1;

  ptp_master u_m (.clk, .rst, .node_id (4'd0), .now (m_now), .start (m_start),
                  .tx_valid (m_tx_valid), .tx_ready (1'b1), .tx_msg (m_tx_msg),
                  .rx_valid (m_rx_valid), .rx_msg (m_rx_msg), .busy (m_busy), .done (m_done));

  ptp_slave dut (.clk, .rst, .node_id (4'd3), .now (s_now),
                 .tx_valid (s_tx_valid), .tx_ready (1'b1), .tx_msg (s_tx_msg),
                 .rx_valid (s_rx_valid), .rx_msg (s_rx_msg),
                 .adj_valid, .adj_offset, .offset, .synced);

  // slave timer; "kick" disturbs it to emulate a drifted clock
  global_timer u_st (.clk, .rst, .adj_valid (adj_valid || kick),
                     .adj_offset (kick ? kick_amt : adj_offset), .time_o (s_now));

  // delay lines
  always_ff @(posedge clk) begin
    ms_v <= {ms_v[MAXD-2:0], m_tx_valid};
    sm_v <= {sm_v[MAXD-2:0], s_tx_valid};
    ms_m[0] <= m_tx_msg;
    sm_m[0] <= s_tx_msg;
    for (int i = 1; i < MAXD; i++) begin ms_m[i] <= ms_m[i-1]; sm_m[i] <= sm_m[i-1]; end
  end
  assign s_rx_valid = ms_v[d_ms-1];
  assign s_rx_msg   = ms_m[d_ms-1];
  assign m_rx_valid = sm_v[d_sm-1];
  assign m_rx_msg   = sm_m[d_sm-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic sync_and_check(input int dms, input int dsm);
    longint diff, want;
    repeat (MAXD) @(negedge clk);  // let old messages drain from the delay lines
    d_ms = dms; d_sm = dsm;
    @(negedge clk) m_start <= 1;
    @(negedge clk) m_start <= 0;
    wait (m_done);
    repeat (dms + 4) @(negedge clk);
    diff = longint'($signed(s_now - m_now));
    want = -longint'((dms - dsm) / 2);
    check(synced, "synced flag");
    check(diff >= want - 1 && diff <= want + 1,
          $sformatf("delays %0d/%0d: slave-master %0d, expected %0d", dms, dsm, diff, want));
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst <= 0;
    @(negedge clk);
    check(!synced, "not synced after reset");
    sync_and_check(8, 8);
    check($signed(offset) != 0, "first offset is the large initial one");
    sync_and_check(8, 8);
    check($signed(offset) >= -1 && $signed(offset) <= 1, "second offset near zero");
    for (int i = 0; i < 15; i++) begin
      int d;
      d = $urandom_range(MAXD, 1);
      // disturb the slave timer, then resynchronise
      @(negedge clk) begin kick <= 1; kick_amt <= time_t'($urandom_range(5000, 0)) - 2500; end
      @(negedge clk) kick <= 0;
      if (i % 3 == 0) sync_and_check(d, $urandom_range(MAXD, 1));
      else            sync_and_check(d, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
