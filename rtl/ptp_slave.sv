// ptp_slave: leaf side of the minimal PTP exchange; aligns the board's
// global timer with the root's.
//
//   SYNC(t1) received at local time t2
//   DELAY_REQ sent at local time t3 (time of acceptance by the link)
//   DELAY_RSP(t4) received
//   offset = ((t2 - t1) - (t4 - t3)) / 2      (local minus master time)
//
// The slave then pulses adj_valid with adj_offset = -offset for one cycle,
// which the global timer adds to its count. With the shared reference clock
// the two timers then advance in lockstep, so one exchange aligns them; the
// residual error is half the difference between the two link directions'
// latencies. `offset` and `synced` are kept for observation.
module ptp_slave
  import qec_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [3:0] node_id,
  input  time_t      now,
  output logic       tx_valid,
  input  logic       tx_ready,
  output msg_t       tx_msg,
  input  logic       rx_valid,
  input  msg_t       rx_msg,
  output logic       adj_valid,
  output time_t      adj_offset,
  output time_t      offset,
  output logic       synced
);

  typedef enum logic [1:0] { S_IDLE, S_REQ, S_WAIT_RSP, S_ADJ } state_e;
  state_e state;
  time_t  t1, t2, t3, t4;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0;
      adj_valid <= 1'b0; adj_offset <= '0; offset <= '0; synced <= 1'b0;
    end else begin
      adj_valid <= 1'b0;
      unique case (state)
        S_IDLE:     if (rx_valid && rx_msg.mtype == MSG_PTP_SYNC) begin
                      t1    <= rx_msg.payload;
                      t2    <= now;
                      state <= S_REQ;
                    end
        S_REQ:      if (tx_ready) begin
                      t3    <= now;
                      state <= S_WAIT_RSP;
                    end
        S_WAIT_RSP: if (rx_valid && rx_msg.mtype == MSG_PTP_DELAY_RSP) begin
                      t4    <= rx_msg.payload;
                      state <= S_ADJ;
                    end
        S_ADJ: begin
          time_t o;
          o = time_t'($signed((t2 - t1) - (t4 - t3)) >>> 1);
          offset     <= o;
          adj_offset <= -o;
          adj_valid  <= 1'b1;
          synced     <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    tx_valid       = (state == S_REQ);
    tx_msg.mtype   = MSG_PTP_DELAY_REQ;
    tx_msg.node    = node_id;
    tx_msg.round   = '0;
    tx_msg.payload = '0;
  end

endmodule
