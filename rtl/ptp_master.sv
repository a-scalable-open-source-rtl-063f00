// ptp_master: time-master side of the minimal PTP exchange on one link.
//
// The root board's global timer is the reference. On `start` the master
// sends SYNC carrying t1, its own time in the cycle the message is accepted
// by the link (the payload tracks `now` while it waits, so back-pressure
// does not skew t1). When the leaf answers with DELAY_REQ the master notes
// its arrival time t4 and returns it in DELAY_RSP. The leaf (ptp_slave) has
// then seen t1, t2, t3, t4 and corrects its own timer.
//
// The exchange is IEEE 1588 delay request-response reduced to three message
// types in the 64-bit message format; `busy` is high from start until
// DELAY_RSP has been accepted, `done` pulses then.
module ptp_master
  import qec_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [3:0] node_id,
  input  time_t      now,
  input  logic       start,
  output logic       tx_valid,
  input  logic       tx_ready,
  output msg_t       tx_msg,
  input  logic       rx_valid,
  input  msg_t       rx_msg,
  output logic       busy,
  output logic       done
);

  typedef enum logic [1:0] { S_IDLE, S_SYNC, S_WAIT_REQ, S_RSP } state_e;
  state_e state;
  time_t  t4;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      t4    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:     if (start) state <= S_SYNC;
        S_SYNC:     if (tx_ready) state <= S_WAIT_REQ;
        S_WAIT_REQ: if (rx_valid && rx_msg.mtype == MSG_PTP_DELAY_REQ) begin
                      t4    <= now;
                      state <= S_RSP;
                    end
        S_RSP:      if (tx_ready) begin
                      state <= S_IDLE;
                      done  <= 1'b1;
                    end
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    tx_valid       = (state == S_SYNC) || (state == S_RSP);
    tx_msg.node    = node_id;
    tx_msg.round   = '0;
    tx_msg.mtype   = (state == S_RSP) ? MSG_PTP_DELAY_RSP : MSG_PTP_SYNC;
    tx_msg.payload = (state == S_RSP) ? t4 : now;
  end
  assign busy = (state != S_IDLE);

endmodule
