// net_core: board-to-board link layer on one 64B/66B transceiver lane.
//
// Every 64-bit message travels in exactly one 66-bit block, so a message
// costs one link-clock cycle and needs no framing. The block is
//   [65:64] sync header: 2'b01 data block, 2'b10 control block
//   [63:0]  payload, scrambled with the self-synchronising x^58 + x^39 + 1
//           scrambler, bit 0 first
// When no message is waiting the transmitter sends the idle control block
// (block type 0x1E, seven idle characters), which keeps the receiver locked.
//
// Receiver: the payload is descrambled; block lock is declared after
// LOCK_GOOD consecutive blocks with a valid header (01 or 10), and lost when
// 16 invalid headers fall in a 64-block window; while unlocked, an invalid
// header raises gt_rx_slip to ask the transceiver to shift by one bit. Data
// blocks received while locked are delivered as messages.
//
// Clocking: the message side runs on the 500 MHz control clock (clk), the
// block side on the 156.25 MHz link clock (clk_net) at one block per cycle
// (10.3125 Gb/s line rate); two async_fifo instances cross between them.
// tx_ready falls when the transmit FIFO is full; received messages are
// presented for one cycle (rx_valid) and must be taken.
//
// The 64B/66B line code, one-message-per-block, and the link-clock rate
// follow the architecture. Scrambler, idle block and lock rules follow
// 10GBASE-R practice and are this design's choices; the forward error
// correction the original link uses is not included.
module net_core
  import qec_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned LOCK_GOOD  = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clk_net,
  input  logic        rst_net,
  // message side (clk)
  input  logic        tx_valid,
  output logic        tx_ready,
  input  msg_t        tx_msg,
  output logic        rx_valid,
  output msg_t        rx_msg,
  output logic        rx_locked,      // synchronised to clk
  // transceiver side (clk_net)
  output logic [65:0] gt_tx_block,
  input  logic [65:0] gt_rx_block,
  output logic        gt_rx_slip
);

  localparam logic [1:0]  SH_DATA  = 2'b01;
  localparam logic [1:0]  SH_CTRL  = 2'b10;
  localparam logic [63:0] IDLE_BLK = 64'h0000_0000_0000_001E;

  // ---------------------------------------------------------------- transmit
  logic        txf_full, txf_empty;
  logic [63:0] txf_data;

  async_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_txf (
    .wclk (clk),     .wrst (rst),     .winc (tx_valid), .wdata (tx_msg), .wfull (txf_full),
    .rclk (clk_net), .rrst (rst_net), .rinc (1'b1),     .rdata (txf_data), .rempty (txf_empty)
  );
  assign tx_ready = !txf_full;

  logic [57:0] tx_scr;
  always_ff @(posedge clk_net) begin
    if (rst_net) begin
      tx_scr      <= '1;
      gt_tx_block <= {SH_CTRL, IDLE_BLK};
    end else begin
      logic [63:0] d, o;
      logic [57:0] s;
      d = txf_empty ? IDLE_BLK : txf_data;
      s = tx_scr;
      for (int i = 0; i < 64; i++) begin
        o[i] = d[i] ^ s[38] ^ s[57];
        s    = {s[56:0], o[i]};
      end
      tx_scr      <= s;
      gt_tx_block <= {txf_empty ? SH_CTRL : SH_DATA, o};
    end
  end

  // ---------------------------------------------------------------- receive
  logic [57:0] rx_scr;
  logic        locked_net;
  logic [6:0]  good_cnt;
  logic [5:0]  win_cnt;
  logic [4:0]  bad_cnt;
  logic        rxf_push;
  logic [63:0] rxf_wdata;
  logic        sh_ok;

  assign sh_ok = (gt_rx_block[65:64] == SH_DATA) || (gt_rx_block[65:64] == SH_CTRL);

  always_ff @(posedge clk_net) begin
    if (rst_net) begin
      rx_scr <= '0; locked_net <= 1'b0; good_cnt <= '0; win_cnt <= '0; bad_cnt <= '0;
      rxf_push <= 1'b0; rxf_wdata <= '0; gt_rx_slip <= 1'b0;
    end else begin
      logic [63:0] d;
      logic [57:0] s;
      s = rx_scr;
      for (int i = 0; i < 64; i++) begin
        d[i] = gt_rx_block[i] ^ s[38] ^ s[57];
        s    = {s[56:0], gt_rx_block[i]};
      end
      rx_scr     <= s;
      rxf_wdata  <= d;
      rxf_push   <= locked_net && gt_rx_block[65:64] == SH_DATA;
      gt_rx_slip <= !locked_net && !sh_ok;
      if (!locked_net) begin
        if (!sh_ok)                              good_cnt <= '0;
        else if (good_cnt == 7'(LOCK_GOOD - 1)) begin
          locked_net <= 1'b1; good_cnt <= '0; win_cnt <= '0; bad_cnt <= '0;
        end else                                 good_cnt <= good_cnt + 1'b1;
      end else begin
        win_cnt <= win_cnt + 1'b1;
        if (!sh_ok && bad_cnt == 5'd15) begin
          locked_net <= 1'b0; good_cnt <= '0;
        end else if (win_cnt == '1) bad_cnt <= 5'(!sh_ok);
        else if (!sh_ok)            bad_cnt <= bad_cnt + 1'b1;
      end
    end
  end

  logic        rxf_empty;
  logic [63:0] rxf_rdata;
  async_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_rxf (
    .wclk (clk_net), .wrst (rst_net), .winc (rxf_push), .wdata (rxf_wdata), .wfull (),
    .rclk (clk),     .rrst (rst),     .rinc (1'b1),     .rdata (rxf_rdata), .rempty (rxf_empty)
  );
  assign rx_valid = !rxf_empty;
  assign rx_msg   = msg_t'(rxf_rdata);

  logic lock_q1, lock_q2;
  always_ff @(posedge clk) begin
    if (rst) begin lock_q1 <= 1'b0; lock_q2 <= 1'b0; end
    else     begin lock_q1 <= locked_net; lock_q2 <= lock_q1; end
  end
  assign rx_locked = lock_q2;

endmodule
