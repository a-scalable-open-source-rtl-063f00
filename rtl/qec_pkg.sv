// qec_pkg: types and constants shared by every block of the distributed QEC
// control system.
//
// Time is counted in cycles of the 500 MHz control clock by a 48-bit global
// timer on every board. Processors reach their peripherals over a reduced
// TileLink-UL bus (32-bit Get and PutFullData only). Boards talk over one
// 64-bit message per 64B/66B block; the message layout below is this
// design's choice (the architecture only fixes the 64-bit frame size).
//
//   [63:60] type   [59:56] node id   [55:48] round   [47:0] payload
//
//   SYNDROME   leaf -> root  payload[15:0]  syndrome bit of core k at bit k
//   ERROR      root -> leaf  payload[15:0]  error bit of core k at bit k
//   PTP_*      both          payload[47:0]  timestamp (SYNC, DELAY_RESP) or 0
package qec_pkg;

  localparam int unsigned TIME_W   = 48;   // global timer width
  localparam int unsigned SAMPLE_W = 16;   // DAC/ADC sample width
  localparam int unsigned DAC_SPC  = 16;   // 8 GS/s at 500 MHz
  localparam int unsigned ADC_SPC  = 4;    // 2 GS/s at 500 MHz
  localparam int unsigned MSG_W    = 64;   // one network data unit
  localparam int unsigned BLOCK_W  = 66;   // 64B/66B block

  typedef logic [TIME_W-1:0] time_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef sample_t [DAC_SPC-1:0] dac_word_t;
  typedef sample_t [ADC_SPC-1:0] adc_word_t;

  // ---------------------------------------------------------------- TileLink-UL
  typedef enum logic [2:0] {
    TL_PUT_FULL = 3'd0,
    TL_GET      = 3'd4
  } tl_a_op_e;

  typedef enum logic [2:0] {
    TL_ACCESS_ACK      = 3'd0,
    TL_ACCESS_ACK_DATA = 3'd1
  } tl_d_op_e;

  typedef struct packed {
    logic        valid;
    tl_a_op_e    opcode;
    logic [15:0] address;   // byte address inside the slave
    logic [3:0]  mask;
    logic [31:0] data;
  } tl_a_t;

  typedef struct packed {
    logic        valid;
    tl_d_op_e    opcode;
    logic [31:0] data;
  } tl_d_t;

  // ---------------------------------------------------------------- messages
  typedef enum logic [3:0] {
    MSG_IDLE          = 4'h0,
    MSG_SYNDROME      = 4'h1,
    MSG_ERROR         = 4'h2,
    MSG_PTP_SYNC      = 4'h3,
    MSG_PTP_DELAY_REQ = 4'h4,
    MSG_PTP_DELAY_RSP = 4'h5
  } msg_type_e;

  typedef struct packed {
    msg_type_e   mtype;
    logic [3:0]  node;
    logic [7:0]  round;
    logic [47:0] payload;
  } msg_t;

  // ---------------------------------------------------------------- MMIO map of a controller core
  // Byte addresses on the core's peripheral bus.
  localparam logic [15:0] A_TS_LO      = 16'h0000; // timestamp for the next FIFO push
  localparam logic [15:0] A_TS_HI      = 16'h0004;
  localparam logic [15:0] A_GATE_BASE  = 16'h0010; // +0 freq +4 phase +8 amp +C env +10 dur
  localparam logic [15:0] A_RO_BASE    = 16'h0030; // same layout, readout generator
  localparam logic [15:0] A_DEC_FREQ   = 16'h0050;
  localparam logic [15:0] A_DEC_PHASE  = 16'h0054;
  localparam logic [15:0] A_DEC_DUR    = 16'h0058; // pushed into a timed FIFO
  localparam logic [15:0] A_DEC_RESULT = 16'h005C; // read {valid, bit}; read clears valid
  localparam logic [15:0] A_TIMER_LO   = 16'h0060; // read: timer, latches high half
  localparam logic [15:0] A_TIMER_HI   = 16'h0064;
  localparam logic [15:0] A_SYNDROME   = 16'h0070; // write bit 0 to the syndrome aggregator
  localparam logic [15:0] A_ERROR      = 16'h0074; // read {valid, bit}; read clears valid
  localparam logic [15:0] A_STATUS     = 16'h0078; // read: FIFO full flags, late flags

  // Generator parameter slots (offset / 4 inside a generator window)
  localparam int unsigned P_FREQ = 0, P_PHASE = 1, P_AMP = 2, P_ENV = 3, P_DUR = 4;
  localparam int unsigned N_GEN_PARAMS = 5;

endpackage
