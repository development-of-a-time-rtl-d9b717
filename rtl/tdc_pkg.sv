// tdc_pkg: sizes, output word format and mode encodings shared by the
// blocks of the 24-channel drift-tube TDC.
//
// A hit time is 17 bits: a 15-bit coarse count of the 320 MHz clock
// (3.125 ns) and a 2-bit fine time that splits each clock period into four
// bins of about 781 ps. The 15-bit coarse range covers 2^15 * 3.125 ns =
// 102.4 us, about one LHC orbit. These numbers, the 5-bit channel ID, the
// 1-bit leading/trailing flag and the order of the four fields in a word are
// the ones of the chip's block diagram. The value of the leading/trailing
// flag, the FIFO depth and the mode and rate encodings are choices of this
// design.
package tdc_pkg;

  localparam int unsigned COARSE_W    = 15;  // coarse-time bits
  localparam int unsigned FINE_W      = 2;   // fine-time bits
  localparam int unsigned CHID_W      = 5;   // channel ID bits
  localparam int unsigned N_CH        = 24;  // channels per chip
  localparam int unsigned CH_PER_PORT = 12;  // channels served by one port
  localparam int unsigned WORD_W      = CHID_W + 1 + FINE_W + COARSE_W;  // 23
  localparam int unsigned FIFO_DEPTH  = 8;   // per-channel FIFO entries

  // Which edge of the time-over-threshold pulse a word belongs to.
  typedef enum logic {
    EDGE_TRAILING = 1'b0,
    EDGE_LEADING  = 1'b1
  } edge_t;

  // One time measurement: coarse count and fine bin.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_time_t;

  // Output word, most significant field first, in the order of the block
  // diagram: channel ID, leading/trailing, fine time, coarse time.
  typedef struct packed {
    logic [CHID_W-1:0]   chid;
    edge_t               edge_kind;
    logic [FINE_W-1:0]   fine;
    logic [COARSE_W-1:0] coarse;
  } tdc_word_t;

  // Operation mode of the channel logic.
  typedef enum logic {
    MODE_EDGE = 1'b0,  // every edge is sent as a word of its own
    MODE_PAIR = 1'b1   // only leading/trailing pairs are sent, back to back
  } tdc_mode_t;

  // Serial output rate.
  typedef enum logic {
    RATE_160 = 1'b0,   // 160 Mbps: one bit per 160 MHz cycle
    RATE_320 = 1'b1    // 320 Mbps: two bits per 160 MHz cycle (DDR)
  } tdc_rate_t;

endpackage
