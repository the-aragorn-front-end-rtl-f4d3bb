// tdc_pkg: sizes, configuration encodings and word formats shared by the
// TDC-FPGA blocks.
//
// Numbers that follow the text: 8 sampling phases, 3-bit fine time, a 14-bit
// coarse counter (coarse_time[13:0]), 17-bit hit-buffer timestamps
// (data_out[16:0]) in a 2k x 18 hit buffer, 96 channels per FPGA.
// The 16-bit dynamic range is 13 coarse bits plus 3 fine bits; the counter's
// 14th bit is the "rollover bit" that is kept in the hit buffer and dropped
// when a hit moves to the output FIFO. The spare 18th bit of the hit-buffer
// word marks trailing edges. Event tag width, channel field width, label widths
// and the config register map are this design's own choices.
package tdc_pkg;

  localparam int unsigned PHASES   = 8;
  localparam int unsigned FINE_W   = 3;
  localparam int unsigned COARSE_W = 14;
  localparam int unsigned TS_W     = COARSE_W + FINE_W;   // 17, with rollover bit
  localparam int unsigned OUT_TS_W = TS_W - 1;            // 16, dynamic range
  localparam int unsigned HB_DEPTH = 2048;
  localparam int unsigned HB_AW    = $clog2(HB_DEPTH);
  localparam int unsigned HB_W     = 18;
  localparam int unsigned NUM_CH   = 96;
  localparam int unsigned CH_W     = 7;
  localparam int unsigned TAG_W    = 8;                   // local trigger identifier

  // Edge sensitivity of the encoder (configurable during operation).
  typedef enum logic [1:0] {
    EDGE_OFF      = 2'b00,
    EDGE_LEADING  = 2'b01,
    EDGE_TRAILING = 2'b10,
    EDGE_BOTH     = 2'b11
  } edge_mode_e;

  // One hit-buffer word (18 bits).
  typedef struct packed {
    logic                trailing;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } hb_word_t;

  // Acceptance window of one trigger, as stored in the trigger FIFOs.
  typedef struct packed {
    logic                artificial;
    logic [TAG_W-1:0]    tag;
    logic [COARSE_W-1:0] win_low;
    logic [COARSE_W-1:0] win_high;
  } trig_t;

  // Word of the output FIFOs and of the concentrator streams.
  // A trailer closes one event of one source; its payload low bits hold the tag.
  typedef struct packed {
    logic                trailer;
    logic [CH_W-1:0]     channel;
    logic                trailing;
    logic [OUT_TS_W-1:0] time16;
  } dword_t;

  localparam int unsigned DWORD_W = $bits(dword_t);  // 25

  // Configuration registers.
  typedef struct packed {
    edge_mode_e          edge_mode;
    logic [COARSE_W-1:0] latency;     // trigger latency, coarse ticks
    logic [COARSE_W-1:0] gate;        // window width, coarse ticks
    logic [15:0]         art_period;  // artificial trigger interval, 0 = off
    logic                coarse_rst;  // hold coarse counter in reset
  } cfg_t;

endpackage
