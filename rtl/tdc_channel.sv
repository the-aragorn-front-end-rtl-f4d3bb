// tdc_channel: one complete TDC channel.
//
// Chain: TDC register (8 phase-clocked flip-flops) -> detect & encode ->
// dual-port hit buffer -> trigger matching -> output FIFO. Acceptance windows
// from the shared trigger-time unit are queued in the channel's own trigger
// FIFO, so matching may lag the triggers without losing any. All logic after
// the sampling flip-flops runs on clocks[0].
//
// Interface: 'din' is the discriminated input; 'trig_valid/trig' is the
// broadcast window; the output FIFO is read with out_pop/out_word/out_empty
// (first-word-fall-through). 'lost' pulses for a hit dropped because the hit
// buffer was full, 'trig_overflow' for a window dropped because the trigger
// FIFO was full.
// Block structure follows the paper's channel diagram; FIFO depths are this
// design's choice.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned HB_DEPTH   = tdc_pkg::HB_DEPTH,
  parameter int unsigned TRIG_DEPTH = 16,
  parameter int unsigned OUT_DEPTH  = 64
) (
  input  logic [PHASES-1:0]   clocks,
  input  logic                rst,
  input  logic                din,
  input  logic [CH_W-1:0]     ch_id,
  input  edge_mode_e          edge_mode,
  input  logic [COARSE_W-1:0] coarse_time,
  input  logic                trig_valid,
  input  trig_t               trig,
  input  logic                out_pop,
  output dword_t              out_word,
  output logic                out_empty,
  output logic                lost,
  output logic                trig_overflow
);
  localparam int unsigned AW = $clog2(HB_DEPTH);

  logic                clk;
  logic [PHASES-1:0]   q_sync;
  logic [FINE_W-1:0]   fine_time;
  logic                trailing, wr_en, full;
  logic [AW-1:0]       wr_ptr, rd_ptr, start_ptr;
  logic                rd_en;
  logic [TS_W-1:0]     hb_data;
  logic                hb_trailing;
  logic                tf_empty, tf_full, tf_pop;
  trig_t               tf_dout;
  logic                of_full, of_push;
  dword_t              of_din;

  assign clk = clocks[0];

  tdc_register u_reg (.clocks, .din, .q_sync);

  detect_encode #(.HB_AW(AW)) u_enc (
    .clk, .rst, .q_sync, .edge_mode, .full,
    .fine_time, .trailing, .wr_en, .wr_ptr, .lost
  );

  hit_buffer_ram #(.DEPTH(HB_DEPTH)) u_hb (
    .clk, .wr_en, .wr_ptr, .fine_time, .trailing, .coarse_time,
    .rd_en, .rd_ptr, .start_ptr, .data_out(hb_data), .data_trailing(hb_trailing), .full
  );

  sync_fifo #(.WIDTH($bits(trig_t)), .DEPTH(TRIG_DEPTH)) u_trig_fifo (
    .clk, .rst, .push(trig_valid), .din(trig), .pop(tf_pop),
    .dout(tf_dout), .empty(tf_empty), .full(tf_full), .count()
  );
  assign trig_overflow = trig_valid & tf_full;

  trigger_matcher #(.HB_AW(AW)) u_match (
    .clk, .rst, .ch_id, .coarse_time,
    .trig_empty(tf_empty), .trig_in(tf_dout), .trig_pop(tf_pop),
    .wr_ptr, .rd_en, .rd_ptr, .start_ptr, .hb_data, .hb_trailing,
    .out_full(of_full), .out_push(of_push), .out_word(of_din), .busy()
  );

  sync_fifo #(.WIDTH(DWORD_W), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst, .push(of_push), .din(of_din), .pop(out_pop),
    .dout(out_word), .empty(out_empty), .full(of_full), .count()
  );
endmodule
