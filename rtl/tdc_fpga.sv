// tdc_fpga: the design of one TDC-FPGA (96 channels).
//
// Data flow: DATA_IN[i] -> tdc_channel i (sampling register, edge encoder,
// hit buffer, trigger matching, output FIFO) -> a two-stage tree of data
// concentrators (NUM_CH/GROUP concentrators of GROUP channels working in
// parallel, then one that merges their buffers) -> event builder, which adds
// the TCS labels and drives the serial link SCK/SDO/SFR to the central FPGA.
// Shared blocks: the coarse counter (clock_counter), the trigger-time unit
// that turns each trigger into an acceptance window for all channels, and the
// configuration register file (config_master).
//
// Clocks: clocks[7:0] are the eight phases of the sampling clock from the
// clock manager (two MMCMs, outside this module); everything except the
// sampling flip-flops runs on clocks[0]. The trigger and the TCS labels come
// from the TCS receiver, also outside this module. coarse_sync_rst clears the
// coarse counter in step with the other FPGAs.
// The status register collects: bit0 hit lost (hit buffer full), bit1 trigger
// FIFO overflow, bit2 concentrator tag mismatch, bit3 label FIFO overflow.
// The block structure is the paper's top-level diagram; the concentrator
// grouping is this design's choice.
module tdc_fpga
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_CH   = tdc_pkg::NUM_CH,
  parameter int unsigned GROUP    = 8,
  parameter int unsigned HB_DEPTH = tdc_pkg::HB_DEPTH
) (
  input  logic [PHASES-1:0] clocks,
  input  logic              rst,
  input  logic [NUM_CH-1:0] data_in,
  input  logic              coarse_sync_rst,
  // from the TCS receiver
  input  logic              trigger,
  input  logic [19:0]       tcs_event_no,
  input  logic [10:0]       tcs_spill_no,
  input  logic [4:0]        tcs_event_type,
  // configuration bus
  input  logic              cfg_we,
  input  logic              cfg_re,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // serial link to the central FPGA
  output logic              sck,
  output logic              sdo,
  output logic              sfr
);
  localparam int unsigned NG = NUM_CH / GROUP;

  logic                clk;
  cfg_t                cfg;
  logic [COARSE_W-1:0] coarse_time;
  logic                trig_valid;
  trig_t               trig;
  logic [TAG_W-1:0]    event_no;

  dword_t [NUM_CH-1:0] ch_word;
  logic   [NUM_CH-1:0] ch_empty, ch_pop, ch_lost, ch_tovf;
  dword_t [NG-1:0]     g_word;
  logic   [NG-1:0]     g_empty, g_pop, g_tagerr;
  dword_t              f_word;
  logic                f_empty, f_pop, f_tagerr, label_overflow;

  assign clk = clocks[0];

  config_master u_cfg (
    .clk, .rst, .cfg_we, .cfg_re, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .status_set({28'b0, label_overflow, (|g_tagerr) | f_tagerr, |ch_tovf, |ch_lost}),
    .cfg
  );

  clock_counter u_coarse (
    .clk, .rst(rst | coarse_sync_rst | cfg.coarse_rst), .coarse_time
  );

  trigger_time u_trig (
    .clk, .rst, .coarse_time, .trigger,
    .latency(cfg.latency), .gate(cfg.gate), .art_period(cfg.art_period),
    .trig_valid, .trig, .event_no
  );

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    tdc_channel #(.HB_DEPTH(HB_DEPTH)) u_ch (
      .clocks, .rst, .din(data_in[c]), .ch_id(CH_W'(c)), .edge_mode(cfg.edge_mode),
      .coarse_time, .trig_valid, .trig,
      .out_pop(ch_pop[c]), .out_word(ch_word[c]), .out_empty(ch_empty[c]),
      .lost(ch_lost[c]), .trig_overflow(ch_tovf[c])
    );
  end

  for (genvar g = 0; g < NG; g++) begin : g_conc
    data_concentrator #(.N(GROUP)) u_c1 (
      .clk, .rst,
      .in_word(ch_word[g*GROUP +: GROUP]), .in_empty(ch_empty[g*GROUP +: GROUP]),
      .in_pop(ch_pop[g*GROUP +: GROUP]),
      .out_pop(g_pop[g]), .out_word(g_word[g]), .out_empty(g_empty[g]),
      .tag_error(g_tagerr[g])
    );
  end

  data_concentrator #(.N(NG)) u_c2 (
    .clk, .rst, .in_word(g_word), .in_empty(g_empty), .in_pop(g_pop),
    .out_pop(f_pop), .out_word(f_word), .out_empty(f_empty), .tag_error(f_tagerr)
  );

  event_builder u_eb (
    .clk, .rst,
    .label_valid(trigger), .tcs_event_no, .tcs_spill_no, .tcs_event_type, .tag(event_no),
    .in_word(f_word), .in_empty(f_empty), .in_pop(f_pop),
    .sck, .sdo, .sfr, .label_overflow
  );
endmodule
