// aragorn_frontend: logic of one ARAGORN front-end board.
//
// The board carries four TDC-FPGAs of 96 channels each (384 channels) and a
// central FPGA that is the board's data hub. This top instantiates the four
// TDC-FPGA designs and, of the central FPGA, the constant-latency uplink
// receiver built in fabric logic: comma_align (reset-until-aligned start-up
// with the K28.1+K28.5 sequence) and dec_8b10b.
//
// Parts that are not logic of this design are outside and meet it at ports:
//  - the clock managers (MMCMs) that make each FPGA's 8-phase sampling clock:
//    clocks[f] is the phase bundle of TDC-FPGA f;
//  - the TCS receiver that turns the trigger stream into a trigger pulse and
//    event labels, and the coarse-counter synchronous reset;
//  - the GTP transceiver (20-bit parallel receive data, reset) and the
//    jitter attenuator's lock signal;
//  - the central FPGA's merging of the four serial links (SCK/SDO/SFR per
//    TDC-FPGA) into the SFP+/CXP output, and its processor with the
//    configuration buses (one per TDC-FPGA here).
// All four TDC-FPGAs share trigger, labels and coarse reset, so their data is
// time-aligned. The partitioning follows the paper; the port-level split is
// this design's.
module aragorn_frontend
  import tdc_pkg::*;
#(
  parameter int unsigned N_TDC    = 4,
  parameter int unsigned NUM_CH   = tdc_pkg::NUM_CH,
  parameter int unsigned GROUP    = 8,
  parameter int unsigned HB_DEPTH = tdc_pkg::HB_DEPTH
) (
  input  logic [N_TDC-1:0][PHASES-1:0] clocks,
  input  logic                         rst,
  input  logic [N_TDC*NUM_CH-1:0]      data_in,
  input  logic                         coarse_sync_rst,
  input  logic                         trigger,
  input  logic [19:0]                  tcs_event_no,
  input  logic [10:0]                  tcs_spill_no,
  input  logic [4:0]                   tcs_event_type,
  input  logic [N_TDC-1:0]             cfg_we,
  input  logic [N_TDC-1:0]             cfg_re,
  input  logic [N_TDC-1:0][7:0]        cfg_addr,
  input  logic [N_TDC-1:0][31:0]       cfg_wdata,
  output logic [N_TDC-1:0][31:0]       cfg_rdata,
  output logic [N_TDC-1:0]             sck,
  output logic [N_TDC-1:0]             sdo,
  output logic [N_TDC-1:0]             sfr,
  // uplink receiver of the central FPGA
  input  logic                         rx_clk,
  input  logic                         rx_rst,
  input  logic [19:0]                  rx_data,
  input  logic                         rx_reset_done,
  input  logic                         lmk_locked,
  output logic                         gtp_rx_reset,
  output logic                         link_up,
  output logic                         slave_tx_reset,
  output logic [15:0]                  rx_bytes,
  output logic [1:0]                   rx_is_k,
  output logic [7:0]                   align_attempts
);
  logic code_err;

  for (genvar f = 0; f < N_TDC; f++) begin : g_tdc
    tdc_fpga #(.NUM_CH(NUM_CH), .GROUP(GROUP), .HB_DEPTH(HB_DEPTH)) u_tdc (
      .clocks(clocks[f]), .rst, .data_in(data_in[f*NUM_CH +: NUM_CH]), .coarse_sync_rst,
      .trigger, .tcs_event_no, .tcs_spill_no, .tcs_event_type,
      .cfg_we(cfg_we[f]), .cfg_re(cfg_re[f]), .cfg_addr(cfg_addr[f]),
      .cfg_wdata(cfg_wdata[f]), .cfg_rdata(cfg_rdata[f]),
      .sck(sck[f]), .sdo(sdo[f]), .sfr(sfr[f])
    );
  end

  dec_8b10b u_dec (.clk(rx_clk), .rx_data, .data(rx_bytes), .is_k(rx_is_k), .code_err);

  comma_align u_align (
    .clk(rx_clk), .rst(rx_rst), .lmk_locked, .rx_reset_done, .rx_data, .code_err,
    .gtp_rx_reset, .link_up, .tx_reset(slave_tx_reset), .align_attempts
  );
endmodule
