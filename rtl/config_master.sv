// config_master: configuration register file of the TDC-FPGA.
//
// Slave of a simple synchronous configuration bus (write strobe, 8-bit address,
// 32-bit data, read data valid one clock after the address). It holds the
// settings every other block reads, changeable during operation:
//   0x00 edge mode      [1:0]  01 leading, 10 trailing, 11 both, 00 off
//   0x01 latency        [13:0] coarse ticks subtracted from the trigger time
//   0x02 gate           [13:0] acceptance window width, coarse ticks
//   0x03 art_period     [15:0] artificial trigger interval, 0 = off
//   0x04 control        [0]    hold the coarse counter in reset
//   0x05 status (read)  [31:0] sticky error flags, cleared by writing 1s
// The paper only names the config master and the bus; the protocol, map and
// reset values here are this design's own.
module config_master
  import tdc_pkg::*;
#(
  parameter logic [COARSE_W-1:0] LATENCY_RST = 14'd100,
  parameter logic [COARSE_W-1:0] GATE_RST    = 14'd50,
  parameter logic [15:0]         ART_RST     = 16'd1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic        cfg_re,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  input  logic [31:0] status_set,
  output cfg_t        cfg
);
  logic [31:0] status;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg.edge_mode  <= EDGE_LEADING;
      cfg.latency    <= LATENCY_RST;
      cfg.gate       <= GATE_RST;
      cfg.art_period <= ART_RST;
      cfg.coarse_rst <= 1'b0;
      status         <= '0;
      cfg_rdata      <= '0;
    end else begin
      status <= status | status_set;
      if (cfg_we) begin
        unique case (cfg_addr)
          8'h00: cfg.edge_mode  <= edge_mode_e'(cfg_wdata[1:0]);
          8'h01: cfg.latency    <= cfg_wdata[COARSE_W-1:0];
          8'h02: cfg.gate       <= cfg_wdata[COARSE_W-1:0];
          8'h03: cfg.art_period <= cfg_wdata[15:0];
          8'h04: cfg.coarse_rst <= cfg_wdata[0];
          8'h05: status         <= (status & ~cfg_wdata) | status_set;
          default: ;
        endcase
      end
      if (cfg_re) begin
        unique case (cfg_addr)
          8'h00: cfg_rdata <= 32'(cfg.edge_mode);
          8'h01: cfg_rdata <= 32'(cfg.latency);
          8'h02: cfg_rdata <= 32'(cfg.gate);
          8'h03: cfg_rdata <= 32'(cfg.art_period);
          8'h04: cfg_rdata <= 32'(cfg.coarse_rst);
          8'h05: cfg_rdata <= status;
          default: cfg_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end
endmodule
