// tb_config_master: reset values, register writes and read-back, sticky
// status bits and their clearing.
`timescale 1ps/1ps
module tb_config_master;
  import tdc_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0, cfg_re = 0;
  logic [7:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, status_set = 0;
  cfg_t cfg;
  int checks = 0, failures = 0;

  config_master dut (.clk, .rst, .cfg_we, .cfg_re, .cfg_addr, .cfg_wdata, .cfg_rdata, .status_set, .cfg);
  always #1608 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("%t FAIL %s", $time, what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    cfg_addr = a; cfg_wdata = d; cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    cfg_addr = a; cfg_re = 1; @(posedge clk); #1 cfg_re = 0; d = cfg_rdata;
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    chk(cfg.edge_mode == EDGE_LEADING && cfg.latency == 100 && cfg.gate == 50 &&
        cfg.art_period == 1024 && !cfg.coarse_rst, "reset values");
    wr(8'h00, 3);      chk(cfg.edge_mode == EDGE_BOTH, "edge mode");
    wr(8'h01, 1234);   chk(cfg.latency == 1234, "latency");
    wr(8'h02, 77);     chk(cfg.gate == 77, "gate");
    wr(8'h03, 500);    chk(cfg.art_period == 500, "art");
    wr(8'h04, 1);      chk(cfg.coarse_rst, "coarse rst");
    rd(8'h01, d);      chk(d == 1234, "read latency");
    rd(8'h02, d);      chk(d == 77, "read gate");
    rd(8'h00, d);      chk(d == 3, "read edge");
    rd(8'h03, d);      chk(d == 500, "read art");
    status_set = 32'h5; @(posedge clk); #1 status_set = 0;
    rd(8'h05, d);      chk(d == 32'h5, "status sticky");
    wr(8'h05, 32'h1);
    rd(8'h05, d);      chk(d == 32'h4, "status clear");
    rd(8'h77, d);      chk(d == 32'hDEAD_BEEF, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
