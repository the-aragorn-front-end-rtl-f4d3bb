// tb_tdc_fpga: end-to-end test of one TDC-FPGA at reduced size (16 channels,
// two concentrator groups of 8, 256-word hit buffers). The testbench
// configures latency, gate, edge mode and artificial-trigger interval over
// the configuration bus, places input pulses with known bin positions on
// random channels inside and outside each trigger's acceptance window, sends
// the trigger with TCS labels, and decodes the serial package on SCK/SDO/SFR.
// Each package must carry the labels of its trigger and exactly the in-window
// hits, ordered by channel and time, with exact timestamps (one calibration
// hit fixes the pipeline offset). Counted mechanisms: hits copied, events
// without hits, artificial triggers, trailing edges after the edge-mode
// switch, and hits lost in a full hit buffer (status register).
`timescale 1ps/1ps
module tb_tdc_fpga;
  import tdc_pkg::*;
  localparam int P = 3216, TAU = 402, NCH = 16, LAT = 100, GATE = 40;
  logic [7:0] clocks;
  logic rst = 1, coarse_sync_rst = 0, trigger = 0, cfg_we = 0, cfg_re = 0;
  logic [NCH-1:0] data_in = '0;
  logic [19:0] tcs_event_no = 0;
  logic [10:0] tcs_spill_no = 0;
  logic [4:0] tcs_event_type = 0;
  logic [7:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic sck, sdo, sfr;
  int checks = 0, failures = 0;
  int n_hits = 0, n_empty_ev = 0, n_art = 0, n_trail = 0, n_lost_flag = 0;
  longint offset;

  mmcm_model #(.PERIOD_PS(P)) u_clk (.clocks);
  tdc_fpga #(.NUM_CH(NCH), .GROUP(8), .HB_DEPTH(256)) dut (.clocks, .rst, .data_in, .coarse_sync_rst,
    .trigger, .tcs_event_no, .tcs_spill_no, .tcs_event_type,
    .cfg_we, .cfg_re, .cfg_addr, .cfg_wdata, .cfg_rdata, .sck, .sdo, .sfr);
  serial_rx_model rx (.sck, .sdo, .sfr);

  always @(posedge clocks[0]) if (dut.trig_valid && dut.trig.artificial) n_art++;

  initial begin
    #(longint'(P) * 400000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clocks[0]); cfg_addr = a; cfg_wdata = d; cfg_we = 1;
    @(negedge clocks[0]); cfg_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clocks[0]); cfg_addr = a; cfg_re = 1;
    @(negedge clocks[0]); cfg_re = 0; d = cfg_rdata;
  endtask

  function automatic longint now_bin();
    return $time / TAU;
  endfunction

  // pulses are launched as independent processes
  task automatic pulse(input int ch, input longint j, input int w);
    fork
      begin
        #(j * TAU - TAU / 2 - $time);
        data_in[ch] = 1;
        #(w * TAU);
        data_in[ch] = 0;
      end
    join_none
  endtask

  // expected hit list of the current event
  typedef struct { int ch; longint ts; bit trl; } hit_t;
  hit_t exp_hits[$];

  task automatic send_trigger(input int ev, output logic [19:0] evn, output logic [10:0] sp,
                              output logic [4:0] ty);
    @(negedge clocks[0]);
    evn = 20'($urandom); sp = 11'($urandom); ty = 5'($urandom);
    tcs_event_no = evn; tcs_spill_no = sp; tcs_event_type = ty;
    trigger = 1;
    @(negedge clocks[0]);
    trigger = 0;
  endtask

  task automatic check_package(input int ev, input logic [19:0] evn, input logic [10:0] sp,
                               input logic [4:0] ty, input logic [7:0] tag);
    logic [31:0] p[$];
    int t;
    t = 0;
    while (rx.pkgs.size() <= ev && t < 100000) begin @(posedge clocks[0]); t++; end
    chk(rx.pkgs.size() > ev, "package arrived");
    if (rx.pkgs.size() <= ev) return;
    p = rx.pkgs[ev];
    chk(p.size() == exp_hits.size() + 3, $sformatf("event %0d size %0d exp %0d", ev, p.size(), exp_hits.size() + 3));
    chk(p[0] == {4'hA, 1'b0, ty, sp, 3'b0, tag}, "H0");
    chk(p[1] == {4'hB, 8'b0, evn}, "H1");
    exp_hits.sort() with (item.ch * 64'd1000000000 + item.ts);
    foreach (exp_hits[i]) if (i + 2 < p.size())
      chk(p[i+2] == {4'h1, 3'b0, exp_hits[i].trl, 1'b0, 7'(exp_hits[i].ch), 16'(exp_hits[i].ts)},
          $sformatf("event %0d hit %0d got %h", ev, i, p[i+2]));
    chk(p[p.size()-1] == {4'hC, 3'b0, 1'b0, 8'b0, 16'(exp_hits.size())}, "trailer");
    n_hits += exp_hits.size();
    if (exp_hits.size() == 0) n_empty_ev++;
    foreach (exp_hits[i]) if (exp_hits[i].trl) n_trail++;
    exp_hits.delete();
  endtask

  initial begin
    logic [19:0] evn;
    logic [10:0] sp;
    logic [4:0] ty;
    logic [31:0] d;
    longint j, c_t;
    repeat (4) @(posedge clocks[0]);
    #1 rst = 0;
    wr(8'h01, LAT); wr(8'h02, GATE); wr(8'h03, 300); wr(8'h00, 1);
    rd(8'h02, d); chk(d == GATE, "config readback");
    // calibration hit on channel 3
    j = now_bin() + 80;
    pulse(3, j, 10);
    repeat (10 + LAT - 20) @(posedge clocks[0]);
    send_trigger(0, evn, sp, ty);
    begin
      int t;
      t = 0;
      while (rx.pkgs.size() == 0 && t < 20000) begin @(posedge clocks[0]); t++; end
    end
    chk(rx.pkgs.size() == 1 && rx.pkgs[0].size() == 4, "calibration package");
    offset = longint'(rx.pkgs[0][2][15:0]) - j;
    // main events
    for (int ev = 1; ev < 41; ev++) begin
      int nch;
      bit both;
      both = (ev > 20);
      if (ev == 21) wr(8'h00, 3);
      c_t = (now_bin() + offset) / 8 + LAT + 20;    // coarse time of the coming trigger
      nch = (ev % 7 == 0) ? 0 : $urandom_range(1, 6);
      for (int k = 0; k < nch; k++) begin
        int ch, w;
        longint jj;
        ch = $urandom_range(0, NCH - 1);
        // inside the window, at least 3 ticks from both limits; one pulse per channel
        jj = (c_t - LAT + $urandom_range(3, GATE - 8)) * 8 - offset + $urandom_range(0, 7);
        w = both ? $urandom_range(9, 30) : 10;
        begin
          bit dup;
          dup = 0;
          foreach (exp_hits[i]) if (exp_hits[i].ch == ch) dup = 1;
          if (dup) continue;
        end
        pulse(ch, jj, w);
        exp_hits.push_back('{ch: ch, ts: jj + offset, trl: 0});
        if (both) exp_hits.push_back('{ch: ch, ts: jj + w + offset, trl: 1});
      end
      // a pulse before and one after the window
      pulse($urandom_range(0, NCH - 1), (c_t - LAT - 15) * 8 - offset, 10);
      pulse($urandom_range(0, NCH - 1), (c_t - LAT + GATE + 12) * 8 - offset, 10);
      while ((now_bin() + offset) / 8 < c_t) @(posedge clocks[0]);
      send_trigger(ev, evn, sp, ty);
      check_package(ev, evn, sp, ty, 8'(ev));
    end
    // overflow: artificial triggers off, more edges than the hit buffer holds
    wr(8'h03, 0);
    for (int k = 0; k < 140; k++) pulse(5, now_bin() + 40 + k * 24, 10);
    repeat (140 * 3 + 20) @(posedge clocks[0]);
    rd(8'h05, d);
    if (d[0]) n_lost_flag++;
    chk(d[0] && d[3:1] == 0, "status: lost hits only");
    $display("hits=%0d empty=%0d art=%0d trailing=%0d", n_hits, n_empty_ev, n_art, n_trail);
    chk(n_hits > 50, "hits copied");
    chk(n_empty_ev > 0, "empty events");
    chk(n_art > 0, "artificial triggers");
    chk(n_trail > 10, "trailing edges");
    chk(n_lost_flag > 0, "hit buffer full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
