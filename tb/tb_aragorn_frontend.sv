// tb_aragorn_frontend: end-to-end test of the whole board logic at its full
// size: four TDC-FPGAs of 96 channels with 2048-word hit buffers, and the
// uplink receiver. The uplink model deserialises an 8b/10b idle stream at a
// random bit offset after every receiver reset; the link must come up
// aligned, after which the slave transmitter reset is released. Then all four
// TDC-FPGAs are configured, pulses with known bin positions go to random
// channels across the 384 inputs (inside and outside the windows), triggers
// with TCS labels are sent, and the four serial packages of every event are
// decoded and compared hit by hit. Counted mechanisms, each required at least
// once: alignment retries, link up, hits copied, events without hits,
// artificial triggers, trailing edges after the edge-mode switch, and hits
// lost in a full hit buffer.
`timescale 1ps/1ps
module tb_aragorn_frontend;
  import tdc_pkg::*;
  import enc8b10b_tb_pkg::*;
  localparam int P = 3216, TAU = 402, NF = 4, NCH = 96, LAT = 100, GATE = 40;
  logic [7:0] clk8;
  logic [NF-1:0][7:0] clocks;
  logic rst = 1, coarse_sync_rst = 0, trigger = 0;
  logic [NF*NCH-1:0] data_in = '0;
  logic [19:0] tcs_event_no = 0;
  logic [10:0] tcs_spill_no = 0;
  logic [4:0] tcs_event_type = 0;
  logic [NF-1:0] cfg_we = '0, cfg_re = '0;
  logic [NF-1:0][7:0] cfg_addr = '0;
  logic [NF-1:0][31:0] cfg_wdata = '0, cfg_rdata;
  logic [NF-1:0] sck, sdo, sfr;
  logic rx_clk = 0, rx_rst = 1, rx_reset_done = 0, lmk_locked = 0;
  logic [19:0] rx_data = '0;
  logic gtp_rx_reset, link_up, slave_tx_reset;
  logic [15:0] rx_bytes;
  logic [1:0] rx_is_k;
  logic [7:0] align_attempts;
  int checks = 0, failures = 0;
  int n_hits = 0, n_empty_ev = 0, n_art = 0, n_trail = 0, n_lost = 0, n_link = 0, n_retry = 0;
  longint offset;

  mmcm_model #(.PERIOD_PS(P)) u_clk (.clocks(clk8));
  assign clocks = {NF{clk8}};
  always #4000 rx_clk = ~rx_clk;

  aragorn_frontend dut (.clocks, .rst, .data_in, .coarse_sync_rst, .trigger,
    .tcs_event_no, .tcs_spill_no, .tcs_event_type, .cfg_we, .cfg_re, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .sck, .sdo, .sfr, .rx_clk, .rx_rst, .rx_data, .rx_reset_done, .lmk_locked,
    .gtp_rx_reset, .link_up, .slave_tx_reset, .rx_bytes, .rx_is_k, .align_attempts);

  serial_rx_model rx0 (.sck(sck[0]), .sdo(sdo[0]), .sfr(sfr[0]));
  serial_rx_model rx1 (.sck(sck[1]), .sdo(sdo[1]), .sfr(sfr[1]));
  serial_rx_model rx2 (.sck(sck[2]), .sdo(sdo[2]), .sfr(sfr[2]));
  serial_rx_model rx3 (.sck(sck[3]), .sdo(sdo[3]), .sfr(sfr[3]));

  always @(posedge clk8[0]) if (dut.g_tdc[0].u_tdc.trig_valid && dut.g_tdc[0].u_tdc.trig.artificial) n_art++;

  initial begin
    #(longint'(P) * 300000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  // ---------------- uplink model ----------------
  bit rd8 = 0;
  int wcnt = 0, off = 5, rst_timer = 0;
  logic [39:0] win = '0;
  always @(posedge rx_clk) begin
    logic [19:0] w;
    if (wcnt % 2 == 0) begin
      w[9:0] = encode(8'h3C, 1, rd8); w[19:10] = encode(8'hBC, 1, rd8);
    end else begin
      w[9:0] = encode(8'($urandom), 0, rd8); w[19:10] = encode(8'($urandom), 0, rd8);
    end
    wcnt++;
    win = {w, win[39:20]};
    if (gtp_rx_reset) begin
      rx_reset_done <= 0;
      rst_timer = 3;
      off = (align_attempts < 2) ? $urandom_range(1, 19) : $urandom_range(0, 2);
    end else if (rst_timer > 0) begin
      rst_timer--;
      if (rst_timer == 0) rx_reset_done <= 1;
    end
    rx_data <= win[off +: 20];
  end

  // ---------------- TDC side ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk8[0]); cfg_addr = {NF{a}}; cfg_wdata = {NF{d}}; cfg_we = '1;
    @(negedge clk8[0]); cfg_we = '0;
  endtask
  task automatic rd(input int f, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk8[0]); cfg_addr[f] = a; cfg_re[f] = 1;
    @(negedge clk8[0]); cfg_re[f] = 0; d = cfg_rdata[f];
  endtask

  function automatic longint now_bin();
    return $time / TAU;
  endfunction

  task automatic pulse(input int g, input longint j, input int w);
    fork
      begin
        #(j * TAU - TAU / 2 - $time);
        data_in[g] = 1;
        #(w * TAU);
        data_in[g] = 0;
      end
    join_none
  endtask

  function automatic int npkgs(input int f);
    case (f)
      0: return rx0.pkgs.size();
      1: return rx1.pkgs.size();
      2: return rx2.pkgs.size();
      default: return rx3.pkgs.size();
    endcase
  endfunction

  typedef logic [31:0] wq_t[$];
  function automatic wq_t pkg(input int f, input int ev);
    case (f)
      0: return rx0.pkgs[ev];
      1: return rx1.pkgs[ev];
      2: return rx2.pkgs[ev];
      default: return rx3.pkgs[ev];
    endcase
  endfunction

  typedef struct { int g; longint ts; bit trl; } hit_t;
  hit_t exp_hits[$];

  task automatic send_trigger(output logic [19:0] evn, output logic [10:0] sp, output logic [4:0] ty);
    @(negedge clk8[0]);
    evn = 20'($urandom); sp = 11'($urandom); ty = 5'($urandom);
    tcs_event_no = evn; tcs_spill_no = sp; tcs_event_type = ty;
    trigger = 1;
    @(negedge clk8[0]);
    trigger = 0;
  endtask

  task automatic check_packages(input int ev, input logic [19:0] evn, input logic [10:0] sp,
                                input logic [4:0] ty);
    int t;
    t = 0;
    exp_hits.sort() with (item.g * 64'd1000000000 + item.ts);
    for (int f = 0; f < NF; f++) begin
      logic [31:0] p[$];
      int k;
      while (npkgs(f) <= ev && t < 100000) begin @(posedge clk8[0]); t++; end
      chk(npkgs(f) > ev, "package arrived");
      if (npkgs(f) <= ev) continue;
      p = pkg(f, ev);
      chk(p[0] == {4'hA, 1'b0, ty, sp, 3'b0, 8'(ev)}, "H0");
      chk(p[1] == {4'hB, 8'b0, evn}, "H1");
      k = 0;
      foreach (exp_hits[i]) if (exp_hits[i].g / NCH == f) begin
        chk(k + 2 < p.size() && p[k+2] == {4'h1, 3'b0, exp_hits[i].trl, 1'b0,
            7'(exp_hits[i].g % NCH), 16'(exp_hits[i].ts)}, $sformatf("event %0d fpga %0d hit %0d", ev, f, k));
        k++;
      end
      chk(p.size() == k + 3, "package size");
      chk(p[p.size()-1] == {4'hC, 3'b0, 1'b0, 8'b0, 16'(k)}, "trailer");
    end
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
    // link start-up
    repeat (4) @(posedge rx_clk);
    rx_rst = 0;
    repeat (20) @(posedge rx_clk);
    chk(gtp_rx_reset && slave_tx_reset, "receiver held until lock");
    lmk_locked = 1;
    begin
      int t;
      t = 0;
      while (!link_up && t < 20000) begin @(posedge rx_clk); t++; end
    end
    chk(link_up && off == 0 && !slave_tx_reset, "link up, aligned");
    if (link_up) n_link++;
    if (align_attempts > 0) n_retry++;
    repeat (4) @(posedge rx_clk);
    chk(rx_is_k == 2'b11 || rx_is_k == 2'b00, "decoded stream");
    // TDC-FPGAs
    @(posedge clk8[0]);
    #1 rst = 0;
    wr(8'h01, LAT); wr(8'h02, GATE); wr(8'h03, 300); wr(8'h00, 1);
    rd(3, 8'h01, d); chk(d == LAT, "config readback");
    // calibration hit on global channel 200
    j = now_bin() + 80;
    pulse(200, j, 10);
    repeat (10 + LAT - 20) @(posedge clk8[0]);
    send_trigger(evn, sp, ty);
    begin
      int t;
      t = 0;
      while (rx2.pkgs.size() == 0 && t < 20000) begin @(posedge clk8[0]); t++; end
    end
    chk(rx2.pkgs.size() == 1 && rx2.pkgs[0].size() == 4, "calibration package");
    offset = longint'(rx2.pkgs[0][2][15:0]) - j;
    begin
      int t;
      t = 0;
      while ((rx0.pkgs.size() == 0 || rx1.pkgs.size() == 0 || rx3.pkgs.size() == 0) && t < 20000) begin
        @(posedge clk8[0]); t++;
      end
    end
    for (int ev = 1; ev < 13; ev++) begin
      int nch;
      bit both;
      both = (ev > 6);
      if (ev == 7) wr(8'h00, 3);
      c_t = (now_bin() + offset) / 8 + LAT + 20;
      nch = (ev == 4) ? 0 : $urandom_range(1, 12);
      for (int k = 0; k < nch; k++) begin
        int g, w;
        longint jj;
        bit dup;
        g = $urandom_range(0, NF * NCH - 1);
        jj = (c_t - LAT + $urandom_range(3, GATE - 8)) * 8 - offset + $urandom_range(0, 7);
        w = both ? $urandom_range(9, 30) : 10;
        dup = 0;
        foreach (exp_hits[i]) if (exp_hits[i].g == g) dup = 1;
        if (dup) continue;
        pulse(g, jj, w);
        exp_hits.push_back('{g: g, ts: jj + offset, trl: 0});
        if (both) exp_hits.push_back('{g: g, ts: jj + w + offset, trl: 1});
      end
      pulse($urandom_range(0, NF * NCH - 1), (c_t - LAT - 15) * 8 - offset, 10);
      pulse($urandom_range(0, NF * NCH - 1), (c_t - LAT + GATE + 12) * 8 - offset, 10);
      while ((now_bin() + offset) / 8 < c_t) @(posedge clk8[0]);
      send_trigger(evn, sp, ty);
      check_packages(ev, evn, sp, ty);
    end
    // hit buffer overflow on FPGA 1: no artificial triggers, 1100 pulses
    wr(8'h03, 0);
    for (int k = 0; k < 1100; k++) pulse(NCH + 17, now_bin() + 40 + k * 24, 10);
    repeat (1100 * 3 + 20) @(posedge clk8[0]);
    rd(1, 8'h05, d);
    if (d[0]) n_lost++;
    chk(d[0] && d[3:1] == 0, "status: lost hits only");
    rd(0, 8'h05, d);
    chk(d == 0, "other FPGA clean");
    $display("hits=%0d empty=%0d art=%0d trailing=%0d lost=%0d link=%0d retry=%0d",
             n_hits, n_empty_ev, n_art, n_trail, n_lost, n_link, n_retry);
    chk(n_hits > 20, "hits copied");
    chk(n_empty_ev > 0, "empty events");
    chk(n_art > 0, "artificial triggers");
    chk(n_trail > 5, "trailing edges");
    chk(n_lost > 0, "hit buffer full");
    chk(n_link > 0 && n_retry > 0, "link alignment");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
