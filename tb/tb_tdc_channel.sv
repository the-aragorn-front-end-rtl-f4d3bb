// tb_tdc_channel: a whole channel driven by the eight-phase clock model.
// Input edges are placed in the middle of 402 ps bins, so the bin each edge
// must land in is known exactly (global bin j = edge time / 402 ps rounded up).
// One calibration hit fixes the constant pipeline offset between bin number
// and timestamp; after that every copied hit must carry exactly j + offset
// (16 bits, rollover bit dropped) and the right edge flag, and each trigger
// must return exactly the hits whose coarse time lies in its window.
// Phases: leading-edge mode with spaced and overlapping windows, both-edge
// mode, then a burst without triggers that fills the 64-word hit buffer
// (hits must be reported lost) after which matching still answers.
`timescale 1ps/1ps
module tb_tdc_channel;
  import tdc_pkg::*;
  localparam int P = 3216, TAU = 402;
  logic [7:0] clocks;
  logic rst = 1, din = 0, trig_valid = 0, out_pop = 0, out_empty, lost, trig_overflow;
  edge_mode_e edge_mode = EDGE_LEADING;
  logic [13:0] coarse_time = 0;
  trig_t trig = '0;
  dword_t out_word;
  int checks = 0, failures = 0, n_lost = 0, n_hits = 0, n_trail = 0;
  longint offset;

  mmcm_model #(.PERIOD_PS(P)) u_clk (.clocks);
  tdc_channel #(.HB_DEPTH(64)) dut (.clocks, .rst, .din, .ch_id(7'd42), .edge_mode, .coarse_time,
    .trig_valid, .trig, .out_pop, .out_word, .out_empty, .lost, .trig_overflow);

  always @(posedge clocks[0]) coarse_time <= rst ? '0 : coarse_time + 1'b1;
  always @(posedge clocks[0]) if (lost) n_lost++;

  initial begin
    #(longint'(P) * 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  // recorded edges: global bin and type
  longint e_bin[$];
  bit     e_trl[$];

  // one pulse: rising edge in bin j, falling edge in bin j + w
  task automatic pulse(input longint j, input int w);
    #(j * TAU - TAU / 2 - $time);
    din = 1;
    e_bin.push_back(j); e_trl.push_back(0);
    #(w * TAU);
    din = 0;
    e_bin.push_back(j + w); e_trl.push_back(1);
  endtask

  function automatic longint now_bin();
    return $time / TAU;
  endfunction

  // send a window [lo, hi] (coarse ticks) and check the channel's answer
  task automatic window_check(input logic [13:0] lo, input logic [13:0] hi, input logic [7:0] tag,
                              input bit both);
    dword_t got[$];
    @(negedge clocks[0]);
    trig = '{artificial: 1'b0, tag: tag, win_low: lo, win_high: hi};
    trig_valid = 1;
    @(negedge clocks[0]);
    trig_valid = 0;
    forever begin
      @(negedge clocks[0]);
      out_pop = !out_empty;
      if (!out_empty) begin
        got.push_back(out_word);
        if (out_word.trailer) break;
      end
    end
    @(negedge clocks[0]);
    out_pop = 0;
    begin
      int k;
      k = 0;
      foreach (e_bin[i]) begin
        longint ts;
        logic [13:0] c, dl, dh;
        ts = e_bin[i] + offset;
        c  = 14'(ts >> 3);
        dl = c - lo; dh = c - hi;
        if ((both || !e_trl[i]) && !dl[13] && (dh[13] || dh == 0)) begin
          chk(k < got.size() - 1 && !got[k].trailer && got[k].time16 == 16'(ts) &&
              got[k].trailing == e_trl[i] && got[k].channel == 7'd42, "hit");
          if (e_trl[i]) n_trail++;
          k++;
        end
      end
      chk(k == got.size() - 1, "hit count");
      chk(got[got.size()-1].trailer && got[got.size()-1].time16[7:0] == tag, "trailer");
      n_hits += k;
    end
  endtask

  initial begin
    longint j;
    repeat (4) @(posedge clocks[0]);
    #1 rst = 0;
    // calibration
    j = now_bin() + 200;
    pulse(j, 12);
    repeat (20) @(posedge clocks[0]);
    begin
      dword_t w;
      @(negedge clocks[0]);
      trig = '{artificial: 1'b0, tag: 8'd0, win_low: coarse_time - 14'd40, win_high: coarse_time - 14'd1};
      trig_valid = 1;
      @(negedge clocks[0]); trig_valid = 0;
      wait (!out_empty); @(negedge clocks[0]);
      w = out_word;
      offset = longint'(w.time16) - j;
      out_pop = 1; @(negedge clocks[0]); out_pop = 0;
      wait (!out_empty); @(negedge clocks[0]);
      chk(out_word.trailer, "calibration trailer");
      out_pop = 1; @(negedge clocks[0]); out_pop = 0;
    end
    // offset is only known modulo 2^16: express it against the coarse counter
    offset = offset - ((offset + j) / 65536) * 65536;
    e_bin.delete(); e_trl.delete();
    // leading-edge phase: pulses and spaced windows, plus an overlapping pair
    for (int r = 0; r < 60; r++) begin
      longint t0;
      logic [13:0] lo;
      t0 = now_bin() + 20;
      for (int p = 0; p < 6; p++) begin
        t0 += $urandom_range(20, 60);
        pulse(t0, $urandom_range(9, 20));
      end
      repeat (10) @(posedge clocks[0]);
      lo = 14'((t0 + offset) >> 3) - 14'($urandom_range(5, 30));
      window_check(lo, lo + 14'd15, 8'(r), 0);
      if (r % 10 == 5) window_check(lo + 14'd5, lo + 14'd20, 8'(100 + r), 0);
      // drop old edges from the model
      while (e_bin.size() > 40) begin void'(e_bin.pop_front()); void'(e_trl.pop_front()); end
    end
    // both edges
    edge_mode = EDGE_BOTH;
    e_bin.delete(); e_trl.delete();
    repeat (4) @(posedge clocks[0]);
    for (int r = 0; r < 40; r++) begin
      longint t0;
      logic [13:0] lo;
      t0 = now_bin() + 20;
      for (int p = 0; p < 5; p++) begin
        t0 += $urandom_range(40, 70);
        pulse(t0, $urandom_range(9, 30));
      end
      repeat (10) @(posedge clocks[0]);
      lo = 14'((t0 + offset) >> 3) - 14'($urandom_range(10, 40));
      window_check(lo, lo + 14'd25, 8'(r), 1);
      while (e_bin.size() > 40) begin void'(e_bin.pop_front()); void'(e_trl.pop_front()); end
    end
    // overflow: 80 pulses (160 edges) into a 64-word buffer, no trigger
    for (int p = 0; p < 80; p++) pulse(now_bin() + 20, 10);
    repeat (10) @(posedge clocks[0]);
    chk(n_lost > 0, "hits lost when full");
    window_check(coarse_time - 14'd3, coarse_time - 14'd2, 8'd77, 1);
    chk(n_hits > 200 && n_trail > 50, "coverage");
    $display("hits=%0d trailing=%0d lost=%0d", n_hits, n_trail, n_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
