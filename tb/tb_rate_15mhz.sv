// tb_rate_15mhz: one full-size channel (2048-word hit buffer, default FIFOs)
// under its typical load of 15 MHz random input pulses, with triggers at
// random intervals of 100 to 3000 clock periods and the default window
// (latency 100, gate 50 coarse ticks), all running at the same time.
// Pulse gaps are 20 bins plus an exponential part with mean 146 bins, so
// the mean spacing is 166 bins x 402 ps = 66.7 ns (15 MHz).
// The expected hits of each trigger are worked out from the edge times the
// testbench itself produced (edges sit in the middle of a 402 ps bin; one
// calibration hit fixes the constant pipeline offset). Every output word must
// match them in order, no hit may be lost, the trigger FIFO must never
// overflow, and the measured input rate must lie between 14 and 16 MHz.
`timescale 1ps/1ps
module tb_rate_15mhz;
  import tdc_pkg::*;
  localparam int P = 3216, TAU = 402;
  localparam int N_PULSES = 100000;
  localparam logic [13:0] LAT = 14'd100, GATE = 14'd50;
  logic [7:0] clocks;
  logic rst = 1, din = 0, trig_valid = 0, out_pop = 0, out_empty, lost, trig_overflow;
  logic [13:0] coarse_time = 0;
  trig_t trig = '0;
  dword_t out_word;
  int checks = 0, failures = 0, n_lost = 0, n_ovf = 0, n_hits = 0, n_events = 0, n_empty = 0;
  longint offset, t_first, t_last;
  bit stim_done = 0, cal_done = 0;

  typedef struct { bit trailer; logic [15:0] val; } exp_t;
  exp_t   expq[$];
  longint e_bin[$];

  mmcm_model #(.PERIOD_PS(P)) u_clk (.clocks);
  tdc_channel dut (.clocks, .rst, .din, .ch_id(7'd5), .edge_mode(EDGE_LEADING), .coarse_time,
    .trig_valid, .trig, .out_pop, .out_word, .out_empty, .lost, .trig_overflow);

  always @(posedge clocks[0]) coarse_time <= rst ? '0 : coarse_time + 1'b1;
  always @(posedge clocks[0]) begin
    if (lost) n_lost++;
    if (trig_overflow) n_ovf++;
  end

  initial begin
    #(longint'(P) * 5000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  task automatic pulse(input longint j, input int w);
    #(j * longint'(TAU) - TAU / 2 - $time);
    din = 1;
    e_bin.push_back(j);
    #(w * TAU);
    din = 0;
  endtask

  function automatic longint now_bin();
    return $time / longint'(TAU);
  endfunction

  // reader: pops the output FIFO and compares with the expected stream
  always @(negedge clocks[0]) if (cal_done) begin
    out_pop <= 0;
    if (!out_empty) begin
      out_pop <= 1;
      if (expq.size() == 0) chk(0, "unexpected word");
      else begin
        exp_t e;
        e = expq.pop_front();
        chk(out_word.trailer == e.trailer && out_word.time16 == e.val && out_word.channel == 7'd5,
            "word");
        if (e.trailer) n_events++; else n_hits++;
      end
    end
  end

  initial begin
    longint j;
    repeat (4) @(posedge clocks[0]);
    #1 rst = 0;
    // calibration hit, read by hand before the reader starts
    j = now_bin() + 200;
    pulse(j, 12);
    repeat (20) @(posedge clocks[0]);
    @(negedge clocks[0]);
    trig = '{artificial: 1'b0, tag: 8'd0, win_low: coarse_time - 14'd40, win_high: coarse_time - 14'd1};
    trig_valid = 1;
    @(negedge clocks[0]); trig_valid = 0;
    wait (!out_empty); @(negedge clocks[0]);
    begin
      longint o;
      o = longint'(out_word.time16) - j;
      o = o - ((o + j) / 65536) * 65536;
      out_pop = 1; @(negedge clocks[0]); out_pop = 0;
      wait (!out_empty); @(negedge clocks[0]);
      chk(out_word.trailer, "calibration trailer");
      out_pop = 1; @(negedge clocks[0]); out_pop = 0;
      e_bin.delete();
      offset = o;
      cal_done = 1;
    end
    fork
      // 15 MHz pulse train
      begin
        longint t;
        t = now_bin() + 50;
        t_first = t;
        for (int n = 0; n < N_PULSES; n++) begin
          int g;
          g = 20 + int'(-146.0 * $ln(($urandom_range(1, 1000000)) / 1000000.0));
          t += longint'(g);
          pulse(t, $urandom_range(8, 14));
        end
        t_last = t;
        stim_done = 1;
      end
      // triggers with their expected answers
      begin
        int tag;
        tag = 1;
        while (!stim_done) begin
          logic [13:0] lo, hi;
          repeat ($urandom_range(100, 3000)) @(posedge clocks[0]);
          @(negedge clocks[0]);
          lo = coarse_time - LAT;
          hi = lo + GATE;
          begin
            int k;
            k = 0;
            foreach (e_bin[i]) begin
              longint ts;
              logic [13:0] c, dl, dh;
              ts = e_bin[i] + offset;
              c  = 14'(ts >> 3);
              dl = c - lo; dh = c - hi;
              if (!dl[13] && (dh[13] || dh == 0)) begin
                expq.push_back('{trailer: 1'b0, val: 16'(ts)});
                k++;
              end
            end
            if (k == 0) n_empty++;
          end
          expq.push_back('{trailer: 1'b1, val: 16'(tag[7:0])});
          trig = '{artificial: 1'b0, tag: 8'(tag), win_low: lo, win_high: hi};
          trig_valid = 1;
          @(negedge clocks[0]); trig_valid = 0;
          tag++;
          while (e_bin.size() > 0 && e_bin[0] < now_bin() - 8 * 400) void'(e_bin.pop_front());
        end
      end
    join
    repeat (5000) @(posedge clocks[0]);
    begin
      real rate_mhz;
      rate_mhz = N_PULSES / ((t_last - t_first) * TAU * 1.0e-6);
      $display("input rate %0.2f MHz, events %0d (%0d empty), hits read %0d, lost %0d",
               rate_mhz, n_events, n_empty, n_hits, n_lost);
      chk(rate_mhz > 14.0 && rate_mhz < 16.0, "input rate near 15 MHz");
    end
    chk(expq.size() == 0, "all expected words read");
    chk(n_lost == 0, "no hit lost");
    chk(n_ovf == 0, "no trigger FIFO overflow");
    chk(n_events > 100, "enough triggers");
    chk(n_hits > 500, "enough matched hits");
    chk(n_empty > 0, "some windows empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
