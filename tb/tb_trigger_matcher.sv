// tb_trigger_matcher: the matcher runs against a 64-word hit-buffer model
// (one clock read latency) filled with random hits, while real and
// artificial triggers are queued in a trigger-FIFO model. For each real
// trigger the expected hits are those written with coarse time inside
// [t - latency, t - latency + gate], worked out on absolute cycle numbers;
// the test runs past several coarse-counter wraps. The output FIFO reports
// full at random to exercise stalls. Also checks that the hit buffer never
// overwrote a word at or after the search start address.
`timescale 1ps/1ps
module tb_trigger_matcher;
  import tdc_pkg::*;
  localparam int AW = 6, D = 64, LAT = 100, GATE = 30;
  logic clk = 0, rst = 1;
  logic [13:0] coarse_time;
  logic trig_empty = 1, trig_pop, rd_en, hb_trailing, out_full = 0, out_push, busy;
  trig_t trig_in = '0;
  logic [AW-1:0] wr_ptr = 0, rd_ptr, start_ptr;
  logic [16:0] hb_data;
  dword_t out_word;
  int checks = 0, failures = 0;
  longint cyc = 0;

  // hit buffer model
  logic [17:0] mem [D];
  logic [17:0] rdw;
  longint hit_abs [D];
  always_ff @(posedge clk) if (rd_en) rdw <= mem[rd_ptr];
  assign hb_data = rdw[16:0];
  assign hb_trailing = rdw[17];

  // trigger FIFO model
  trig_t tq[$];
  longint tq_abs[$];
  always @(negedge clk) begin
    #1;
    trig_empty = (tq.size() == 0);
    trig_in = trig_empty ? '0 : tq[0];
  end

  trigger_matcher #(.HB_AW(AW)) dut (.clk, .rst, .ch_id(7'd5), .coarse_time,
    .trig_empty, .trig_in, .trig_pop, .wr_ptr, .rd_en, .rd_ptr, .start_ptr, .hb_data, .hb_trailing,
    .out_full, .out_push, .out_word, .busy);

  always #1608 clk = ~clk;
  assign coarse_time = 14'(cyc);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  // all written hits, absolute time in bins, with edge flag
  longint hits_t[$];
  bit     hits_e[$];
  // expected words per real trigger
  longint exp_lo[$], exp_hi[$];
  int     n_real = 0, n_done = 0, n_matched = 0, n_stall = 0, n_art = 0;
  longint got_t[$];
  bit     got_e[$];

  always @(posedge clk) if (!rst) begin
    // output side
    if (out_push) begin
      if (out_word.trailer) begin
        longint lo, hi;
        int k;
        k = 0;
        lo = exp_lo.pop_front(); hi = exp_hi.pop_front();
        chk(out_word.channel == 7'd5, "channel");
        foreach (hits_t[i]) if (hits_t[i] / 8 >= lo && hits_t[i] / 8 <= hi) begin
          chk(k < got_t.size() && got_t[k] == (hits_t[i] & 16'hFFFF) && got_e[k] == hits_e[i], "hit");
          k++;
        end
        chk(k == got_t.size(), "hit count");
        chk(out_word.time16[7:0] == 8'(n_done), "tag");
        n_matched += k;
        n_done++;
        got_t.delete(); got_e.delete();
      end else begin
        got_t.push_back(out_word.time16);
        got_e.push_back(out_word.trailing);
      end
    end
    if (out_full && busy) n_stall++;
    if (trig_pop) void'(tq.pop_front());
  end

  initial begin
    int since_art = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 60000; n++) begin
      @(negedge clk);
      cyc++;
      out_full = ($urandom_range(0, 99) < 20);
      // a hit
      if ($urandom_range(0, 99) < 6) begin
        if (AW'(wr_ptr + 1'b1) != start_ptr) begin
          logic [2:0] f;
          bit e;
          f = 3'($urandom); e = 1'($urandom);
          mem[wr_ptr] = {e, 14'(cyc), f};
          hits_t.push_back(cyc * 8 + f);
          hits_e.push_back(e);
          wr_ptr = wr_ptr + 1'b1;
        end
      end
      // a trigger
      if (n > 200 && $urandom_range(0, 999) < 8) begin
        trig_t t;
        t.artificial = 0; t.tag = 8'(n_real);
        t.win_low = 14'(cyc - LAT); t.win_high = 14'(cyc - LAT + GATE);
        tq.push_back(t);
        exp_lo.push_back(cyc - LAT); exp_hi.push_back(cyc - LAT + GATE);
        n_real++;
        since_art = 0;
      end else if (++since_art == 150) begin
        trig_t t;
        t.artificial = 1; t.tag = 0;
        t.win_low = 14'(cyc - LAT); t.win_high = 14'(cyc - LAT + GATE);
        tq.push_back(t);
        n_art++;
        since_art = 0;
      end
      // drop hit history older than anything still needed
      while (hits_t.size() > 200) begin void'(hits_t.pop_front()); void'(hits_e.pop_front()); end
    end
    repeat (2000) @(posedge clk);
    chk(n_done == n_real, "all triggers answered");
    chk(n_real > 300 && n_matched > 300 && n_stall > 0 && n_art > 10, "coverage");
    $display("real=%0d art=%0d matched=%0d", n_real, n_art, n_matched);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
