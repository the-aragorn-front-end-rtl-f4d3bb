// tb_event_builder: labels are pushed for 60 triggers and a concentrated data
// stream with 0..5 hits per event is offered, with random gaps so that the
// serial transmitter sometimes stops SCK inside a package. A receiver model
// on SCK/SDO/SFR reassembles the packages; each must be H0, H1, the hit words
// in order and a trailer with the hit count, built from the labels of the
// same trigger. One event carries a wrong tag and must have tag_error set in
// its trailer. The package duration is checked against 64 clocks per word.
`timescale 1ps/1ps
module tb_event_builder;
  import tdc_pkg::*;
  logic clk = 0, rst = 1, label_valid = 0, in_empty, in_pop, sck, sdo, sfr, label_overflow;
  logic [19:0] tcs_event_no = 0;
  logic [10:0] tcs_spill_no = 0;
  logic [4:0]  tcs_event_type = 0;
  logic [7:0]  tag = 0;
  dword_t in_word;
  dword_t sq[$];
  logic [31:0] expw[$][$];
  int checks = 0, failures = 0, n_hold = 0;

  event_builder dut (.clk, .rst, .label_valid, .tcs_event_no, .tcs_spill_no, .tcs_event_type, .tag,
    .in_word, .in_empty, .in_pop, .sck, .sdo, .sfr, .label_overflow);
  serial_rx_model rx (.sck, .sdo, .sfr);
  always #1608 clk = ~clk;

  task automatic upd();
    in_empty = (sq.size() == 0);
    in_word  = in_empty ? '0 : sq[0];
  endtask

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

  dword_t pending[$];
  initial begin
    upd();
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int e = 0; e < 60; e++) begin
      logic [31:0] w[$];
      int nh;
      w.delete();
      // labels for this trigger; at most 8 events outstanding
      wait (expw.size() - rx.pkgs.size() < 8);
      @(negedge clk);
      tcs_event_no = 20'($urandom); tcs_spill_no = 11'($urandom); tcs_event_type = 5'($urandom);
      tag = 8'(e); label_valid = 1;
      w.push_back({4'hA, 1'b0, tcs_event_type, tcs_spill_no, 3'b0, 8'(e)});
      w.push_back({4'hB, 8'b0, tcs_event_no});
      @(negedge clk); label_valid = 0;
      nh = $urandom_range(0, 5);
      for (int h = 0; h < nh; h++) begin
        dword_t d;
        d = '0; d.channel = 7'($urandom); d.trailing = 1'($urandom); d.time16 = 16'($urandom);
        pending.push_back(d);
        w.push_back({4'h1, 3'b0, d.trailing, 1'b0, d.channel, d.time16});
      end
      begin
        dword_t t;
        t = '0; t.trailer = 1; t.time16 = 16'((e == 33) ? 99 : e);
        pending.push_back(t);
        w.push_back({4'hC, 3'b0, (e == 33), 8'b0, 16'(nh)});
      end
      expw.push_back(w);
    end
  end

  // offer the stream word by word with random gaps
  always @(posedge clk) if (!rst) begin
    if (in_pop) void'(sq.pop_front());
    if (pending.size() > 0 && $urandom_range(0, 999) < ($time / 3216 / 5000 % 2 ? 5 : 40)) sq.push_back(pending.pop_front());
    #1 upd();
    if (dut.u_tx.state == 2) n_hold++;
  end

  initial begin
    longint t0, t1;
    int nw;
    wait (!rst);
    for (int e = 0; e < 60; e++) begin
      @(posedge sfr); t0 = $time;
      @(negedge sfr); t1 = $time;
      #1;
      nw = rx.pkgs[e].size();
      chk(nw == expw[e].size(), "package length");
      for (int i = 0; i < nw && i < expw[e].size(); i++)
        chk(rx.pkgs[e][i] == expw[e][i], $sformatf("event %0d word %0d", e, i));
      if (nw == 3) chk((t1 - t0) >= nw * 64 * 3216 - 2 * 3216, "duration");
    end
    chk(rx.bad_bits == 0, "whole words");
    chk(n_hold > 0, "SCK hold coverage");
    chk(!label_overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
