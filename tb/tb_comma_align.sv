// tb_comma_align: a receiver model deserialises an 8b/10b idle stream
// (K28.1+K28.5 alignment pair, then two data symbols, repeating) at a random
// bit offset chosen anew at every receiver reset; only offset 0 is word
// aligned. Checks: the receiver is held in reset until the jitter attenuator
// locks; the link comes up only when aligned; slave TX reset is released
// only with the link up; several alignment attempts are needed; a loss of
// lock and a burst of code errors each bring the link down and it recovers.
`timescale 1ps/1ps
module tb_comma_align;
  import enc8b10b_tb_pkg::*;
  logic clk = 0, rst = 1, lmk_locked = 0, rx_reset_done = 0, code_err = 0;
  logic [19:0] rx_data = '0;
  logic gtp_rx_reset, link_up, tx_reset;
  logic [7:0] align_attempts;
  int checks = 0, failures = 0, n_up = 0, n_relinks = 0;
  int off = 7;
  bit rd = 0;
  int wcnt = 0;
  logic [39:0] win = '0;

  comma_align #(.RST_CYCLES(4), .SEARCH_CYCLES(16), .ERR_LIMIT(4)) dut (
    .clk, .rst, .lmk_locked, .rx_reset_done, .rx_data, .code_err,
    .gtp_rx_reset, .link_up, .tx_reset, .align_attempts);
  always #1608 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  // transmitter + deserialiser model
  int rst_timer = 0;
  always @(posedge clk) begin
    logic [19:0] w;
    if (wcnt % 2 == 0) begin
      w[9:0]   = encode(8'h3C, 1, rd);
      w[19:10] = encode(8'hBC, 1, rd);
    end else begin
      w[9:0]   = encode(8'($urandom), 0, rd);
      w[19:10] = encode(8'($urandom), 0, rd);
    end
    wcnt++;
    win = {w, win[39:20]};
    if (gtp_rx_reset) begin
      rx_reset_done <= 0;
      rst_timer = 3;
      off = (align_attempts < 3) ? $urandom_range(1, 19) : $urandom_range(0, 3);
    end else if (rst_timer > 0) begin
      rst_timer--;
      if (rst_timer == 0) rx_reset_done <= 1;
    end
    rx_data <= win[off +: 20];
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (50) begin @(posedge clk); #1 chk(gtp_rx_reset && tx_reset && !link_up, "held until lock"); end
    lmk_locked = 1;
    for (int phase = 0; phase < 3; phase++) begin
      int t = 0;
      while (!link_up && t < 20000) begin
        @(posedge clk); #1 t++;
        chk(tx_reset == !link_up, "tx reset held while link down");
      end
      chk(link_up, "link up");
      chk(off == 0, "aligned when up");
      n_up++;
      repeat (100) begin @(posedge clk); #1 chk(link_up && !tx_reset && !gtp_rx_reset, "stays up"); end
      if (phase == 0) begin
        lmk_locked = 0;
        @(posedge clk); #1;
        @(posedge clk); #1 chk(!link_up && gtp_rx_reset && tx_reset, "lock loss");
        repeat (10) @(posedge clk);
        lmk_locked = 1;
      end else if (phase == 1) begin
        code_err = 1;
        repeat (6) @(posedge clk);
        #1 chk(!link_up, "code errors drop link");
        code_err = 0;
      end
    end
    chk(align_attempts >= 3, "several attempts");
    chk(n_up == 3, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
