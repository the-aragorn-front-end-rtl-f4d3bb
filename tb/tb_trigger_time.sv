// tb_trigger_time: triggers at random times against a free-running coarse
// counter; checks window limits (time - latency, + gate, modulo 2^14), the
// tag sequence, and that artificial triggers come exactly art_period cycles
// after the last trigger of either kind.
`timescale 1ps/1ps
module tb_trigger_time;
  import tdc_pkg::*;
  logic clk = 0, rst = 1, trigger = 0;
  logic [13:0] coarse_time = 0, latency = 14'd300, gate = 14'd40;
  logic [15:0] art_period = 16'd50;
  logic trig_valid;
  trig_t trig;
  logic [7:0] event_no;
  int checks = 0, failures = 0, n_art = 0, n_real = 0;

  trigger_time dut (.clk, .rst, .coarse_time, .trigger, .latency, .gate, .art_period,
                    .trig_valid, .trig, .event_no);
  always #1608 clk = ~clk;
  always @(posedge clk) coarse_time <= coarse_time + 1'b1;

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

  initial begin
    int since = 0;
    int unsigned tag = 0;
    bit exp_v, exp_art;
    logic [13:0] exp_low;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 40000; n++) begin
      trigger = ($urandom_range(0, 99) < 2);
      if (n == 20000) begin latency = 14'd10; gate = 14'd5; end   // window ahead of trigger time
      exp_art = !trigger && (since >= art_period - 1);
      exp_v   = trigger || exp_art;
      exp_low = coarse_time - latency;
      @(posedge clk); #1;
      chk(trig_valid == exp_v, "valid");
      if (exp_v) begin
        chk(trig.artificial == exp_art, "artificial flag");
        chk(trig.win_low == exp_low, "win_low");
        chk(trig.win_high == 14'(exp_low + gate), "win_high");
        if (!exp_art) chk(trig.tag == 8'(tag), "tag");
        since = 0;
      end else since++;
      if (trigger) begin tag++; n_real++; end
      if (exp_art) n_art++;
    end
    chk(n_art > 10 && n_real > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
