// tb_clock_counter: checks that the coarse counter clears on reset, counts one
// per clock and wraps from 2^14-1 to 0.
`timescale 1ps/1ps
module tb_clock_counter;
  logic clk = 0, rst = 1;
  logic [13:0] coarse_time;
  int checks = 0, failures = 0;
  clock_counter dut (.clk, .rst, .coarse_time);
  always #1608 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp;
    repeat (3) @(posedge clk);
    #1 checks++; if (coarse_time != 0) failures++;
    rst = 0;
    exp = 0;
    for (int n = 1; n <= 20000; n++) begin
      @(posedge clk); #1;
      exp = (exp + 1) % 16384;
      checks++;
      if (coarse_time != 14'(exp)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: got %0d exp %0d", n, coarse_time, exp);
      end
    end
    rst = 1; @(posedge clk); #1;
    checks++; if (coarse_time != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
