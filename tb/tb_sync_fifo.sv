// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and the occupancy count.
`timescale 1ps/1ps
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst = 1, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int pushes_when_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst, .push, .din, .pop, .dout, .empty, .full, .count);
  always #1608 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t %s", $time, what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 5000; n++) begin
      // compare state before the edge
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(count == 4'(q.size()), "count");
      if (q.size() > 0) chk(dout == q[0], "data");
      push = ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 35));
      din  = W'($urandom);
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < 50);
      @(posedge clk);
      begin
        bit acc;
        acc = push && (q.size() < D);
        if (push && !acc) pushes_when_full++;
        if (pop) void'(q.pop_front());
        if (acc) q.push_back(din);
      end
      #1;
    end
    chk(pushes_when_full > 0, "full never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
