// tb_hit_buffer_ram: writes timestamps at consecutive addresses, reads them
// back with one clock latency, and checks the full flag against the search
// start pointer (full when the next write would hit it), including a write
// in progress. Uses a 64-word buffer.
`timescale 1ps/1ps
module tb_hit_buffer_ram;
  localparam int D = 64;
  logic clk = 0, wr_en = 0, trailing = 0, rd_en = 0;
  logic [5:0] wr_ptr = 0, rd_ptr = 0, start_ptr = 0;
  logic [2:0] fine_time = 0;
  logic [13:0] coarse_time = 0;
  logic [16:0] data_out;
  logic data_trailing, full;
  logic [17:0] model [D];
  int checks = 0, failures = 0;

  hit_buffer_ram #(.DEPTH(D)) dut (.clk, .wr_en, .wr_ptr, .fine_time, .trailing, .coarse_time,
    .rd_en, .rd_ptr, .start_ptr, .data_out, .data_trailing, .full);
  always #1608 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  initial begin
    @(posedge clk); #1;
    for (int rep = 0; rep < 3; rep++)
      for (int a = 0; a < D; a++) begin
        wr_ptr = 6'(a); wr_en = 1;
        fine_time = 3'($urandom); coarse_time = 14'($urandom); trailing = 1'($urandom);
        model[a] = {trailing, coarse_time, fine_time};
        @(posedge clk); #1;
      end
    wr_en = 0;
    for (int k = 0; k < 200; k++) begin
      int a = $urandom_range(0, D - 1);
      rd_ptr = 6'(a); rd_en = 1;
      @(posedge clk); #1;
      rd_en = 0;
      chk({data_trailing, data_out} == model[a], "read data");
      @(posedge clk); #1;
      chk({data_trailing, data_out} == model[a], "read data held");
    end
    // full flag
    for (int k = 0; k < 300; k++) begin
      int w = $urandom_range(0, D - 1), s;
      bit we = 1'($urandom);
      s = (k % 3 == 0) ? (w + 1 + int'(we)) % D : $urandom_range(0, D - 1);
      wr_ptr = 6'(w); start_ptr = 6'(s); wr_en = we;
      #1;
      chk(full == (((w + int'(we) + 1) % D) == s), "full flag");
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
