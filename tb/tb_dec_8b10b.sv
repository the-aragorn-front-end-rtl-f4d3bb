// tb_dec_8b10b: checks textbook code groups (K28.5, D21.5, D0.0), then
// decodes a long random stream of data bytes and K28.x / K23.7 / K27.7 /
// K29.7 / K30.7 control symbols produced by a reference encoder with running
// disparity, and checks that corrupted code groups (all zeros, all ones)
// raise code_err.
`timescale 1ps/1ps
module tb_dec_8b10b;
  import enc8b10b_tb_pkg::*;
  logic clk = 0;
  logic [19:0] rx_data = '0;
  logic [15:0] data;
  logic [1:0] is_k;
  logic code_err;
  int checks = 0, failures = 0;

  dec_8b10b dut (.clk, .rx_data, .data, .is_k, .code_err);
  always #1608 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  function automatic logic [9:0] ln(input logic [9:0] abcdeifghj);
    return {<<{abcdeifghj}};
  endfunction

  initial begin
    bit rd = 0;
    logic [7:0] b0, b1;
    bit k0, k1;
    logic [7:0] kx7 [4] = '{8'hF7, 8'hFB, 8'hFD, 8'hFE};
    // textbook code groups
    @(negedge clk); rx_data = {ln(10'b1010101010), ln(10'b0011111010)};   // D21.5, K28.5-
    @(negedge clk); chk(data == 16'hB5BC && is_k == 2'b01 && !code_err, "K28.5/D21.5");
    rx_data = {ln(10'b0110001011), ln(10'b1001110100)};                    // D0.0+, D0.0-
    @(negedge clk); chk(data == 16'h0000 && is_k == 2'b00 && !code_err, "D0.0");
    rx_data = {ln(10'b1100000101), ln(10'b0011111001)};                    // K28.5+, K28.1-
    @(negedge clk); chk(data == 16'hBC3C && is_k == 2'b11 && !code_err, "K28.1/K28.5");
    for (int n = 0; n < 20000; n++) begin
      k0 = ($urandom_range(0, 9) == 0); k1 = ($urandom_range(0, 9) == 0);
      b0 = k0 ? (($urandom_range(0, 1) == 0) ? {3'($urandom), 5'd28} : kx7[$urandom_range(0, 3)]) : 8'($urandom);
      b1 = k1 ? (($urandom_range(0, 1) == 0) ? {3'($urandom), 5'd28} : kx7[$urandom_range(0, 3)]) : 8'($urandom);
      rx_data[9:0]   = encode(b0, k0, rd);
      rx_data[19:10] = encode(b1, k1, rd);
      @(negedge clk);
      chk(data == {b1, b0} && is_k == {k1, k0} && !code_err, $sformatf("stream %h %h k%b%b", b1, b0, k1, k0));
    end
    rx_data = {10'b0, ln(10'b0011111010)};
    @(negedge clk); chk(code_err, "zeros");
    rx_data = {ln(10'b0011111010), 10'h3FF};
    @(negedge clk); chk(code_err, "ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
