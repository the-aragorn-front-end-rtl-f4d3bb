// tb_detect_encode: feeds random 8-sample snapshots; a reference model walks
// the sample stream bit by bit, finds the first qualifying edge of each cycle
// for the configured edge mode and predicts wr_en, fine time, edge flag and
// write pointer one clock later. Also checks that a full hit buffer turns a
// write into a 'lost' pulse. All four edge modes are used.
`timescale 1ps/1ps
module tb_detect_encode;
  import tdc_pkg::*;
  logic clk = 0, rst = 1, full = 0;
  logic [7:0] q_sync = '0;
  edge_mode_e edge_mode = EDGE_LEADING;
  logic [2:0] fine_time;
  logic trailing, wr_en, lost;
  logic [10:0] wr_ptr;
  int checks = 0, failures = 0, n_lost = 0, n_both_trail = 0;

  detect_encode dut (.clk, .rst, .q_sync, .edge_mode, .full,
                     .fine_time, .trailing, .wr_en, .wr_ptr, .lost);
  always #1608 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%t FAIL %s", $time, what); end
  endtask

  initial begin
    bit prev = 0;
    bit e_found, e_trail;
    int e_bin;
    int unsigned ptr = 0;
    bit e_full;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 8000; n++) begin
      edge_mode = edge_mode_e'((n / 2000));
      if (n % 2000 == 0) edge_mode = edge_mode_e'(n / 2000);
      // slowly varying input: a few transitions per snapshot
      for (int i = 0; i < 8; i++) q_sync[i] = ($urandom_range(0, 99) < 80) ? (i == 0 ? prev : q_sync[i-1]) : ~(i == 0 ? prev : q_sync[i-1]);
      full = ($urandom_range(0, 99) < 5);
      // reference model
      e_found = 0; e_trail = 0; e_bin = 0;
      begin
        bit last;
        last = prev;
        for (int i = 0; i < 8; i++) begin
          bit r, f;
          r = q_sync[i] & ~last;
          f = ~q_sync[i] & last;
          if (!e_found && ((r && edge_mode[0]) || (f && edge_mode[1]))) begin
            e_found = 1; e_trail = f; e_bin = i;
          end
          last = q_sync[i];
        end
      end
      e_full = full;
      prev = q_sync[7];
      @(posedge clk); #1;
      chk(wr_en == (e_found && !e_full), "wr_en");
      chk(lost == (e_found && e_full), "lost");
      chk(wr_ptr == 11'(ptr), "wr_ptr");
      if (e_found) begin
        chk(fine_time == 3'(e_bin), "fine");
        chk(trailing == e_trail, "edge flag");
        if (edge_mode == EDGE_BOTH && e_trail) n_both_trail++;
      end
      if (lost) n_lost++;
      if (wr_en) ptr = (ptr + 1) % 2048;
    end
    chk(n_lost > 0 && n_both_trail > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
