// tb_data_concentrator: four input FIFO models are filled with random events
// (0..3 hit words, then a trailer with the event tag). The output must hold,
// per event, the hit words of input 0, then 1, 2, 3 in their original order,
// followed by exactly one trailer with the tag. The output is popped at
// random to make the buffer fill and stall the merge. A wrong tag on one
// input must raise tag_error.
`timescale 1ps/1ps
module tb_data_concentrator;
  import tdc_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1, out_pop = 0, out_empty, tag_error;
  dword_t [N-1:0] in_word;
  logic [N-1:0] in_empty, in_pop;
  dword_t out_word;
  dword_t iq[N][$];
  dword_t expq[$];
  int checks = 0, failures = 0, n_tagerr = 0, n_full_stall = 0, n_events = 0;

  data_concentrator #(.N(N), .BUF_DEPTH(8)) dut (.clk, .rst, .in_word, .in_empty, .in_pop,
    .out_pop, .out_word, .out_empty, .tag_error);
  always #1608 clk = ~clk;

  // the input FIFO heads are refreshed after every change of the queues
  task automatic upd();
    for (int i = 0; i < N; i++) begin
      in_empty[i] = (iq[i].size() == 0);
      in_word[i]  = in_empty[i] ? '0 : iq[i][0];
    end
  endtask
  initial upd();

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

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // build events
    for (int e = 0; e < 300; e++) begin
      for (int i = 0; i < N; i++) begin
        int nh;
        nh = $urandom_range(0, 3);
        for (int h = 0; h < nh; h++) begin
          dword_t w;
          w = '0;
          w.channel = 7'(i * 10 + h); w.trailing = 1'($urandom); w.time16 = 16'($urandom);
          iq[i].push_back(w);
          expq.push_back(w);
        end
        begin
          dword_t t;
          t = '0; t.trailer = 1; t.channel = 7'(i);
          t.time16 = 16'(e % 256);
          if (e == 150 && i == 2) t.time16 = 16'((e + 1) % 256);
          iq[i].push_back(t);
        end
      end
      begin
        dword_t t;
        t = '0; t.trailer = 1; t.time16 = 16'(e % 256);
        expq.push_back(t);
      end
    end
    upd();
    for (int n = 0; n < 20000 && expq.size() > 0; n++) begin
      @(negedge clk);
      out_pop = !out_empty && ($urandom_range(0, 99) < ((n / 1000) % 2 ? 90 : 20));
      if (out_pop) begin
        dword_t e;
        e = expq.pop_front();
        if (e.trailer) begin
          chk(out_word.trailer && out_word.time16[7:0] == e.time16[7:0], "trailer");
          n_events++;
        end else chk(out_word == e, "hit word");
      end
      @(posedge clk);
      if (tag_error) n_tagerr++;
      for (int i = 0; i < N; i++) if (in_pop[i]) void'(iq[i].pop_front());
      #1 upd();
      if (!in_empty[dut.sel] && !in_word[dut.sel].trailer && !in_pop[dut.sel]) n_full_stall++;
    end
    out_pop = 0;
    @(posedge clk);
    chk(expq.size() == 0 && n_events == 300, "all events");
    chk(n_tagerr == 1, "tag error seen once");
    chk(n_full_stall > 0, "stall coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
