// tb_tdc_register: drives the eight-phase clock (period 3216 ps, phase step
// 402 ps) and an input whose edges fall in the middle of chosen bins; checks
// every resynchronised snapshot against the input level at the eight sample
// instants of the previous clocks[0] period.
`timescale 1ps/1ps
module tb_tdc_register;
  localparam int P = 3216, TAU = 402;
  logic [7:0] clocks = '0;
  logic din = 0;
  logic [7:0] q_sync;
  int checks = 0, failures = 0;
  // input edge list: times and new levels
  longint t_edge[$];
  bit     v_edge[$];

  tdc_register dut (.clocks, .din, .q_sync);

  for (genvar i = 0; i < 8; i++) begin : g_clk
    initial begin
      #(i * TAU);
      forever begin clocks[i] = 1; #(P/2); clocks[i] = 0; #(P - P/2); end
    end
  end

  function automatic bit level_at(longint t);
    bit v = 0;
    foreach (t_edge[k]) if (t_edge[k] <= t) v = v_edge[k];
    return v;
  endfunction

  initial begin
    #(P * 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input: toggle at random mid-bin positions
  initial begin
    longint t = 10 * P + TAU / 2;
    bit v = 0;
    for (int n = 0; n < 300; n++) begin
      t += longint'($urandom_range(1, 20)) * TAU;
      v = ~v;
      t_edge.push_back(t);
      v_edge.push_back(v);
    end
    foreach (t_edge[k]) begin
      #(t_edge[k] - $time);
      din = v_edge[k];
    end
  end

  initial begin
    int edges_seen = 0;
    @(posedge clocks[0]);
    @(posedge clocks[0]);
    forever begin
      longint T;
      @(posedge clocks[0]);
      T = $time;
      #1;
      if (T > 12 * P && T < t_edge[t_edge.size()-1] + 2 * P) begin
        logic [7:0] exp;
        for (int i = 0; i < 8; i++) exp[i] = level_at(T - P + i * TAU);
        checks++;
        if (exp != q_sync) begin
          failures++;
          if (failures < 10) $display("%0t got %b exp %b", T, q_sync, exp);
        end
        if (exp != '0 && exp != '1) edges_seen++;
      end
      if (T > t_edge[t_edge.size()-1] + 3 * P) begin
        checks++;
        if (edges_seen < 100) failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
