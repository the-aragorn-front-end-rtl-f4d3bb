// mmcm_model: behavioural model of the clock manager (two MMCMs) that makes
// the eight-phase sampling clock. Phase i rises i*PERIOD_PS/8 after phase 0;
// phase 0 rises at time 0. Only for simulation.
`timescale 1ps/1ps
module mmcm_model #(
  parameter int PERIOD_PS = 3216
) (
  output logic [7:0] clocks
);
  initial clocks = '0;
  for (genvar i = 0; i < 8; i++) begin : g_ph
    initial begin
      #(i * PERIOD_PS / 8);
      forever begin
        clocks[i] = 1'b1;
        #(PERIOD_PS / 2);
        clocks[i] = 1'b0;
        #(PERIOD_PS - PERIOD_PS / 2);
      end
    end
  end
endmodule
