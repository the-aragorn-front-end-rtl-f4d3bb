// tdc_register: the sampling register of one TDC channel.
//
// The input is fed to eight edge-triggered flip-flops; flip-flop i is clocked
// by phase i of the multiphase sampling clock, which lags phase 0 by
// i*tau, tau = 1/(8f). Together they take eight samples of the input per
// sampling-clock period, one per 400 ps bin. All eight samples are then
// registered once on clocks[0] so that the encoder sees one snapshot per
// period: q_sync[i] is the input level at time (T - 8*tau + i*tau) for the
// clocks[0] edge T that loaded it.
//
// The eight flip-flops and their phase clocks follow the paper. The single
// clocks[0] resynchronisation stage is this design's choice (the paper only
// says the samples are encoded "after synchronization"). On an FPGA the
// flip-flop placement and input routing must be locked for equal skew; that
// is a constraint matter, not RTL.
module tdc_register #(
  parameter int unsigned PHASES = tdc_pkg::PHASES
) (
  input  logic [PHASES-1:0] clocks,
  input  logic              din,
  output logic [PHASES-1:0] q_sync
);
  logic [PHASES-1:0] q;

  for (genvar i = 0; i < PHASES; i++) begin : g_ff
    logic s;
    always_ff @(posedge clocks[i]) s <= din;
    assign q[i] = s;
  end

  always_ff @(posedge clocks[0]) q_sync <= q;
endmodule
