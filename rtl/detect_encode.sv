// detect_encode: edge detector and fine-time encoder of one TDC channel.
//
// Each clocks[0] cycle it receives the eight samples of the TDC register.
// Together with the last sample of the previous cycle they form a 9-bit
// thermometer-like window; an edge in bin i is a 0->1 (leading) or 1->0
// (trailing) change between sample i-1 and sample i. The edge mode selects
// which edge types count (leading, trailing or both; changeable at any time).
// The first qualifying edge of the cycle is encoded as its bin number
// (fine_time, 0..7) and written to the hit buffer: the design resolves one hit
// per 3.2 ns clock period, the double-hit resolution of the TDC.
//
// The encoder owns the hit-buffer write pointer. When the hit buffer reports
// full, the hit is dropped and 'lost' pulses instead of wr_en.
// Timing: wr_en/fine_time/trailing/wr_ptr are registered, one clk after the
// snapshot; wr_ptr is the address of the word being written and advances
// after each write.
module detect_encode
  import tdc_pkg::*;
#(
  parameter int unsigned PHASES = tdc_pkg::PHASES,
  parameter int unsigned HB_AW  = tdc_pkg::HB_AW
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [PHASES-1:0]         q_sync,
  input  edge_mode_e                edge_mode,
  input  logic                      full,
  output logic [$clog2(PHASES)-1:0] fine_time,
  output logic                      trailing,
  output logic                      wr_en,
  output logic [HB_AW-1:0]          wr_ptr,
  output logic                      lost
);
  logic                      last;      // sample of the previous cycle's last bin
  logic [PHASES-1:0]         rise, fall, sel;
  logic                      found;
  logic [$clog2(PHASES)-1:0] bin;

  always_comb begin
    logic [PHASES:0] w;
    w = {q_sync, last};
    for (int i = 0; i < PHASES; i++) begin
      rise[i] =  w[i+1] & ~w[i];
      fall[i] = ~w[i+1] &  w[i];
    end
    sel   = (edge_mode[0] ? rise : '0) | (edge_mode[1] ? fall : '0);
    found = |sel;
    bin   = '0;
    for (int i = PHASES - 1; i >= 0; i--)
      if (sel[i]) bin = i[$clog2(PHASES)-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last      <= 1'b0;
      wr_en     <= 1'b0;
      lost      <= 1'b0;
      wr_ptr    <= '0;
      fine_time <= '0;
      trailing  <= 1'b0;
    end else begin
      last <= q_sync[PHASES-1];
      if (wr_en) wr_ptr <= wr_ptr + 1'b1;
      wr_en     <= found & ~full;
      lost      <= found & full;
      fine_time <= bin;
      trailing  <= fall[bin] & edge_mode[1];
    end
  end
endmodule
