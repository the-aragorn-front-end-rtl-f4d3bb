// clock_counter: coarse time counter of the TDC-FPGA.
//
// Counts periods of the sampling clock (clocks[0]) and delivers coarse_time,
// which is stored with every hit and with every trigger. It is 14 bits wide
// as in the block diagram; its top bit is the rollover bit that lets the
// trigger matching compare timestamps across a counter wrap. A synchronous
// reset clears it, so that all boards can clear their counters at the same
// clock edge when the constant-latency link delivers a reset command.
// Timing: coarse_time increments by one every clock edge while rst is low.
module clock_counter #(
  parameter int unsigned COARSE_W = tdc_pkg::COARSE_W
) (
  input  logic                clk,
  input  logic                rst,
  output logic [COARSE_W-1:0] coarse_time
);
  always_ff @(posedge clk) begin
    if (rst) coarse_time <= '0;
    else     coarse_time <= coarse_time + 1'b1;
  end
endmodule
