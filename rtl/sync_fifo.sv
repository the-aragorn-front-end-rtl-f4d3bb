// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used three times in the TDC-FPGA: as the per-channel trigger FIFO that
// queues acceptance windows while the trigger matching is busy, as the
// per-channel output FIFO, and as the event buffer of each data concentrator.
// dout shows the oldest word whenever empty is low; pop removes it. A push
// while full is ignored and a pop while empty is ignored; the assertion flags
// the latter, which no user of this FIFO should do. Depths are not given in the paper and are parameters.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign do_push = push & ~full;
  assign do_pop  = pop & ~empty;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));
endmodule
