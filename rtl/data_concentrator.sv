// data_concentrator: merges N event-ordered word streams into one.
//
// Each input is a first-word-fall-through FIFO (a channel output FIFO or the
// buffer of a lower concentrator) holding, per trigger, zero or more hit words
// followed by one trailer word. The concentrator visits the inputs in turn:
// it forwards the hit words of input i to its own event buffer until it meets
// input i's trailer, drops that trailer and moves to input i+1. At the trailer
// of the last input it writes a single trailer with the event tag, so its
// output has the same format as its inputs and concentrators can be cascaded
// into a tree. A trailer whose tag differs from the first input's raises
// tag_error for one cycle.
// Timing: at most one word moves per clock; the buffer being full stalls it.
// The multistage, buffered, cascadable scheme follows the paper; the
// round-robin event-by-event order and the trailer convention are this
// design's own.
module data_concentrator
  import tdc_pkg::*;
#(
  parameter int unsigned N         = 8,
  parameter int unsigned BUF_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  dword_t [N-1:0]  in_word,
  input  logic   [N-1:0]  in_empty,
  output logic   [N-1:0]  in_pop,
  input  logic            out_pop,
  output dword_t          out_word,
  output logic            out_empty,
  output logic            tag_error
);
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;

  logic [SW-1:0]    sel;
  logic [TAG_W-1:0] tag0;
  dword_t           w, buf_din;
  logic             avail, last, buf_full, buf_push, take;

  assign w     = in_word[sel];
  assign avail = !in_empty[sel];
  assign last  = (sel == SW'(N - 1));

  always_comb begin
    buf_din  = w;
    buf_push = 1'b0;
    take     = 1'b0;
    if (avail) begin
      if (!w.trailer) begin
        buf_push = !buf_full;
        take     = !buf_full;
      end else if (last) begin
        buf_push = !buf_full;
        take     = !buf_full;
        buf_din.channel  = '0;
        buf_din.trailing = 1'b0;
      end else begin
        take = 1'b1;
      end
    end
    in_pop      = '0;
    in_pop[sel] = take;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sel       <= '0;
      tag0      <= '0;
      tag_error <= 1'b0;
    end else begin
      tag_error <= 1'b0;
      if (take && w.trailer) begin
        if (sel == '0) tag0 <= w.time16[TAG_W-1:0];
        else if (w.time16[TAG_W-1:0] != tag0) tag_error <= 1'b1;
        sel <= last ? '0 : sel + 1'b1;
      end
    end
  end

  sync_fifo #(.WIDTH(DWORD_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst, .push(buf_push), .din(buf_din), .pop(out_pop),
    .dout(out_word), .empty(out_empty), .full(buf_full), .count()
  );
endmodule
