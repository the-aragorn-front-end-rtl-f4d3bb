// hit_buffer_ram: dual-port hit buffer of one TDC channel (2k x 18).
//
// Port A writes a timestamp at the encoder's write pointer: the 3-bit fine
// time, the 14-bit coarse time of the write cycle (its top bit being the
// rollover bit) and the edge flag. Port B is read by the trigger matching at
// its read pointer, with one clock of latency as in a block RAM. Because both
// ports work at once, digitisation and readout never block each other.
//
// The buffer is circular. It is full when the next write would land on the
// search start address of the trigger matching (older words up to that
// address may be overwritten, newer ones may not); one word is kept free to
// tell full from empty. 'full' is combinational from the pointers and
// accounts for a write in progress.
// The memory size and the full condition follow the paper; the one-free-word
// rule and the read latency are this design's choices.
module hit_buffer_ram
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = tdc_pkg::HB_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_ptr,
  input  logic [FINE_W-1:0]   fine_time,
  input  logic                trailing,
  input  logic [COARSE_W-1:0] coarse_time,
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_ptr,
  input  logic [AW-1:0]       start_ptr,
  output logic [TS_W-1:0]     data_out,
  output logic                data_trailing,
  output logic                full
);
  hb_word_t mem [DEPTH];
  hb_word_t rd_word;
  logic [AW-1:0] next_wr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= '{trailing: trailing, coarse: coarse_time, fine: fine_time};
    if (rd_en) rd_word <= mem[rd_ptr];
  end

  assign data_out      = {rd_word.coarse, rd_word.fine};
  assign data_trailing = rd_word.trailing;
  assign next_wr       = wr_ptr + AW'(wr_en);
  assign full          = (AW'(next_wr + 1'b1) == start_ptr);
endmodule
