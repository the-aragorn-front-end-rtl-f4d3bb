// trigger_matcher: trigger matching of one TDC channel.
//
// It takes one acceptance window at a time from the channel's trigger FIFO.
// Once the window has closed (the coarse counter is at least MARGIN ticks past
// the upper limit, so that every hit inside it has reached the hit buffer)
// it scans the hit buffer from the search start address:
//   - a word older than the lower limit is skipped;
//   - a word inside [win_low, win_high] is copied to the output FIFO with its
//     rollover bit removed;
//   - the scan ends at the first word newer than the window or when the read
//     pointer reaches the write pointer.
// The search start address is then moved to the first word that was not
// older than the window (the first word of the window, if it had any), so
// older words are released and overlapping windows of later triggers still
// find their hits. A real trigger ends with a trailer word carrying its tag;
// an artificial trigger copies nothing and only moves the start address.
//
// Comparisons are done on the 14-bit coarse time including the rollover bit,
// as differences modulo 2^14: a difference with its top bit set is "before".
// This removes the inversion of the comparisons at a counter wrap as long as
// stored hits and windows are within 2^13 ticks (26 us) of each other.
// Timing: 2 clocks per hit-buffer word examined (read, then evaluate); the
// output FIFO being full stalls the scan. The scan rules follow the paper;
// MARGIN, the modulo comparison and the trailer word are this design's own.
// The channel field of every output word is the ch_id input copied through,
// so that the words stay self-describing after the concentrators.
module trigger_matcher
  import tdc_pkg::*;
#(
  parameter int unsigned HB_AW  = tdc_pkg::HB_AW,
  parameter int unsigned MARGIN = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [CH_W-1:0]     ch_id,
  input  logic [COARSE_W-1:0] coarse_time,
  // trigger FIFO
  input  logic                trig_empty,
  input  trig_t               trig_in,
  output logic                trig_pop,
  // hit buffer
  input  logic [HB_AW-1:0]    wr_ptr,
  output logic                rd_en,
  output logic [HB_AW-1:0]    rd_ptr,
  output logic [HB_AW-1:0]    start_ptr,
  input  logic [TS_W-1:0]     hb_data,
  input  logic                hb_trailing,
  // output FIFO
  input  logic                out_full,
  output logic                out_push,
  output dword_t              out_word,
  // status
  output logic                busy
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_READ, S_EVAL, S_END, S_TRAILER} state_e;

  state_e              state;
  trig_t               cur;
  logic [HB_AW-1:0]    new_start;
  logic [COARSE_W-1:0] d_close, d_low, d_high, hit_coarse;
  logic                closed, older, newer;

  assign hit_coarse = hb_data[TS_W-1 -: COARSE_W];
  assign d_close = coarse_time - cur.win_high;
  assign closed  = !d_close[COARSE_W-1] && (d_close >= COARSE_W'(MARGIN));
  assign d_low   = hit_coarse - cur.win_low;
  assign d_high  = hit_coarse - cur.win_high;
  assign older   = d_low[COARSE_W-1];
  assign newer   = !older && !d_high[COARSE_W-1] && (d_high != '0);

  assign trig_pop = (state == S_IDLE) && !trig_empty;
  assign rd_en    = (state == S_READ) && (rd_ptr != wr_ptr);
  assign busy     = (state != S_IDLE);

  always_comb begin
    out_push = 1'b0;
    out_word = '0;
    out_word.channel = ch_id;
    if (state == S_EVAL && !older && !newer && !cur.artificial && !out_full) begin
      out_push          = 1'b1;
      out_word.trailing = hb_trailing;
      out_word.time16   = hb_data[OUT_TS_W-1:0];
    end else if (state == S_TRAILER && !out_full) begin
      out_push         = 1'b1;
      out_word.trailer = 1'b1;
      out_word.time16  = OUT_TS_W'(cur.tag);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      cur       <= '0;
      rd_ptr    <= '0;
      start_ptr <= '0;
      new_start <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!trig_empty) begin
          cur       <= trig_in;
          rd_ptr    <= start_ptr;
          new_start <= start_ptr;
          state     <= S_WAIT;
        end
        S_WAIT: if (closed) state <= S_READ;
        S_READ: state <= (rd_ptr == wr_ptr) ? S_END : S_EVAL;
        S_EVAL: begin
          if (older) begin
            rd_ptr    <= rd_ptr + 1'b1;
            new_start <= rd_ptr + 1'b1;
            state     <= S_READ;
          end else if (newer || cur.artificial) begin
            state <= S_END;
          end else if (!out_full) begin
            rd_ptr <= rd_ptr + 1'b1;
            state  <= S_READ;
          end
        end
        S_END: begin
          start_ptr <= new_start;
          state     <= cur.artificial ? S_IDLE : S_TRAILER;
        end
        S_TRAILER: if (!out_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
