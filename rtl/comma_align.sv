// comma_align: link start-up and fabric comma detection of the uplink.
//
// The transceiver's own word alignment is bypassed, because aligning by bit
// slips changes the phase of the recovered parallel clock from one start-up
// to the next. Instead this block resets the transceiver receiver until the
// alignment sequence K28.1 followed by K28.5 appears at the fixed position of
// the 20-bit parallel word (K28.1 in bits [9:0], K28.5 in bits [19:10], in
// either running disparity). An idle link carries a comma in every fourth
// symbol, so a correctly aligned receiver finds the sequence within a few
// words and a misaligned one is reset again after SEARCH_CYCLES.
//
// Sequence: hold the receiver in reset until the jitter attenuator reports
// lock; pulse gtp_rx_reset for RST_CYCLES; wait for rx_reset_done; search for
// the sequence; on success raise link_up and release tx_reset of the
// transmitters that retransmit the link to slave boards. Loss of the
// attenuator lock, or ERR_LIMIT consecutive words with code errors, restarts
// the sequence.
// The reset-until-found principle, the K28.1+K28.5 sequence, the lock
// condition and the slave TX release follow the paper; counter lengths and
// the loss-of-link rule are this design's choices.
module comma_align #(
  parameter int unsigned RST_CYCLES    = 16,
  parameter int unsigned SEARCH_CYCLES = 64,
  parameter int unsigned ERR_LIMIT     = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        lmk_locked,
  input  logic        rx_reset_done,
  input  logic [19:0] rx_data,
  input  logic        code_err,
  output logic        gtp_rx_reset,
  output logic        link_up,
  output logic        tx_reset,
  output logic [7:0]  align_attempts
);
  // Code groups as received, bit 0 = first bit on the line ('a').
  function automatic logic [9:0] line(input logic [9:0] abcdeifghj);
    return {<<{abcdeifghj}};
  endfunction

  localparam logic [19:0] SEQ_N = {line(10'b1100000101), line(10'b0011111001)};
  localparam logic [19:0] SEQ_P = {line(10'b0011111010), line(10'b1100000110)};

  typedef enum logic [2:0] {L_WAIT_LOCK, L_RESET, L_WAIT_DONE, L_SEARCH, L_UP} lstate_e;

  lstate_e     state;
  logic [15:0] cnt;
  logic        found;

  assign found        = (rx_data == SEQ_N) || (rx_data == SEQ_P);
  assign gtp_rx_reset = (state == L_WAIT_LOCK) || (state == L_RESET);
  assign link_up      = (state == L_UP);
  assign tx_reset     = (state != L_UP);

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= L_WAIT_LOCK;
      cnt            <= '0;
      align_attempts <= '0;
    end else if (!lmk_locked) begin
      state <= L_WAIT_LOCK;
      cnt   <= '0;
    end else begin
      cnt <= cnt + 1'b1;
      unique case (state)
        L_WAIT_LOCK: begin
          state <= L_RESET;
          cnt   <= '0;
        end
        L_RESET: if (cnt == 16'(RST_CYCLES - 1)) begin
          state <= L_WAIT_DONE;
          cnt   <= '0;
        end
        L_WAIT_DONE: if (rx_reset_done) begin
          state <= L_SEARCH;
          cnt   <= '0;
        end
        L_SEARCH: begin
          if (found) begin
            state <= L_UP;
            cnt   <= '0;
          end else if (cnt == 16'(SEARCH_CYCLES - 1)) begin
            state          <= L_RESET;
            cnt            <= '0;
            align_attempts <= align_attempts + 1'b1;
          end
        end
        L_UP: begin
          if (!code_err) cnt <= '0;
          else if (cnt == 16'(ERR_LIMIT - 1)) begin
            state <= L_RESET;
            cnt   <= '0;
          end
        end
        default: state <= L_WAIT_LOCK;
      endcase
    end
  end
endmodule
