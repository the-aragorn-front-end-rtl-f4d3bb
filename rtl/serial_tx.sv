// serial_tx: source-synchronous serial transmitter (SCK, SDO, SFR).
//
// Sends 32-bit words MSB first. SCK is a forwarded clock at half the logic
// clock rate; SDO changes after the falling SCK edge and is stable at the
// rising edge, where the receiver samples it. SFR (frame) is high from the
// first bit of a package to its last bit; the word flagged tx_last ends the
// package and SFR then drops for at least one SCK period. If the next word
// of a package is not ready, SCK stops (low) with SFR kept high, so a
// receiver only ever sees valid bits on rising SCK edges.
// Handshake: a word moves when tx_valid and tx_ready are both high.
// The three signal names are the paper's; bit order, word size, framing and
// clock ratio are this design's choices.
module serial_tx #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         tx_valid,
  input  logic [W-1:0] tx_word,
  input  logic         tx_last,
  output logic         tx_ready,
  output logic         sck,
  output logic         sdo,
  output logic         sfr
);
  typedef enum logic [1:0] {T_IDLE, T_SHIFT, T_HOLD, T_GAP} tstate_e;

  tstate_e                state;
  logic [W-1:0]           sh;
  logic [$clog2(W)-1:0]   cnt;
  logic                   last_word, word_done;

  assign word_done = (state == T_SHIFT) && sck && (cnt == '0);
  assign tx_ready  = (state == T_IDLE) || (state == T_HOLD) || (word_done && !last_word);
  assign sdo       = sh[W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= T_IDLE;
      sh        <= '0;
      cnt       <= '0;
      sck       <= 1'b0;
      sfr       <= 1'b0;
      last_word <= 1'b0;
    end else begin
      unique case (state)
        T_IDLE, T_HOLD: begin
          sck <= 1'b0;
          if (tx_valid) begin
            sh        <= tx_word;
            cnt       <= $clog2(W)'(W - 1);
            last_word <= tx_last;
            sfr       <= 1'b1;
            state     <= T_SHIFT;
          end
        end
        T_SHIFT: begin
          sck <= ~sck;
          if (sck) begin                      // falling SCK edge
            if (cnt != '0) begin
              sh  <= sh << 1;
              cnt <= cnt - 1'b1;
            end else if (last_word) begin
              sfr   <= 1'b0;
              state <= T_GAP;
            end else if (tx_valid) begin
              sh        <= tx_word;
              cnt       <= $clog2(W)'(W - 1);
              last_word <= tx_last;
            end else begin
              state <= T_HOLD;
            end
          end
        end
        T_GAP: begin
          sck <= ~sck;
          if (sck) state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
