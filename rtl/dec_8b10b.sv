// dec_8b10b: 8b/10b decoder for the 20-bit parallel receive word.
//
// The uplink receiver bypasses the transceiver's own word aligner and 8b/10b
// decoder so that its latency is fixed; alignment (comma_align) and decoding
// are done in the FPGA fabric instead. This module decodes the two 10-bit
// symbols of each 20-bit word (symbol 0 in bits [9:0], received first; within
// a symbol bit 0 is code bit 'a', the first on the line) into two bytes and
// two K (control) flags, using the standard 5b/6b and 3b/4b code tables.
// A code group that is not in the tables sets code_err. Running disparity is
// not checked. Timing: one register stage, outputs one clock after rx_data.
// The paper states that decoding is moved into the fabric; the tables are the
// standard 8b/10b code.
module dec_8b10b (
  input  logic        clk,
  input  logic [19:0] rx_data,
  output logic [15:0] data,
  output logic [1:0]  is_k,
  output logic        code_err
);
  typedef struct packed {
    logic [7:0] d;
    logic       k;
    logic       err;
  } sym_t;

  function automatic sym_t dec_sym(input logic [9:0] s);
    logic [5:0] s6;
    logic [3:0] s4, s4k;
    logic [4:0] x;
    logic [2:0] y;
    logic       e6, e4, k28, kx7;
    s6 = {s[0], s[1], s[2], s[3], s[4], s[5]};   // abcdei
    s4 = {s[6], s[7], s[8], s[9]};               // fghj
    e6 = 1'b0;
    x  = '0;
    k28 = 1'b0;
    unique case (s6)
      6'b100111, 6'b011000: x = 5'd0;
      6'b011101, 6'b100010: x = 5'd1;
      6'b101101, 6'b010010: x = 5'd2;
      6'b110001:            x = 5'd3;
      6'b110101, 6'b001010: x = 5'd4;
      6'b101001:            x = 5'd5;
      6'b011001:            x = 5'd6;
      6'b111000, 6'b000111: x = 5'd7;
      6'b111001, 6'b000110: x = 5'd8;
      6'b100101:            x = 5'd9;
      6'b010101:            x = 5'd10;
      6'b110100:            x = 5'd11;
      6'b001101:            x = 5'd12;
      6'b101100:            x = 5'd13;
      6'b011100:            x = 5'd14;
      6'b010111, 6'b101000: x = 5'd15;
      6'b011011, 6'b100100: x = 5'd16;
      6'b100011:            x = 5'd17;
      6'b010011:            x = 5'd18;
      6'b110010:            x = 5'd19;
      6'b001011:            x = 5'd20;
      6'b101010:            x = 5'd21;
      6'b011010:            x = 5'd22;
      6'b111010, 6'b000101: x = 5'd23;
      6'b110011, 6'b001100: x = 5'd24;
      6'b100110:            x = 5'd25;
      6'b010110:            x = 5'd26;
      6'b110110, 6'b001001: x = 5'd27;
      6'b001110:            x = 5'd28;
      6'b101110, 6'b010001: x = 5'd29;
      6'b011110, 6'b100001: x = 5'd30;
      6'b101011, 6'b010100: x = 5'd31;
      6'b001111, 6'b110000: begin x = 5'd28; k28 = 1'b1; end
      default:              e6 = 1'b1;
    endcase
    e4 = 1'b0;
    y  = '0;
    if (k28) begin
      s4k = (s6 == 6'b110000) ? ~s4 : s4;        // table for the 001111 form
      unique case (s4k)
        4'b0100: y = 3'd0;
        4'b1001: y = 3'd1;
        4'b0101: y = 3'd2;
        4'b0011: y = 3'd3;
        4'b0010: y = 3'd4;
        4'b1010: y = 3'd5;
        4'b0110: y = 3'd6;
        4'b1000: y = 3'd7;
        default: e4 = 1'b1;
      endcase
    end else begin
      unique case (s4)
        4'b1011, 4'b0100:                   y = 3'd0;
        4'b1001:                            y = 3'd1;
        4'b0101:                            y = 3'd2;
        4'b1100, 4'b0011:                   y = 3'd3;
        4'b1101, 4'b0010:                   y = 3'd4;
        4'b1010:                            y = 3'd5;
        4'b0110:                            y = 3'd6;
        4'b1110, 4'b0001, 4'b0111, 4'b1000: y = 3'd7;
        default:                            e4 = 1'b1;
      endcase
    end
    // K.23.7, K.27.7, K.29.7, K.30.7: 6b code followed by the "wrong" 7 form
    kx7 = (y == 3'd7) && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30) &&
          (($countones(s6) == 4 && s4 == 4'b1000) || ($countones(s6) == 2 && s4 == 4'b0111));
    return '{d: {y, x}, k: k28 | kx7, err: e6 | e4};
  endfunction

  sym_t s0, s1;
  assign s0 = dec_sym(rx_data[9:0]);
  assign s1 = dec_sym(rx_data[19:10]);

  always_ff @(posedge clk) begin
    data     <= {s1.d, s0.d};
    is_k     <= {s1.k, s0.k};
    code_err <= s0.err | s1.err;
  end
endmodule
