// enc8b10b_tb_pkg: reference 8b/10b encoder for the link testbenches.
// encode() returns the code group in line order (bit 0 = 'a', sent first)
// and updates the running disparity rd (0 = RD-, 1 = RD+).
package enc8b10b_tb_pkg;
  function automatic logic [5:0] rdm6(input int x);
    logic [5:0] t [32] = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001,
      6'b011001, 6'b111000, 6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100,
      6'b011100, 6'b010111, 6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010,
      6'b011010, 6'b111010, 6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110,
      6'b011110, 6'b101011};
    return t[x];
  endfunction

  function automatic logic [9:0] encode(input logic [7:0] b, input bit k, inout bit rd);
    int x = b[4:0], y = b[7:5];
    logic [5:0] c6;
    logic [3:0] c4;
    logic [9:0] sym;
    bit rd6;
    if (k && x == 28) begin
      sym = {6'b001111, 4'(y == 0 ? 4'b0100 : y == 1 ? 4'b1001 : y == 2 ? 4'b0101 : y == 3 ? 4'b0011 :
                           y == 4 ? 4'b0010 : y == 5 ? 4'b1010 : y == 6 ? 4'b0110 : 4'b1000)};
      if (rd) sym = ~sym;
    end else begin
      c6 = rdm6(x);
      if (rd && ($countones(c6) != 3 || x == 7)) c6 = ~c6;
      rd6 = ($countones(c6) != 3) ? ~rd : rd;
      unique case (y)
        0: c4 = 4'b1011;
        1: c4 = 4'b1001;
        2: c4 = 4'b0101;
        3: c4 = 4'b1100;
        4: c4 = 4'b1101;
        5: c4 = 4'b1010;
        6: c4 = 4'b0110;
        default: c4 = ((!rd6 && (x == 17 || x == 18 || x == 20)) || (rd6 && (x == 11 || x == 13 || x == 14)) || k)
                      ? 4'b0111 : 4'b1110;
      endcase
      if (rd6 && ($countones(c4) != 2 || y == 3)) c4 = ~c4;
      sym = {c6, c4};
    end
    if ($countones(sym) != 5) rd = ~rd;
    return {<<{sym}};
  endfunction
endpackage
