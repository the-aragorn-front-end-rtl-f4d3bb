// serial_rx_model: testbench receiver for the SCK/SDO/SFR link.
// Samples SDO on each rising SCK while SFR is high, assembles 32-bit words
// MSB first and pushes each completed package (a queue of words) to 'pkgs'
// when SFR falls.
module serial_rx_model (
  input logic sck,
  input logic sdo,
  input logic sfr
);
  typedef logic [31:0] word_q_t[$];
  word_q_t     pkgs[$];
  logic [31:0] cur_q[$];
  logic [31:0] sh;
  int          nb = 0;
  int          bad_bits = 0;

  always @(posedge sck) if (sfr) begin
    sh = {sh[30:0], sdo};
    nb++;
    if (nb == 32) begin
      cur_q.push_back(sh);
      nb = 0;
    end
  end

  // a fall of SFR with no bit received (power-up reset) is not a package
  always @(negedge sfr) if (nb != 0 || cur_q.size() != 0) begin
    if (nb != 0) bad_bits++;
    pkgs.push_back(cur_q);
    cur_q.delete();
    nb = 0;
  end
endmodule
