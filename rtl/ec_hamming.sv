// ec_hamming: Hamming syndrome of one key segment.
//
// Following the Winnow idea the paper builds on, a segment of 2**r bits is treated as
// an extended Hamming code word: bit j of the segment contributes its index j to the
// syndrome (XOR of the indices of all one bits), and the segment parity covers all
// bits including index 0. If Alice's and Bob's parities differ, the XOR of their
// syndromes is the index of the single differing bit (0 meaning bit 0). This unit
// accumulates the syndrome of the bits fed one per clock and gives the error index
// against the other side's syndrome. Timing: as ec_parity.
module ec_hamming #(
  parameter int unsigned W = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic         din,
  input  logic [W-1:0] idx,
  input  logic [W-1:0] other,
  output logic [W-1:0] synd,
  output logic [W-1:0] err_idx
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         synd <= '0;
    else if (clr)       synd <= '0;
    else if (en && din) synd <= synd ^ idx;
  end
  assign err_idx = synd ^ other;
endmodule
