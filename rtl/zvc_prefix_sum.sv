// zvc_prefix_sum: zero-count prefix sum over the 8 words of one 32B sector.
//
// Given the non-zero flag of each word (bit i = word i), it returns for every
// word the number of zero-valued words in front of it, which is how far the
// compressor's bubble-collapsing shifter moves that word towards word 0, and
// the number of non-zero words in the sector (the "4" that the compression
// pipeline adds to its buffer length register).
//
// The paper states that the prefix sum takes 11 3-bit adders. An 8-input
// Brent-Kung network is exactly 11 additions (4 + 2 + 1 up the tree, 4 back
// down), and that is the structure built here; the choice of Brent-Kung is this
// design's. All partial sums except the total of all eight fit in 3 bits; the
// adder forming the total keeps its carry so that 8 zeros can be represented.
// Purely combinational.
module zvc_prefix_sum
  import cdma_pkg::*;
(
  input  seg_t               nz,            // 1 = word is non-zero
  output logic [7:0][2:0]    zeros_before,  // zero words in front of word i
  output cnt8_t              nnz            // non-zero words, 0..8
);

  logic [7:0][2:0] z;        // zero flag of each word, widened to 3 bits
  logic [2:0] s01, s23, s45, s67, s03, s47;
  logic [3:0] s07;
  logic [2:0] p2, p4, p5, p6;

  always_comb begin
    for (int i = 0; i < 8; i++) z[i] = {2'b00, ~nz[i]};
    // Up-sweep: 7 adders.
    s01 = z[0] + z[1];
    s23 = z[2] + z[3];
    s45 = z[4] + z[5];
    s67 = z[6] + z[7];
    s03 = s01 + s23;
    s47 = s45 + s67;
    s07 = {1'b0, s03} + {1'b0, s47};   // 3-bit adder with its carry out
    // Down-sweep: 4 adders.
    p5  = s03 + s45;
    p2  = s01 + z[2];
    p4  = s03 + z[4];
    p6  = p5 + z[6];
    // Exclusive prefix: zeros in front of word i = inclusive sum up to i-1.
    zeros_before[0] = 3'd0;
    zeros_before[1] = z[0];
    zeros_before[2] = s01;
    zeros_before[3] = p2;
    zeros_before[4] = s03;
    zeros_before[5] = p4;
    zeros_before[6] = p5;
    zeros_before[7] = p6;
    nnz = cnt8_t'(4'd8 - s07);
  end

endmodule
