// dct16_pkg -- constants shared by the 16-point approximate DCT.
//
// The 16-point transform is computed as X = P2 * M4 * M3 * M2 * P1 * M1 * x.
// M1..M4 are butterfly stages (see butterfly.sv and t8_mrdct.sv); P1 and P2
// are fixed permutations, pure wiring, given here as "source index" tables:
// after a permutation P, element i takes the value of element P[i] before it.
// Both tables are the published cycle notations
//   P1 = (10 12 16)(11 13 15)                      (1-based)
//   P2 = (2 9)(3 8 16 15 5 4 12 11 7 6 10 14 13)   (1-based)
// rewritten 0-based. With this reading the product of the factors equals the
// published 16x16 matrix T entry by entry.
//
// T8_LOW_NEG is the output-negation mask of the lower 8-point block. With
// the same matrix as the upper block, its outputs 3, 4 and 5 would be -X3,
// -X13 and -X9 (the lower half of M3*M4 differs from the upper half by just
// these signs); negating them, for free, gives the coefficients their
// proper sign. The default width and the register placement are this
// design's choices; the tables and the mask follow the published algorithm.
package dct16_pkg;

  // Default input word width. Chosen so that 8-bit pixels and 8-bit-video
  // prediction residuals (-255..255) both fit as signed numbers.
  localparam int unsigned DEFAULT_IN_W = 9;

  // Each of the four adder stages adds one bit: |X_k| <= 16 * max|x_i|.
  localparam int unsigned GROWTH = 4;

  typedef int unsigned perm16_t [16];

  // P1: lanes 8..15 of the M1 output are reordered before the lower T8.
  localparam perm16_t P1_SRC = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 11, 12, 15, 14, 13, 10, 9};

  // P2: X[k] = (stacked T8 outputs)[P2_SRC[k]].
  localparam perm16_t P2_SRC = '{0, 8, 7, 11, 3, 9, 5, 15, 1, 13, 6, 10, 2, 12, 4, 14};

  // Lower T8: outputs 3, 4, 5 negated (they carry X3, X13, X9).
  localparam logic [7:0] T8_LOW_NEG = 8'b0011_1000;

endpackage
