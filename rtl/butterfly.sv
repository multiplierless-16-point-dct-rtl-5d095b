// butterfly -- N-point add/subtract butterfly, combinational.
//
// Computes y = B_N * x with B_N = [ I  J ; J  -I ] (I identity, J
// counter-identity, both N/2 x N/2):
//   y[i]       = x[i] + x[N-1-i]          for i = 0 .. N/2-1
//   y[N/2 + j] = x[N/2-1-j] - x[N/2+j]    for j = 0 .. N/2-1
// i.e. N additions, one bit of word growth. This is the building block of
// every stage of the factorization: M1 is B_16, M2 is B_8 twice, M3 holds
// B_4 and M4 holds B_2.
//
// NEG[k] (upper half only) negates difference output k. A negated difference
// is the same subtraction with its operands swapped, so it costs nothing;
// the -1 entries of M3 and M4 are absorbed this way. Sum outputs cannot be
// negated for free, so NEG bits on the lower half are an elaboration error.
//
// The butterfly matrices are those of the published factorization; the NEG
// mask and the full-precision output width are this design's own choices.
//
// Interface: x is N signed words of W bits, y is N signed words of W+1 bits.
// No clock: purely combinational.
module butterfly #(
  parameter int unsigned N   = 16,
  parameter int unsigned W   = 9,
  parameter logic [N-1:0] NEG = '0
) (
  input  logic signed [W-1:0] x [N],
  output logic signed [W:0]   y [N]
);

  localparam int unsigned H = N / 2;

  if (N < 2 || (N % 2) != 0) begin : g_bad_n
    $error("butterfly: N must be even and at least 2");
  end
  if (NEG[H-1:0] != '0) begin : g_bad_neg
    $error("butterfly: only difference outputs (upper half) can be negated");
  end

  always_comb begin
    for (int i = 0; i < H; i++) begin
      y[i] = (W+1)'(x[i]) + (W+1)'(x[N-1-i]);
    end
    for (int j = 0; j < H; j++) begin
      if (NEG[H+j]) y[H+j] = (W+1)'(x[H+j]) - (W+1)'(x[H-1-j]);
      else          y[H+j] = (W+1)'(x[H-1-j]) - (W+1)'(x[H+j]);
    end
  end

endmodule
