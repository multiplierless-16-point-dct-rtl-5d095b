// approx_dct16 -- 16-point multiplierless approximate DCT, X = T * x.
//
// T is a 16x16 matrix with entries in {0, +1, -1}; it approximates the
// DCT-II up to a diagonal scaling S (S*T is orthogonal) that is meant to be
// merged into the quantizer and is therefore not computed here. Outputs are
// the unscaled X_k in natural frequency order.
//
// Structure (the published fast algorithm, 44 additions in total):
//   M1  16-point butterfly on x                          16 adds
//   P1  fixed reordering of lanes 8..15                  wiring
//   T8  two 8-point approximate DCTs (M2, M3, M4)        2 x 14 adds
//   P2  fixed output permutation to frequency order      wiring
// The upper T8 works on the sums x_i + x_(15-i) and yields the even
// coefficients; the lower one works on the differences and yields the odd
// ones. Signs written as -1 in the factorization never cost an adder: they
// are folded into subtraction operand order.
//
// Timing (this design's choice; the published text gives only the clock
// rate reached on an FPGA): the input vector is registered, the M1 result is
// registered, and each of the three T8 stages ends in a register. Latency is
// LATENCY = 5 clock cycles from a cycle with in_valid high to the cycle with
// out_valid high carrying its result; one vector is accepted every cycle and
// there is no back-pressure. Asynchronous active-low reset clears the valid
// pipeline; data registers are not reset.
//
// Interface: x[i] and X[k] are signed two's-complement words of IN_W and
// IN_W+4 bits; the 4 extra bits make every output exact (|X_k| <= 16*max|x_i|).
module approx_dct16
  import dct16_pkg::*;
#(
  parameter int unsigned IN_W = DEFAULT_IN_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [IN_W-1:0]       x [16],
  output logic                         out_valid,
  output logic signed [IN_W+GROWTH-1:0] X [16]
);

  localparam int unsigned OUT_W = IN_W + GROWTH;

  // ---------------- input register ----------------
  logic signed [IN_W-1:0] x_q [16];
  logic                   x_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x_v <= 1'b0;
    else        x_v <= in_valid;
  end

  always_ff @(posedge clk) x_q <= x;

  // ---------------- M1: 16-point butterfly ----------------
  logic signed [IN_W:0] m1_d [16];
  logic signed [IN_W:0] m1_q [16];
  logic                 m1_v;

  butterfly #(.N(16), .W(IN_W), .NEG('0)) u_m1 (.x(x_q), .y(m1_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m1_v <= 1'b0;
    else        m1_v <= x_v;
  end

  always_ff @(posedge clk) m1_q <= m1_d;

  // ---------------- P1: reorder, split into the two halves ----------------
  logic signed [IN_W:0] up_in [8];
  logic signed [IN_W:0] lo_in [8];

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      up_in[i] = m1_q[P1_SRC[i]];
      lo_in[i] = m1_q[P1_SRC[8+i]];
    end
  end

  // ---------------- two T8 blocks ----------------
  logic signed [OUT_W-1:0] up_y [8];
  logic signed [OUT_W-1:0] lo_y [8];
  logic                    up_v, lo_v;

  t8_mrdct #(.W(IN_W+1), .NEG_OUT(8'h00)) u_t8_even (
    .clk, .rst_n, .in_valid(m1_v), .a(up_in), .out_valid(up_v), .y(up_y)
  );

  t8_mrdct #(.W(IN_W+1), .NEG_OUT(T8_LOW_NEG)) u_t8_odd (
    .clk, .rst_n, .in_valid(m1_v), .a(lo_in), .out_valid(lo_v), .y(lo_y)
  );

  // ---------------- P2: frequency order ----------------
  logic signed [OUT_W-1:0] stacked [16];

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      stacked[i]   = up_y[i];
      stacked[8+i] = lo_y[i];
    end
    for (int k = 0; k < 16; k++) X[k] = stacked[P2_SRC[k]];
  end

  // Both halves run in lock step, so either valid would do.
  assign out_valid = up_v & lo_v;

endmodule
