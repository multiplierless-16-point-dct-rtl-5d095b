// t8_mrdct -- 8-point multiplierless approximate DCT (modified rounded DCT),
// 14 additions, no multiplications and no shifts.
//
// The 16-point transform uses this block twice. Its matrix, rows in the
// order the outputs leave the block, is
//   y0 =  a0 + a1 + a2 + a3 + a4 + a5 + a6 + a7
//   y1 =  a0 - a1 - a2 + a3 + a4 - a5 - a6 + a7
//   y2 = -a1 + a2 + a5 - a6
//   y3 =  a0 - a3 - a4 + a7
//   y4 = -a3 + a4
//   y5 = -a2 + a5
//   y6 = -a1 + a6
//   y7 =  a0 - a7
// which is the upper 8x8 quarter of M4*M3*M2 in the published factorization.
// (In natural DCT order these are rows 0, 4, 6, 2, 7, 3, 5, 1.)
// It is computed in three butterfly stages: B_8 (8 adds), B_4 on lanes 0..3
// (4 adds), B_2 on lanes 0..1 (2 adds); lanes not in a butterfly pass
// through. The -1 entries of M3 and M4 are folded into the subtractions.
//
// NEG_OUT negates chosen outputs for free, again by swapping subtraction
// operands; the lower instance of the 16-point design uses it to deliver
// X3, X13, X9 instead of -X3, -X13, -X9. Output 0 is a sum and cannot be
// negated for free, so NEG_OUT[0] is rejected at elaboration.
//
// Timing: each stage ends in a register, so the block has a latency of 3
// clock cycles and accepts one vector every cycle; out_valid follows
// in_valid by 3 cycles. Registering every stage is this design's choice:
// the published text gives only the achieved clock rate.
// Reset (asynchronous, active low) clears the valid pipeline only.
//
// Interface: a is 8 signed words of W bits, y is 8 signed words of W+3 bits,
// wide enough for any input (|y_k| <= 8 * max|a_i|).
module t8_mrdct #(
  parameter int unsigned W         = 10,
  parameter logic [7:0]  NEG_OUT   = 8'h00
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  a [8],
  output logic                 out_valid,
  output logic signed [W+2:0]  y [8]
);

  // Butterfly negation masks: the signs of M3/M4 (upper half) combined with
  // the requested output signs.
  localparam logic [7:0] NEG8 = {NEG_OUT[7:4] ^ 4'b0111, 4'b0000};
  localparam logic [3:0] NEG4 = {NEG_OUT[3], NEG_OUT[2] ^ 1'b1, 2'b00};
  localparam logic [1:0] NEG2 = {NEG_OUT[1], 1'b0};

  if (NEG_OUT[0]) begin : g_bad_neg
    $error("t8_mrdct: output 0 is a sum and cannot be negated");
  end

  // ---------------- stage 1: B_8 ----------------
  logic signed [W:0] s1_d [8];
  logic signed [W:0] s1_q [8];
  logic              s1_v;

  butterfly #(.N(8), .W(W), .NEG(NEG8)) u_b8 (.x(a), .y(s1_d));

  // ---------------- stage 2: B_4 on lanes 0..3 ----------------
  logic signed [W:0]   s2_in [4];
  logic signed [W+1:0] s2_b  [4];
  logic signed [W+1:0] s2_d  [8];
  logic signed [W+1:0] s2_q  [8];
  logic                s2_v;

  always_comb begin
    for (int i = 0; i < 4; i++) s2_in[i] = s1_q[i];
  end

  butterfly #(.N(4), .W(W+1), .NEG(NEG4)) u_b4 (.x(s2_in), .y(s2_b));

  always_comb begin
    for (int i = 0; i < 4; i++) s2_d[i] = s2_b[i];
    for (int i = 4; i < 8; i++) s2_d[i] = (W+2)'(s1_q[i]);
  end

  // ---------------- stage 3: B_2 on lanes 0..1 ----------------
  logic signed [W+1:0] s3_in [2];
  logic signed [W+2:0] s3_b  [2];
  logic signed [W+2:0] s3_d  [8];

  always_comb begin
    for (int i = 0; i < 2; i++) s3_in[i] = s2_q[i];
  end

  butterfly #(.N(2), .W(W+2), .NEG(NEG2)) u_b2 (.x(s3_in), .y(s3_b));

  always_comb begin
    for (int i = 0; i < 2; i++) s3_d[i] = s3_b[i];
    for (int i = 2; i < 8; i++) s3_d[i] = (W+3)'(s2_q[i]);
  end

  // ---------------- stage registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_v      <= in_valid;
      s2_v      <= s1_v;
      out_valid <= s2_v;
    end
  end

  always_ff @(posedge clk) begin
    s1_q <= s1_d;
    s2_q <= s2_d;
    y    <= s3_d;
  end

endmodule
