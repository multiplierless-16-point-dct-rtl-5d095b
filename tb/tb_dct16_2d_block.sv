// tb_dct16_2d_block -- 2-D 16x16 block transform built from two 1-D cores.
//
// The still-image use of the transform is B = T A T^T on 16x16 blocks of
// 8-bit pixels. This testbench computes it with two instances of the core:
// a row instance (IN_W = 9, enough for pixels 0..255) transforms the 16 rows
// of A, the testbench transposes the result, and a column instance
// (IN_W = 13, the row results' width) transforms the 16 columns. The
// transpose buffer is the testbench's; it is not part of the core.
// Each block's B is compared with T A T^T computed here, and A is rebuilt
// exactly from B as A = T^T D B D T / 256 with D = diag(16 / d_k),
// T T^T = diag(d_k). Blocks: smooth gradients with noise, random noise,
// all-255 (largest DC) and a checkerboard (largest AC energy).
module tb_dct16_2d_block;

  localparam int ROW_W = 9;
  localparam int COL_W = ROW_W + 4;
  localparam int NBLK = 24;

  localparam int T [16][16] = '{
    '{ 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1, 1},
    '{ 1, 1, 1, 1, 1, 1, 1, 1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{ 1, 0, 0, 0, 0, 0, 0,-1,-1, 0, 0, 0, 0, 0, 0, 1},
    '{ 1, 1, 0, 0, 0, 0,-1,-1, 1, 1, 0, 0, 0, 0,-1,-1},
    '{ 1, 0, 0,-1,-1, 0, 0, 1, 1, 0, 0,-1,-1, 0, 0, 1},
    '{ 1, 1,-1,-1,-1,-1, 1, 1,-1,-1, 1, 1, 1, 1,-1,-1},
    '{ 0, 0,-1, 0, 0, 1, 0, 0, 0, 0, 1, 0, 0,-1, 0, 0},
    '{ 0, 0, 0, 0, 0, 0,-1, 1,-1, 1, 0, 0, 0, 0, 0, 0},
    '{ 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1, 1,-1,-1, 1},
    '{ 0, 0,-1, 1, 0, 0, 0, 0, 0, 0, 0, 0,-1, 1, 0, 0},
    '{ 0,-1, 0, 0, 0, 0, 1, 0, 0, 1, 0, 0, 0, 0,-1, 0},
    '{ 0, 0, 1, 1,-1,-1, 0, 0, 0, 0, 1, 1,-1,-1, 0, 0},
    '{ 0,-1, 1, 0, 0, 1,-1, 0, 0,-1, 1, 0, 0, 1,-1, 0},
    '{ 1,-1, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 1,-1},
    '{ 0, 0, 0,-1, 1, 0, 0, 0, 0, 0, 0, 1,-1, 0, 0, 0},
    '{ 0, 0, 0, 0,-1, 1, 0, 0, 0, 0,-1, 1, 0, 0, 0, 0}
  };

  logic clk = 1'b0;
  logic rst_n = 1'b0;

  logic                      r_iv = 1'b0, r_ov;
  logic signed [ROW_W-1:0]   r_x [16];
  logic signed [ROW_W+3:0]   r_X [16];
  logic                      c_iv = 1'b0, c_ov;
  logic signed [COL_W-1:0]   c_x [16];
  logic signed [COL_W+3:0]   c_X [16];

  approx_dct16 #(.IN_W(ROW_W)) u_row (.clk, .rst_n, .in_valid(r_iv), .x(r_x), .out_valid(r_ov), .X(r_X));
  approx_dct16 #(.IN_W(COL_W)) u_col (.clk, .rst_n, .in_valid(c_iv), .x(c_x), .out_valid(c_ov), .X(c_X));

  always #5ns clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_dc_max = 0;
  longint cyc_first_in, cyc_last_out;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int A [16][16];
  longint R [16][16];      // row-pass results, R[row][k]
  longint B [16][16];      // column-pass results, B[j][col]
  int r_cnt, c_cnt;

  always @(posedge clk) begin
    if (r_ov && r_cnt < 16) begin
      for (int k = 0; k < 16; k++) R[r_cnt][k] = longint'(r_X[k]);
      r_cnt <= r_cnt + 1;
    end
    if (c_ov && c_cnt < 16) begin
      for (int j = 0; j < 16; j++) B[j][c_cnt] = longint'(c_X[j]);
      c_cnt <= c_cnt + 1;
      cyc_last_out = cycle;
    end
  end

  task automatic check(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (NBLK * 200 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_block(int b);
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        automatic int v;
        case (b)
          0: v = 255;
          1: v = ((r + c) % 2 == 0) ? 255 : 0;
          2: v = 0;
          default:
            if (b % 2 == 0) v = int'($urandom_range(255, 0));
            else begin
              v = 40 + 6 * r + 4 * c + int'($urandom_range(16, 0));
              if (v > 255) v = 255;
            end
        endcase
        A[r][c] = v;
      end
  endtask

  task automatic run_block(int b);
    longint ref_b [16][16];
    longint tmp [16][16];
    longint d [16];
    make_block(b);
    r_cnt = 0; c_cnt = 0;
    // Row pass: 16 rows back to back.
    cyc_first_in = cycle;
    for (int r = 0; r < 16; r++) begin
      for (int c = 0; c < 16; c++) r_x[c] = ROW_W'(A[r][c]);
      r_iv = 1'b1;
      @(negedge clk);
    end
    r_iv = 1'b0;
    wait (r_cnt == 16);
    @(negedge clk);
    // Column pass on the transposed row results.
    for (int k = 0; k < 16; k++) begin
      for (int r = 0; r < 16; r++) c_x[r] = COL_W'(R[r][k]);
      c_iv = 1'b1;
      @(negedge clk);
    end
    c_iv = 1'b0;
    wait (c_cnt == 16);
    @(negedge clk);
    // Reference B = T A T^T.
    for (int i = 0; i < 16; i++)
      for (int k = 0; k < 16; k++) begin
        tmp[i][k] = 0;
        for (int m = 0; m < 16; m++) tmp[i][k] += longint'(A[i][m]) * T[k][m];
      end
    for (int j = 0; j < 16; j++)
      for (int k = 0; k < 16; k++) begin
        ref_b[j][k] = 0;
        for (int i = 0; i < 16; i++) ref_b[j][k] += T[j][i] * tmp[i][k];
        check("B", B[j][k], ref_b[j][k]);
      end
    if (B[0][0] == 256 * 255) n_dc_max++;
    // Exact reconstruction from the hardware's B.
    for (int k = 0; k < 16; k++) begin
      d[k] = 0;
      for (int m = 0; m < 16; m++) d[k] += T[k][m] * T[k][m];
      d[k] = 16 / d[k];
    end
    for (int i = 0; i < 16; i++)
      for (int c = 0; c < 16; c++) begin
        tmp[i][c] = 0;
        for (int j = 0; j < 16; j++) tmp[i][c] += longint'(T[j][i]) * d[j] * B[j][c];
      end
    for (int i = 0; i < 16; i++)
      for (int c = 0; c < 16; c++) begin
        automatic longint s = 0;
        for (int k = 0; k < 16; k++) s += tmp[i][k] * d[k] * T[k][c];
        check("reconstruct", s, 256 * longint'(A[i][c]));
      end
    // Two 16-vector passes, each 16 cycles plus 5 cycles latency, plus the
    // testbench's own turnaround cycles.
    check("block cycles", longint'((cyc_last_out - cyc_first_in) <= 2 * (16 + 5) + 4), 1);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int b = 0; b < NBLK; b++) run_block(b);
    if (n_dc_max == 0) begin failures++; $display("FAIL largest DC never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
