// tb_butterfly -- self-checking test of the N-point add/subtract butterfly.
//
// Four instances cover every size and sign pattern the 16-point design uses:
// B_16 without negation (stage M1), B_8 with lanes 4..6 negated, B_4 with
// lane 2 negated and B_2 with lane 1 negated (the folded signs of M2..M4).
// Each is fed random vectors and the full-scale corners; outputs are compared
// with y[i] = x[i] + x[N-1-i], y[N/2+j] = +-(x[N/2-1-j] - x[N/2+j]) computed
// here in plain integers. The block is combinational, so results are
// sampled 1 ns after the inputs change.
module tb_butterfly;

  localparam int W = 9;

  int checks = 0;
  int failures = 0;

  logic signed [W-1:0] x16 [16];
  logic signed [W:0]   y16 [16];
  logic signed [W:0]   x8  [8];
  logic signed [W+1:0] y8  [8];
  logic signed [W+1:0] x4  [4];
  logic signed [W+2:0] y4  [4];
  logic signed [W+2:0] x2  [2];
  logic signed [W+3:0] y2  [2];

  localparam logic [7:0] NEG8 = 8'b0111_0000;
  localparam logic [3:0] NEG4 = 4'b0100;
  localparam logic [1:0] NEG2 = 2'b10;

  butterfly #(.N(16), .W(W),   .NEG(16'h0000)) dut16 (.x(x16), .y(y16));
  butterfly #(.N(8),  .W(W+1), .NEG(NEG8))     dut8  (.x(x8),  .y(y8));
  butterfly #(.N(4),  .W(W+2), .NEG(NEG4))     dut4  (.x(x4),  .y(y4));
  butterfly #(.N(2),  .W(W+3), .NEG(NEG2))     dut2  (.x(x2),  .y(y2));

  // Random value of a signed word of width w; mode 1/2 forces the max/min.
  function automatic int rnd(int w, int mode);
    int lo = -(1 << (w-1));
    int hi = (1 << (w-1)) - 1;
    if (mode == 1) return hi;
    if (mode == 2) return lo;
    if (mode == 3) return ($urandom_range(1, 0) != 0) ? hi : lo;
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

  function automatic int ref_y(int n, int neg, int k, int xv [16]);
    int h = n / 2;
    if (k < h) return xv[k] + xv[n-1-k];
    else begin
      int j = k - h;
      int d = xv[h-1-j] - xv[h+j];
      return (((neg >> k) & 1) != 0) ? -d : d;
    end
  endfunction

  task automatic check(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v16 [16], v8 [16], v4 [16], v2 [16];
    for (int t = 0; t < 2000; t++) begin
      automatic int mode = (t < 4) ? t : ((t < 40) ? 3 : 0);
      for (int i = 0; i < 16; i++) begin
        v16[i] = rnd(W, mode);   v8[i] = rnd(W+1, mode);
        v4[i]  = rnd(W+2, mode); v2[i] = rnd(W+3, mode);
      end
      // Corners where one output reaches its extreme: x[i] max, x[N-1-i] min.
      if (t == 40) for (int i = 0; i < 16; i++) begin
        v16[i] = (i < 8) ? rnd(W, 2) : rnd(W, 1);
        v8[i]  = (i < 4) ? rnd(W+1, 2) : rnd(W+1, 1);
        v4[i]  = (i < 2) ? rnd(W+2, 2) : rnd(W+2, 1);
        v2[i]  = (i < 1) ? rnd(W+3, 2) : rnd(W+3, 1);
      end
      for (int i = 0; i < 16; i++) x16[i] = (W)'(v16[i]);
      for (int i = 0; i < 8; i++)  x8[i]  = (W+1)'(v8[i]);
      for (int i = 0; i < 4; i++)  x4[i]  = (W+2)'(v4[i]);
      for (int i = 0; i < 2; i++)  x2[i]  = (W+3)'(v2[i]);
      #1ns;
      for (int k = 0; k < 16; k++) check("B16", int'(y16[k]), ref_y(16, 0, k, v16));
      for (int k = 0; k < 8; k++)  check("B8",  int'(y8[k]),  ref_y(8, int'(NEG8), k, v8));
      for (int k = 0; k < 4; k++)  check("B4",  int'(y4[k]),  ref_y(4, int'(NEG4), k, v4));
      for (int k = 0; k < 2; k++)  check("B2",  int'(y2[k]),  ref_y(2, int'(NEG2), k, v2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
