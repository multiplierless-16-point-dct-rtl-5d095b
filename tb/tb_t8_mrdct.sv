// tb_t8_mrdct -- self-checking test of the 8-point approximate DCT block.
//
// Two instances are tested side by side, as the 16-point design uses them:
// one with no output negation and one with outputs 3, 4, 5 negated. The
// expected outputs come from the 8x8 matrix listed in the block's header
// (the modified rounded DCT in the block's output order), evaluated here as
// integer dot products. Random vectors are streamed with random gaps; the
// latency must be exactly 3 cycles and a full-rate burst must come out
// without gaps. Full-scale inputs that drive an output to its extreme are
// included.
module tb_t8_mrdct;

  import dct16_pkg::*;

  localparam int W = 10;
  localparam int LAT = 3;
  localparam int NVEC = 3000;

  // Rows of the block's matrix, in output order.
  localparam int G [8][8] = '{
    '{ 1,  1,  1,  1,  1,  1,  1,  1},
    '{ 1, -1, -1,  1,  1, -1, -1,  1},
    '{ 0, -1,  1,  0,  0,  1, -1,  0},
    '{ 1,  0,  0, -1, -1,  0,  0,  1},
    '{ 0,  0,  0, -1,  1,  0,  0,  0},
    '{ 0,  0, -1,  0,  0,  1,  0,  0},
    '{ 0, -1,  0,  0,  0,  0,  1,  0},
    '{ 1,  0,  0,  0,  0,  0,  0, -1}
  };

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0] a [8];
  logic                v0, v1;
  logic signed [W+2:0] y0 [8];
  logic signed [W+2:0] y1 [8];

  int checks = 0;
  int failures = 0;
  longint cycle = 0;

  t8_mrdct #(.W(W), .NEG_OUT(8'h00))      dut0 (.clk, .rst_n, .in_valid, .a, .out_valid(v0), .y(y0));
  t8_mrdct #(.W(W), .NEG_OUT(T8_LOW_NEG)) dut1 (.clk, .rst_n, .in_valid, .a, .out_valid(v1), .y(y1));

  always #5ns clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int v [8]; longint t; } item_t;
  item_t sent [$];
  int received = 0;

  task automatic check(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (NVEC * 3 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor and scoreboard, both on the rising edge: every accepted input
  // vector is queued with its cycle number; every valid output is compared
  // with the oldest queued vector.
  always @(posedge clk) begin
    if (rst_n) begin
      check("valid match", longint'(v0), longint'(v1));
      if (v0) begin
        if (sent.size() == 0) begin
          checks++; failures++;
          $display("FAIL output without input");
        end else begin
          automatic item_t it = sent.pop_front();
          check("latency", cycle - it.t, longint'(LAT));
          for (int k = 0; k < 8; k++) begin
            automatic longint e = 0;
            for (int i = 0; i < 8; i++) e += G[k][i] * it.v[i];
            check("y0", longint'(y0[k]), e);
            check("y1", longint'(y1[k]), T8_LOW_NEG[k] ? -e : e);
          end
          received++;
        end
      end
      if (in_valid) begin
        automatic item_t it;
        for (int i = 0; i < 8; i++) it.v[i] = int'(a[i]);
        it.t = cycle;
        sent.push_back(it);
      end
    end
  end

  // Driver: changes inputs on the falling edge.
  initial begin
    automatic int hi = (1 << (W-1)) - 1;
    automatic int lo = -(1 << (W-1));
    automatic int v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < NVEC; n++) begin
      // First 200 vectors as one burst, then random gaps.
      if (n >= 200) while ($urandom_range(3, 0) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      for (int i = 0; i < 8; i++) begin
        case (n)
          0: v = hi;
          1: v = lo;
          2: v = (G[1][i] > 0) ? hi : lo;     // y1 at its maximum
          3: v = (G[1][i] > 0) ? lo : hi;     // y1 at its minimum
          default: v = lo + int'($urandom_range(hi - lo, 0));
        endcase
        a[i] = W'(v);
      end
      in_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    check("all received", longint'(received), longint'(NVEC));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
