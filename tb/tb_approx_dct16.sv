// tb_approx_dct16 -- end-to-end test of the 16-point approximate DCT.
//
// The design is instantiated with its default parameters. 10,000 random
// 16-point vectors are streamed through it (plus directed full-scale
// vectors), mostly with random idle cycles between them and partly as
// full-rate bursts. Every result is checked three ways:
//   * X = T x, with T the published 16x16 matrix written out below;
//   * latency: exactly 5 cycles from accepted input to valid output;
//   * invertibility: T T^T = diag(d), so 16 x_i = sum_k T[k][i] (16/d_k) X_k
//     must reproduce the input exactly (this is what makes S*T orthogonal).
// A reset is also asserted while vectors are in flight: the pipeline must
// drop them. Each of these mechanisms is counted; one that never happened
// counts as a failure.
module tb_approx_dct16;

  import dct16_pkg::*;

  localparam int IN_W = DEFAULT_IN_W;
  localparam int OUT_W = IN_W + GROWTH;
  localparam int LAT = 5;
  localparam int NVEC = 10000;

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
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0]  x [16];
  logic                    out_valid;
  logic signed [OUT_W-1:0] X [16];

  int checks = 0;
  int failures = 0;
  longint cycle = 0;

  // Mechanism counters.
  int n_bubble = 0;       // idle input cycles between vectors
  int n_burst = 0;        // output cycles that directly follow another valid output
  int n_full_scale = 0;   // outputs of magnitude >= 16*(2^(IN_W-1)-1), the top of the range
  int n_flushed = 0;      // vectors dropped by a reset while in flight
  int n_recon = 0;        // vectors reconstructed exactly through T^T

  approx_dct16 dut (.clk, .rst_n, .in_valid, .x, .out_valid, .X);

  always #5ns clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int v [16]; longint t; } item_t;
  item_t sent [$];
  int received = 0;
  logic prev_valid = 1'b0;

  task automatic check(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  task automatic finish_tb();
    if (n_bubble == 0)     begin failures++; $display("FAIL no input bubble seen"); end
    if (n_burst == 0)      begin failures++; $display("FAIL no full-rate burst seen"); end
    if (n_full_scale == 0) begin failures++; $display("FAIL no full-scale output seen"); end
    if (n_flushed == 0)    begin failures++; $display("FAIL no in-flight reset seen"); end
    if (n_recon == 0)      begin failures++; $display("FAIL no reconstruction checked"); end
    $display("mechanisms: bubbles=%0d burst_outputs=%0d full_scale=%0d flushed=%0d reconstructed=%0d",
             n_bubble, n_burst, n_full_scale, n_flushed, n_recon);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (NVEC * 4 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  // Monitor and scoreboard on the rising edge.
  always @(posedge clk) begin
    if (!rst_n) begin
      n_flushed += sent.size();
      sent.delete();
      prev_valid = 1'b0;
    end else begin
      if (out_valid) begin
        if (sent.size() == 0) begin
          checks++; failures++;
          $display("FAIL output without input at cycle %0d", cycle);
        end else begin
          automatic item_t it = sent.pop_front();
          automatic longint ref_x [16];
          automatic bit ok = 1'b1;
          check("latency", cycle - it.t, longint'(LAT));
          for (int k = 0; k < 16; k++) begin
            automatic longint e = 0;
            for (int i = 0; i < 16; i++) e += T[k][i] * it.v[i];
            check("X", longint'(X[k]), e);
            if (e >= 16 * ((1 << (IN_W-1)) - 1) || e <= -16 * ((1 << (IN_W-1)) - 1))
              n_full_scale++;
          end
          // Reconstruction from the DUT's own outputs.
          for (int i = 0; i < 16; i++) begin
            ref_x[i] = 0;
            for (int k = 0; k < 16; k++) begin
              automatic longint d = 0;
              for (int m = 0; m < 16; m++) d += T[k][m] * T[k][m];
              ref_x[i] += T[k][i] * (16 / d) * longint'(X[k]);
            end
            if (ref_x[i] != 16 * longint'(it.v[i])) ok = 1'b0;
          end
          check("reconstruction", longint'(ok), 1);
          if (ok) n_recon++;
          if (prev_valid) n_burst++;
          received++;
        end
      end
      prev_valid = out_valid;
      if (in_valid) begin
        automatic item_t it;
        for (int i = 0; i < 16; i++) it.v[i] = int'(x[i]);
        it.t = cycle;
        sent.push_back(it);
      end
    end
  end

  function automatic int rnd_word(int mode, int sgn);
    int hi = (1 << (IN_W-1)) - 1;
    int lo = -(1 << (IN_W-1));
    if (mode == 1) return (sgn > 0) ? hi : lo;
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

  task automatic send(int mode, int row, bit neg);
    for (int i = 0; i < 16; i++) begin
      automatic int s = (T[row][i] >= 0) ? 1 : -1;
      if (neg) s = -s;
      x[i] = IN_W'(rnd_word(mode, s));
    end
    in_valid = 1'b1;
    @(negedge clk);
  endtask

  // Driver: inputs change on the falling edge.
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Reset while vectors are in flight: they must never come out.
    for (int n = 0; n < 3; n++) send(0, 0, 1'b0);
    in_valid = 1'b0;
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    repeat (LAT + 2) @(negedge clk);
    // Directed: each row driven to its positive and negative extreme.
    for (int r = 0; r < 16; r++) begin
      send(1, r, 1'b0);
      send(1, r, 1'b1);
    end
    // Random vectors: first 500 as one burst, then with random gaps.
    for (int n = 0; n < NVEC; n++) begin
      if (n >= 500) while ($urandom_range(3, 0) == 0) begin
        in_valid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      send(0, 0, 1'b0);
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    check("all received", longint'(received), longint'(NVEC + 32));
    finish_tb();
  end

endmodule
