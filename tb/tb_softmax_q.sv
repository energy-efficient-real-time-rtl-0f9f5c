// tb_softmax_q -- self-checking test of the fixed-point softmax.
// Random score vectors (close together, far apart and tied). The expected
// probabilities are computed with real arithmetic: differences are floored
// to 1/8 units and capped at 127 as in the design, then
// p_i = 255 * exp(-d_i/8) / sum_j exp(-d_j/8). Each output must be within 1
// of the rounded value, and the output must follow in_valid by one cycle.
module tb_softmax_q;
  localparam int unsigned N = 4, FRAC = 14;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [31:0] scores [N];
  logic out_valid;
  logic [7:0] prob [N];
  int checks = 0, failures = 0, n_small = 0, n_spread = 0;

  softmax_q #(.N(N), .ACC_W(32), .IN_FRAC(FRAC), .LUT_N(128), .P_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (scores[i]) scores[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      real ex [N];
      real tot;
      int mx;
      automatic int spread = (n % 3 == 0) ? 1 << 13 : (n % 3 == 1) ? 1 << 16 : 1 << 19;
      for (int i = 0; i < N; i++) scores[i] = $signed($urandom_range(2 * spread)) - spread;
      if (n % 10 == 0) scores[1] = scores[0];
      mx = scores[0];
      for (int i = 1; i < N; i++) if (scores[i] > mx) mx = scores[i];
      tot = 0.0;
      for (int i = 0; i < N; i++) begin
        automatic int d = (mx - scores[i]) >>> (FRAC - 3);
        if (d > 127) d = 127;
        ex[i] = $exp(-real'(d) / 8.0);
        tot += ex[i];
      end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      for (int i = 0; i < N; i++) begin
        automatic int e = int'(255.0 * ex[i] / tot);
        checks++;
        if (int'(prob[i]) > e + 1 || int'(prob[i]) < e - 1) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d i=%0d got %0d exp %0d", n, i, prob[i], e);
        end
        if (e > 20 && e < 230) n_spread++;
        if (e == 0) n_small++;
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    if (n_spread == 0 || n_small == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
