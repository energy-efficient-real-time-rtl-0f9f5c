// tb_maxpool1d -- self-checking test of the streaming max pooling.
// Two instances, pool 4 / stride 4 and pool 4 / stride 1, get the same
// position-major stream of 3 channels x 23 positions with random gaps. Every
// emitted value is compared with the maximum of its window computed directly
// from the stored input; the number of outputs must be (23-4)/S+1 per channel.
// A second layer run after 'clear' checks that the schedule restarts.
module tb_maxpool1d;
  localparam int unsigned F = 3, P = 4, L = 23;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0;
  logic signed [7:0] in_data = '0;
  logic [7:0] in_pos = '0;
  logic [1:0] in_ch = '0;
  logic a_valid, b_valid;
  logic signed [7:0] a_data, b_data;
  logic [1:0] a_ch, b_ch;
  int checks = 0, failures = 0;
  int x [L][F];
  int a_cnt, b_cnt;

  maxpool1d #(.F(F), .P(P), .S(4), .PW(8)) dut_a (.clk, .rst_n, .clear, .in_valid,
    .in_data, .in_pos, .in_ch, .out_valid(a_valid), .out_data(a_data), .out_ch(a_ch));
  maxpool1d #(.F(F), .P(P), .S(1), .PW(8)) dut_b (.clk, .rst_n, .clear, .in_valid,
    .in_data, .in_pos, .in_ch, .out_valid(b_valid), .out_data(b_data), .out_ch(b_ch));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wmax(int p0, int ch);
    int m = -1000;
    for (int i = 0; i < P; i++) if (x[p0 + i][ch] > m) m = x[p0 + i][ch];
    return m;
  endfunction

  // output checkers: outputs appear in (window, channel) order
  always @(negedge clk) if (rst_n && a_valid) begin
    automatic int p = a_cnt / F, ch = a_cnt % F;
    checks++;
    if (a_ch != 2'(ch) || a_data != 8'(wmax(p * 4, ch))) begin
      failures++;
      $display("FAIL A out %0d: ch=%0d got %0d exp %0d", a_cnt, a_ch, a_data, wmax(p * 4, ch));
    end
    a_cnt++;
  end
  always @(negedge clk) if (rst_n && b_valid) begin
    automatic int p = b_cnt / F, ch = b_cnt % F;
    checks++;
    if (b_ch != 2'(ch) || b_data != 8'(wmax(p, ch))) begin
      failures++;
      $display("FAIL B out %0d: ch=%0d got %0d exp %0d", b_cnt, b_ch, b_data, wmax(p, ch));
    end
    b_cnt++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      a_cnt = 0; b_cnt = 0;
      for (int p = 0; p < L; p++)
        for (int c = 0; c < F; c++) x[p][c] = $signed($urandom_range(255)) - 128;
      for (int p = 0; p < L; p++)
        for (int c = 0; c < F; c++) begin
          @(negedge clk);
          in_valid = 1; in_data = 8'(x[p][c]); in_pos = 8'(p); in_ch = 2'(c);
          if ($urandom_range(2) == 0) begin
            @(negedge clk); in_valid = 0;
          end
        end
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk);
      checks += 2;
      if (a_cnt != ((L - P) / 4 + 1) * F) begin failures++; $display("FAIL A count %0d", a_cnt); end
      if (b_cnt != ((L - P) / 1 + 1) * F) begin failures++; $display("FAIL B count %0d", b_cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
