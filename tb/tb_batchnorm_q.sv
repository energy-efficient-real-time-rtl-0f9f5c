// tb_batchnorm_q -- self-checking test of the quantized batch normalization.
// Loads random scales and biases for 4 channels, streams random inputs with
// random gaps and checks each result, one cycle later, against
// clip(floor((x*scale + bias*128) / 128), -128, 127).
module tb_batchnorm_q;
  localparam int unsigned C = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] in_data = '0;
  logic [1:0] in_ch = '0;
  logic out_valid;
  logic signed [7:0] out_data;
  logic [1:0] out_ch;
  logic prm_we = 0;
  logic [2:0] prm_addr = '0;
  logic [7:0] prm_wdata = '0;
  int checks = 0, failures = 0, n_clip = 0;
  int sc [C], bi [C];

  batchnorm_q #(.C(C), .IN_W(16), .SHIFT(7), .BIAS_SHIFT(7)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_of(int x, int ch);
    longint s, q;
    s = longint'(x) * sc[ch] + longint'(bi[ch]) * 128;
    q = (s >= 0) ? s / 128 : -((-s + 127) / 128);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++) begin
      sc[c] = $signed($urandom_range(255)) - 128;
      bi[c] = $signed($urandom_range(255)) - 128;
    end
    for (int a = 0; a < 2 * C; a++) begin
      @(negedge clk);
      prm_we = 1; prm_addr = a;
      prm_wdata = (a < C) ? 8'(sc[a]) : 8'(bi[a - C]);
    end
    @(negedge clk); prm_we = 0;
    for (int n = 0; n < 3000; n++) begin
      int x, ch, e;
      @(negedge clk);
      x  = (n % 4 == 0) ? $signed($urandom_range(65535)) - 32768
                        : $signed($urandom_range(511)) - 256;
      ch = $urandom_range(C - 1);
      in_valid = 1; in_data = 16'(x); in_ch = 2'(ch);
      e = expect_of(x, ch);
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || out_data != 8'(e) || out_ch != 2'(ch)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d ch=%0d got %0d exp %0d v=%0b", x, ch, out_data, e, out_valid);
      end
      if (e == 127 || e == -128) n_clip++;
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        @(posedge clk); #1;
        checks++;
        if (out_valid) failures++;
      end
    end
    if (n_clip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
