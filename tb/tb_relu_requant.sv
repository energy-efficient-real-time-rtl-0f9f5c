// tb_relu_requant -- self-checking test of the quantized ReLU.
// Edge values and random 32-bit sums, compared with floor(acc / 2^7)
// clipped to 0..127 (computed with integer division, not shifts).
module tb_relu_requant;
  logic signed [31:0] acc;
  logic signed [7:0]  y;
  logic               sat;
  int checks = 0, failures = 0, n_sat = 0, n_zero = 0;

  relu_requant #(.ACC_W(32), .OUT_W(8), .SHIFT(7)) dut (.*);

  task automatic check(longint a);
    longint q, e;
    q = (a >= 0) ? a / 128 : -((-a + 127) / 128);   // floor division
    e = (q < 0) ? 0 : (q > 127 ? 127 : q);
    acc = 32'(a);
    #1;
    checks++;
    if (y != 8'(e) || sat != (q > 127)) begin
      failures++;
      $display("FAIL acc=%0d y=%0d sat=%0b exp %0d", a, y, sat, e);
    end
    if (sat) n_sat++;
    if (e == 0) n_zero++;
  endtask

  initial begin
    check(0); check(127); check(128); check(-1); check(-128); check(-129);
    check(127*128); check(127*128 + 127); check(128*128); check(32'sh7fffffff);
    check(-32'sh7fffffff);
    for (int i = 0; i < 5000; i++) begin
      int r;
      r = $urandom;
      check(longint'(r) >>> ($urandom_range(16)));
    end
    if (n_sat == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
