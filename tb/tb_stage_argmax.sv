// tb_stage_argmax -- self-checking test of the stage decision.
// Random and tied scores; the expected index is the first maximum.
module tb_stage_argmax;
  logic signed [31:0] logits [4];
  logic [1:0]         idx;
  logic signed [31:0] max_val;
  int checks = 0, failures = 0;
  int hits [4];

  stage_argmax #(.N(4), .ACC_W(32)) dut (.*);

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int e; int m;
      for (int i = 0; i < 4; i++)
        logits[i] = (n % 3 == 0) ? $signed($urandom_range(6)) - 3 : $signed($urandom);
      e = 0; m = logits[0];
      for (int i = 1; i < 4; i++) if (logits[i] > m) begin m = logits[i]; e = i; end
      #1;
      checks++;
      if (idx != 2'(e) || max_val != m) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d idx=%0d exp %0d", n, idx, e);
      end
      hits[e]++;
    end
    for (int i = 0; i < 4; i++) if (hits[i] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
