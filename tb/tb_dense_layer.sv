// tb_dense_layer -- self-checking test of the fully connected layer.
// 37 inputs, 4 outputs, random int8 weights, biases and inputs held in a
// one-cycle-latency RAM model. Checks all four scores against direct dot
// products and the start-to-done time (N_OUT*N_IN + 2 cycles), twice.
module tb_dense_layer;
  localparam int unsigned N_IN = 37, N_OUT = 4, WN = N_IN * N_OUT;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [$clog2(N_IN)-1:0] x_addr;
  logic signed [7:0] x_data;
  logic prm_we = 0;
  logic [$clog2(WN+N_OUT)-1:0] prm_addr = '0;
  logic [7:0] prm_wdata = '0;
  logic signed [31:0] logits [N_OUT];
  int checks = 0, failures = 0;
  int w [N_OUT][N_IN], b [N_OUT], x [N_IN];
  logic signed [7:0] xmem [N_IN];
  longint cyc = 0, t_start, t_done;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .BIAS_SHIFT(7)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) x_data <= xmem[x_addr];
  always @(posedge clk) cyc++;
  always @(negedge clk) if (done) t_done = cyc;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < N_OUT; o++) begin
      b[o] = $signed($urandom_range(255)) - 128;
      for (int i = 0; i < N_IN; i++) w[o][i] = $signed($urandom_range(255)) - 128;
    end
    for (int o = 0; o < N_OUT; o++)
      for (int i = 0; i < N_IN; i++) begin
        @(negedge clk); prm_we = 1; prm_addr = o * N_IN + i; prm_wdata = 8'(w[o][i]);
      end
    for (int o = 0; o < N_OUT; o++) begin
      @(negedge clk); prm_we = 1; prm_addr = WN + o; prm_wdata = 8'(b[o]);
    end
    @(negedge clk); prm_we = 0;
    for (int run = 0; run < 2; run++) begin
      for (int i = 0; i < N_IN; i++) begin
        x[i] = $signed($urandom_range(255)) - 128;
        xmem[i] = 8'(x[i]);
      end
      @(negedge clk); start = 1; t_start = cyc;
      @(negedge clk); start = 0;
      wait (done);
      repeat (2) @(negedge clk);
      for (int o = 0; o < N_OUT; o++) begin
        automatic int e = b[o] * 128;
        for (int i = 0; i < N_IN; i++) e += w[o][i] * x[i];
        checks++;
        if (logits[o] != e) begin
          failures++; $display("FAIL run %0d out %0d got %0d exp %0d", run, o, logits[o], e);
        end
      end
      checks++;
      if (t_done - t_start != N_OUT * N_IN + 2) begin
        failures++; $display("FAIL latency %0d", t_done - t_start);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
