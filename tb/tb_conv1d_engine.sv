// tb_conv1d_engine -- self-checking test of the convolution engine.
// A small layer (3 input channels, 4 filters, kernel 5, stride 2, 21 input
// positions) with random int8 weights, biases and inputs. The testbench holds
// the input feature map in its own one-cycle-latency RAM. Every result is
// compared with the convolution sum computed directly; the result order,
// the number of results and the cycle count from start to done
// (L_OUT*F*K*C_IN + 2) are checked. Two layer runs with new inputs.
module tb_conv1d_engine;
  localparam int unsigned C_IN = 3, F = 4, K = 5, S = 2, L_IN = 21;
  localparam int unsigned L_OUT = (L_IN - K) / S + 1;
  localparam int unsigned WN = F * K * C_IN;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [$clog2(L_IN*C_IN)-1:0] x_addr;
  logic signed [7:0] x_data;
  logic prm_we = 0;
  logic [$clog2(WN+F)-1:0] prm_addr = '0;
  logic [7:0] prm_wdata = '0;
  logic y_valid;
  logic signed [31:0] y_acc;
  logic [$clog2(L_IN+1)-1:0] y_pos;
  logic [1:0] y_ch;
  int checks = 0, failures = 0;
  int w [F][K][C_IN], b [F], x [L_IN][C_IN];
  logic signed [7:0] xmem [L_IN*C_IN];
  int n_out;
  longint t_start, t_done;

  conv1d_engine #(.C_IN(C_IN), .F(F), .K(K), .S(S), .L_IN(L_IN), .BIAS_SHIFT(7)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) x_data <= xmem[x_addr];

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_y(int t, int f);
    int s = b[f] * 128;
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C_IN; c++) s += w[f][k][c] * x[t * S + k][c];
    return s;
  endfunction

  always @(negedge clk) if (rst_n && y_valid) begin
    automatic int t = n_out / F, f = n_out % F;
    checks++;
    if (y_acc != ref_y(t, f) || y_pos != 5'(t) || y_ch != 2'(f)) begin
      failures++;
      if (failures < 10) $display("FAIL out %0d (t=%0d f=%0d): got %0d pos %0d ch %0d exp %0d",
                                  n_out, t, f, y_acc, y_pos, y_ch, ref_y(t, f));
    end
    n_out++;
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (done) t_done = cyc;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < F; f++) begin
      b[f] = $signed($urandom_range(255)) - 128;
      for (int k = 0; k < K; k++)
        for (int c = 0; c < C_IN; c++) w[f][k][c] = $signed($urandom_range(255)) - 128;
    end
    for (int f = 0; f < F; f++)
      for (int k = 0; k < K; k++)
        for (int c = 0; c < C_IN; c++) begin
          @(negedge clk); prm_we = 1; prm_addr = (f * K + k) * C_IN + c;
          prm_wdata = 8'(w[f][k][c]);
        end
    for (int f = 0; f < F; f++) begin
      @(negedge clk); prm_we = 1; prm_addr = WN + f; prm_wdata = 8'(b[f]);
    end
    @(negedge clk); prm_we = 0;
    for (int run = 0; run < 2; run++) begin
      for (int p = 0; p < L_IN; p++)
        for (int c = 0; c < C_IN; c++) begin
          x[p][c] = (run == 0) ? $signed($urandom_range(255)) - 128 : $urandom_range(127);
          xmem[p * C_IN + c] = 8'(x[p][c]);
        end
      n_out = 0; t_done = 0;
      @(negedge clk); start = 1; t_start = cyc;
      @(negedge clk); start = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy after start"); end
      wait (done);
      @(negedge clk);
      repeat (3) @(negedge clk);
      checks += 3;
      if (n_out != L_OUT * F) begin failures++; $display("FAIL %0d results", n_out); end
      if (t_done - t_start != L_OUT * F * K * C_IN + 2) begin
        failures++; $display("FAIL latency %0d", t_done - t_start);
      end
      if (busy) begin failures++; $display("FAIL still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
