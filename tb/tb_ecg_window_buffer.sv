// tb_ecg_window_buffer -- self-checking test of the sliding window buffer.
// Window 12, step 4 (the 3:1 ratio of 30 s / 10 s). Samples arrive with
// random gaps. Checks that win_ready fires after sample 12, 16, 20, ...,
// and only then; that a taken window reads back as the last 12 samples in
// order; and that a taken window survives the next 4 samples written while
// it is being read slowly.
module tb_ecg_window_buffer;
  localparam int unsigned WIN = 12, STEP = 4;
  logic clk = 0, rst_n = 0;
  logic sample_valid = 0;
  logic signed [15:0] sample = '0;
  logic win_ready, take = 0;
  logic [3:0] rd_idx = '0;
  logic signed [15:0] rd_data;
  int checks = 0, failures = 0;
  int hist [$];
  int n_win = 0, n_sent = 0;

  ecg_window_buffer #(.WIN_LEN(WIN), .STEP_LEN(STEP), .SAMPLE_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int v);
    @(negedge clk);
    sample_valid = 1; sample = 16'(v);
    hist.push_back(v); n_sent++;
    @(negedge clk);
    sample_valid = 0;
    // win_ready is registered: visible now, one cycle after the sample
    checks++;
    if (win_ready != (n_sent >= WIN && (n_sent - WIN) % STEP == 0)) begin
      failures++; $display("FAIL win_ready=%0b after sample %0d", win_ready, n_sent);
    end
  endtask

  task automatic read_window(int first, bit slow);
    for (int i = 0; i < WIN; i++) begin
      @(negedge clk); rd_idx = 4'(i);
      @(negedge clk);
      checks++;
      if (rd_data != 16'(hist[first + i])) begin
        failures++; $display("FAIL idx %0d got %0d exp %0d", i, rd_data, hist[first + i]);
      end
      // slow reader: new samples keep arriving while the window is read
      if (slow && i < STEP) send($urandom_range(30000));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      send($signed($urandom_range(65535)) - 32768);
      if (win_ready) begin
        automatic int first = n_sent - WIN;
        take = 1;
        @(negedge clk); take = 0;
        n_win++;
        read_window(first, n_win % 2 == 0);
      end
      repeat ($urandom_range(2)) @(negedge clk);
    end
    checks++;
    if (n_win < 10) begin failures++; $display("FAIL only %0d windows", n_win); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
