// tb_sleeplite_ctrl -- self-checking test of the inference sequencer.
// Window length 8, drain 4. Fake layer engines answer each start pulse with
// a done pulse after a random delay. Checks: take only while idle; exactly
// 8 window reads with indices 0..7 in order; the stage order C1, C2, C3, FC;
// at least DRAIN idle cycles between a done and the next start; one
// result_valid per accepted window; windows arriving while busy raise
// overrun and are not taken.
module tb_sleeplite_ctrl;
  localparam int unsigned WIN = 8, DRAIN = 4;
  logic clk = 0, rst_n = 0;
  logic win_ready = 0;
  logic take, clear, overrun, win_rd_en;
  logic [2:0] win_rd_idx;
  logic start_c1, start_c2, start_c3, start_fc;
  logic done_c1 = 0, done_c2 = 0, done_c3 = 0, done_fc = 0;
  logic busy, result_valid;
  int checks = 0, failures = 0;
  int n_take = 0, n_over = 0, n_result = 0, n_reads = 0, exp_idx = 0;
  int order [$];
  longint cyc = 0, last_done = 0;

  sleeplite_ctrl #(.WIN_LEN(WIN), .DRAIN(DRAIN)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fake engine: done pulse 3..20 cycles after its start
  task automatic engine(ref logic st, ref logic dn, input int id);
    forever begin
      @(negedge clk);
      if (st) begin
        checks++;
        if (cyc - last_done < DRAIN) begin
          failures++; $display("FAIL stage %0d started %0d cycles after done", id, cyc - last_done);
        end
        order.push_back(id);
        repeat ($urandom_range(20, 3)) @(negedge clk);
        dn = 1; last_done = cyc;
        @(negedge clk); dn = 0;
      end
    end
  endtask
  initial engine(start_c1, done_c1, 1);
  initial engine(start_c2, done_c2, 2);
  initial engine(start_c3, done_c3, 3);
  initial engine(start_fc, done_fc, 4);

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (win_rd_en) begin
      checks++;
      if (win_rd_idx != 3'(exp_idx)) begin failures++; $display("FAIL read idx %0d", win_rd_idx); end
      exp_idx++; n_reads++;
    end
    if (result_valid) n_result++;
    if (overrun) begin
      n_over++;
      checks++;
      if (take) begin failures++; $display("FAIL take with overrun"); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 6; w++) begin
      @(negedge clk);
      win_ready = 1;
      #1;
      checks++;
      if (!take) begin failures++; $display("FAIL window %0d not taken while idle", w); end
      @(negedge clk); win_ready = 0; exp_idx = 0;
      // a second window while busy is dropped
      repeat (10) @(negedge clk);
      win_ready = 1;
      @(negedge clk); win_ready = 0;
      wait (!busy);
      repeat (2) @(negedge clk);
      checks += 2;
      if (n_reads != WIN * (w + 1)) begin failures++; $display("FAIL %0d reads", n_reads); end
      if (n_result != w + 1) begin failures++; $display("FAIL %0d results", n_result); end
    end
    checks += 2;
    if (n_over != 6) begin failures++; $display("FAIL %0d overruns", n_over); end
    if (order.size() != 24) begin failures++; $display("FAIL %0d stage starts", order.size()); end
    for (int i = 0; i < order.size(); i++) begin
      checks++;
      if (order[i] != (i % 4) + 1) begin failures++; $display("FAIL order[%0d]=%0d", i, order[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
