// tb_sleeplite_stream -- continuous-recording test of sleeplite_cnn_top.
//
// This test runs the accelerator as it runs overnight: samples arrive at a
// fixed pace, one every PACE clock cycles, and every STEP samples a new
// window must be classified before the next one is complete. The window and
// step are scaled down ten times (WIN 384, STEP 128: 3 s and 1 s at 128 Hz)
// so that a long sequence of consecutive windows fits in a short simulation;
// the layer structure, the parameter map and the arithmetic are those of the
// full design, and the smaller shapes follow from WIN through the same
// formulas (conv 188, pool 94, conv 85, pool 42, conv 13, pool 3, 75 inputs
// to the dense layer).
//
// PACE is chosen just above real time: STEP * PACE clock cycles between
// windows against one inference of MACS cycles, so no window may be dropped.
// The synthetic ECG changes its beat rate and amplitude from one stretch of
// the recording to the next, so the windows differ.
//
// Checked for each of the N_WIN windows, in order: the four scores and the
// stage against a behavioural model of the network written here, the
// softmax probabilities (largest at the stage, sum near 255) and the latency
// from the start of the inference to its result. At the end: every window
// was classified, none was dropped, and the inference and saturation
// counters agree with the model.
module tb_sleeplite_stream;
  import sleeplite_pkg::*;

  localparam int WIN = 384, STEP = 128, N_WIN = 12;
  localparam int L0 = WIN;
  localparam int L1C = (L0 - 10) / 2 + 1, L1 = L1C / 2;
  localparam int L2C = L1 - 10 + 1, L2 = L2C / 2;
  localparam int L3C = L2 - 30 + 1, L3 = (L3C - 4) / 4 + 1;
  localparam int NFC = L3 * 25;
  localparam longint MACS = longint'(L0) + L1C*5*10 + L2C*45*50 + longint'(L3C)*25*30*45 + 4*NFC;
  localparam int PACE = int'((MACS + 2000) / longint'(STEP)) + 1;
  localparam int N_SAMPLES = WIN + (N_WIN - 1) * STEP;
  localparam int WDOG = int'(longint'(N_SAMPLES + 8) * longint'(PACE) + 2 * MACS);

  logic clk = 0, rst_n = 0;
  logic sample_valid = 0;
  logic signed [15:0] sample = '0;
  logic prm_we = 0;
  logic [15:0] prm_addr = '0;
  logic [7:0] prm_wdata = '0;
  logic result_valid, busy;
  logic [1:0] stage;
  logic signed [31:0] logits [4];
  logic [7:0] prob [4];
  logic [15:0] inference_count, overrun_count;
  logic [31:0] sat_count;

  sleeplite_cnn_top #(.WIN(WIN), .STEP(STEP)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- parameters ----------------------------------------------------------
  int bni_s, bni_b;
  int w1 [5][10], b1 [5];
  int w2 [45][10][5], b2 [45];
  int w3 [25][30][45], b3 [25];
  int bno_s [25], bno_b [25];
  int wf [4][NFC], bf [4];
  byte prm_q [$];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic make_params();
    bni_s = rnd(64, 127); bni_b = rnd(-8, 8);
    foreach (w1[f, k]) w1[f][k] = rnd(-64, 64);
    foreach (b1[f]) b1[f] = rnd(-10, 30);
    foreach (w2[f, k, c]) w2[f][k][c] = rnd(-32, 32);
    foreach (b2[f]) b2[f] = rnd(-10, 30);
    foreach (w3[f, k, c]) w3[f][k][c] = rnd(-12, 12);
    foreach (b3[f]) b3[f] = rnd(-10, 30);
    foreach (bno_s[c]) begin bno_s[c] = rnd(32, 127); bno_b[c] = rnd(-20, 20); end
    foreach (wf[o, i]) wf[o][i] = rnd(-127, 127);
    foreach (bf[o]) bf[o] = rnd(-127, 127);
    prm_q.push_back(byte'(bni_s)); prm_q.push_back(byte'(bni_b));
    for (int f = 0; f < 5; f++) for (int k = 0; k < 10; k++) prm_q.push_back(byte'(w1[f][k]));
    for (int f = 0; f < 5; f++) prm_q.push_back(byte'(b1[f]));
    for (int f = 0; f < 45; f++) for (int k = 0; k < 10; k++) for (int c = 0; c < 5; c++)
      prm_q.push_back(byte'(w2[f][k][c]));
    for (int f = 0; f < 45; f++) prm_q.push_back(byte'(b2[f]));
    for (int f = 0; f < 25; f++) for (int k = 0; k < 30; k++) for (int c = 0; c < 45; c++)
      prm_q.push_back(byte'(w3[f][k][c]));
    for (int f = 0; f < 25; f++) prm_q.push_back(byte'(b3[f]));
    for (int c = 0; c < 25; c++) prm_q.push_back(byte'(bno_s[c]));
    for (int c = 0; c < 25; c++) prm_q.push_back(byte'(bno_b[c]));
    for (int o = 0; o < 4; o++) for (int i = 0; i < NFC; i++) prm_q.push_back(byte'(wf[o][i]));
    for (int o = 0; o < 4; o++) prm_q.push_back(byte'(bf[o]));
  endtask

  // ---- synthetic ECG: beat period and amplitude change every 200 samples ----
  int ecg [$];
  function automatic int ecg_value(int n);
    int seg = (n / 200) % 5;
    int period = 60 + 17 * seg;
    int amp = 600 + 400 * ((seg * 3) % 4);
    int ph = n % period;
    int v = (ph < 2) ? amp : (ph < 5) ? -amp / 4 : (ph > 20 && ph < 35) ? amp / 6 : 0;
    return v + ((n * 13) % 160) - 80 + rnd(-40, 40);
  endfunction

  // ---- reference model ------------------------------------------------------
  function automatic int clip(longint v, int lo, int hi);
    return (v < longint'(lo)) ? lo : (v > longint'(hi)) ? hi : int'(v);
  endfunction

  int ref_logits [4];
  int ref_stage;
  int ref_sat;

  task automatic reference(int start);
    int a0 [L0];
    int a1 [L1][5];
    int a2 [L2][45];
    int a3 [L3][25];
    int c1 [L1C][5];
    int c2 [L2C][45];
    int c3 [L3C][25];
    ref_sat = 0;
    for (int i = 0; i < L0; i++)
      a0[i] = clip((longint'(ecg[start + i]) * bni_s + bni_b * 128) >>> 7, -128, 127);
    for (int t = 0; t < L1C; t++) for (int f = 0; f < 5; f++) begin
      longint s = b1[f] * 128;
      for (int k = 0; k < 10; k++) s += w1[f][k] * a0[2 * t + k];
      if ((s >>> 7) > 127) ref_sat++;
      c1[t][f] = clip(s >>> 7, 0, 127);
    end
    for (int p = 0; p < L1; p++) for (int f = 0; f < 5; f++)
      a1[p][f] = (c1[2*p][f] > c1[2*p+1][f]) ? c1[2*p][f] : c1[2*p+1][f];
    for (int t = 0; t < L2C; t++) for (int f = 0; f < 45; f++) begin
      longint s = b2[f] * 128;
      for (int k = 0; k < 10; k++) for (int c = 0; c < 5; c++) s += w2[f][k][c] * a1[t + k][c];
      if ((s >>> 7) > 127) ref_sat++;
      c2[t][f] = clip(s >>> 7, 0, 127);
    end
    for (int p = 0; p < L2; p++) for (int f = 0; f < 45; f++)
      a2[p][f] = (c2[2*p][f] > c2[2*p+1][f]) ? c2[2*p][f] : c2[2*p+1][f];
    for (int t = 0; t < L3C; t++) for (int f = 0; f < 25; f++) begin
      longint s = b3[f] * 128;
      for (int k = 0; k < 30; k++) for (int c = 0; c < 45; c++) s += w3[f][k][c] * a2[t + k][c];
      if ((s >>> 7) > 127) ref_sat++;
      c3[t][f] = clip(s >>> 7, 0, 127);
    end
    for (int p = 0; p < L3; p++) for (int f = 0; f < 25; f++) begin
      int m = c3[4*p][f];
      for (int j = 1; j < 4; j++) if (c3[4*p + j][f] > m) m = c3[4*p + j][f];
      a3[p][f] = clip((longint'(m) * bno_s[f] + bno_b[f] * 128) >>> 7, -128, 127);
    end
    for (int o = 0; o < 4; o++) begin
      longint s = bf[o] * 128;
      for (int p = 0; p < L3; p++) for (int f = 0; f < 25; f++) s += wf[o][p * 25 + f] * a3[p][f];
      ref_logits[o] = int'(s);
    end
    ref_stage = 0;
    for (int o = 1; o < 4; o++) if (ref_logits[o] > ref_logits[ref_stage]) ref_stage = o;
  endtask

  // ---- inference start times (rising edge of busy) --------------------------
  longint start_q [$];
  logic busy_d = 0;
  always @(negedge clk) begin
    if (rst_n && busy && !busy_d) start_q.push_back(cyc);
    busy_d <= busy;
  end

  int n_results = 0;
  int sat_ref_total = 0;
  int stage_seen [4];

  task automatic check_result(longint t_res);
    automatic int start = n_results * STEP;
    automatic int psum = 0;
    automatic longint t_start = (start_q.size() > 0) ? start_q.pop_front() : 0;
    reference(start);
    sat_ref_total += ref_sat;
    for (int o = 0; o < 4; o++) begin
      checks++;
      if (logits[o] != ref_logits[o]) begin
        failures++;
        $display("FAIL window %0d logit %0d: got %0d exp %0d", n_results, o, logits[o], ref_logits[o]);
      end
    end
    checks++;
    if (stage != 2'(ref_stage)) begin
      failures++; $display("FAIL window %0d stage %0d exp %0d", n_results, stage, ref_stage);
    end
    stage_seen[stage]++;
    for (int o = 0; o < 4; o++) begin
      psum += int'(prob[o]);
      checks++;
      if (prob[o] > prob[stage]) begin
        failures++; $display("FAIL window %0d prob[%0d]=%0d above prob[stage]=%0d", n_results, o, prob[o], prob[stage]);
      end
    end
    checks++;
    if (psum < 251 || psum > 259) begin failures++; $display("FAIL probabilities sum to %0d", psum); end
    checks++;
    if (t_res - t_start < MACS - 8 || t_res - t_start > MACS + 64) begin
      failures++; $display("FAIL window %0d latency %0d cycles, MACs %0d", n_results, t_res - t_start, MACS);
    end
    $display("window %0d (samples %0d..%0d): stage %0d, probabilities %0d %0d %0d %0d, %0d cycles",
             n_results, start, start + WIN - 1, stage, prob[0], prob[1], prob[2], prob[3], t_res - t_start);
    n_results++;
  endtask

  // ---- main -------------------------------------------------------------------
  initial begin
    make_params();
    for (int n = 0; n < N_SAMPLES; n++) ecg.push_back(ecg_value(n));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < prm_q.size(); a++) begin
      @(negedge clk);
      prm_we = 1; prm_addr = 16'(a); prm_wdata = prm_q[a];
    end
    @(negedge clk); prm_we = 0;
    $display("window %0d samples, step %0d, one sample every %0d cycles, %0d cycles per inference",
             WIN, STEP, PACE, MACS);

    fork
      // the sensor: one sample every PACE cycles
      for (int n = 0; n < N_SAMPLES; n++) begin
        @(negedge clk);
        sample_valid = 1; sample = 16'(ecg[n]);
        @(negedge clk);
        sample_valid = 0;
        repeat (PACE - 2) @(negedge clk);
      end
      // the results, checked in window order
      while (n_results < N_WIN) begin
        longint t_res;
        @(negedge clk iff result_valid);
        t_res = cyc;
        repeat (2) @(negedge clk);
        check_result(t_res);
      end
    join

    checks += 4;
    if (inference_count != 16'(N_WIN)) begin failures++; $display("FAIL inference_count %0d", inference_count); end
    if (overrun_count != 0) begin failures++; $display("FAIL %0d windows dropped", overrun_count); end
    if (sat_count != 32'(sat_ref_total)) begin
      failures++; $display("FAIL sat_count %0d exp %0d", sat_count, sat_ref_total);
    end
    if (busy) begin failures++; $display("FAIL still busy after the last window"); end
    $display("stages over the recording: WAKE %0d, REM %0d, LIGHT %0d, DEEP %0d; clipped activations %0d",
             stage_seen[0], stage_seen[1], stage_seen[2], stage_seen[3], sat_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
