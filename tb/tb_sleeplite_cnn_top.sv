// tb_sleeplite_cnn_top -- end-to-end test of the SleepLiteCNN accelerator at
// its full default size (30 s window of 3840 samples, 10 s step of 1280).
//
// The testbench draws a random set of all 47,281 int8 parameters, loads them
// through the parameter port, and streams a synthetic ECG (a spiky periodic
// beat plus noise) into the accelerator. A behavioural model of the network
// written here from the layer definitions (BN, three conv/ReLU/pool stages,
// BN, fully connected, argmax) computes the expected class scores.
//
// Scenario:
//   1. the first 3840 samples complete window 0 -> inference starts;
//   2. the next 1280 samples arrive while it still runs -> window 1 is
//      dropped (overrun);
//   3. after result 0, 1280 more samples complete window 2 -> inference.
// Checked: the four scores, the stage and the softmax probabilities of
// both inferences; the latency
// from window to result against the multiply-accumulate count; the
// inference, overrun and saturation counters. Every mechanism (window,
// overrun, saturation, each layer) must have happened at least once.
module tb_sleeplite_cnn_top;
  import sleeplite_pkg::*;

  localparam int L0 = 3840, L1C = 1916, L1 = 958, L2C = 949, L2 = 474;
  localparam int L3C = 445, L3 = 111, NFC = L3 * 25;
  localparam longint MACS = longint'(L0) + L1C*5*10 + L2C*45*50 + longint'(L3C)*25*30*45 + 4*NFC;

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

  sleeplite_cnn_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (60_000_000) @(posedge clk);
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
    // address order of the parameter map
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

  // ---- synthetic ECG --------------------------------------------------------
  int ecg [$];
  function automatic int ecg_value(int n);
    int ph = n % 97;                     // about 79 beats per minute at 128 Hz
    int v = (ph < 2) ? 1500 : (ph < 5) ? -400 : (ph > 30 && ph < 45) ? 250 : 0;
    return v + ((n * 13) % 160) - 80 + rnd(-40, 40);
  endfunction

  // ---- reference model ------------------------------------------------------
  function automatic int clip(longint v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : int'(v);
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

  // ---- stimulus helpers -----------------------------------------------------
  int n_fed = 0;
  task automatic feed(int n);
    repeat (n) begin
      @(negedge clk);
      sample_valid = 1; sample = 16'(ecg[n_fed]); n_fed++;
      @(negedge clk);
      sample_valid = 0;
    end
  endtask

  longint t_win, t_res;
  int n_results = 0;
  int stage_seen [4];
  always @(negedge clk) if (rst_n && dut.take) t_win = cyc;
  always @(negedge clk) if (rst_n && result_valid) begin t_res = cyc; n_results++; end

  task automatic check_result(int start, int idx);
    reference(start);
    for (int o = 0; o < 4; o++) begin
      checks++;
      if (logits[o] != ref_logits[o]) begin
        failures++;
        $display("FAIL inference %0d logit %0d: got %0d exp %0d", idx, o, logits[o], ref_logits[o]);
      end
    end
    checks++;
    if (stage != 2'(ref_stage)) begin
      failures++; $display("FAIL inference %0d stage %0d exp %0d", idx, stage, ref_stage);
    end
    stage_seen[stage]++;
    // probabilities: the stage has the largest, and they sum to about 255
    begin
      automatic int psum = 0;
      for (int o = 0; o < 4; o++) begin
        psum += prob[o];
        checks++;
        if (prob[o] > prob[stage]) begin
          failures++; $display("FAIL prob[%0d]=%0d above prob[stage]=%0d", o, prob[o], prob[stage]);
        end
      end
      checks++;
      if (psum < 251 || psum > 259) begin failures++; $display("FAIL probabilities sum to %0d", psum); end
      $display("probabilities %0d %0d %0d %0d (255 = 1.0)", prob[0], prob[1], prob[2], prob[3]);
    end
    checks++;
    if (t_res - t_win < MACS || t_res - t_win > MACS + 64) begin
      failures++; $display("FAIL latency %0d cycles, MACs %0d", t_res - t_win, MACS);
    end
    $display("inference %0d: window from sample %0d, stage %0d, logits %0d %0d %0d %0d, %0d cycles (%0d MACs), %0d clipped activations",
             idx, start, stage, logits[0], logits[1], logits[2], logits[3], t_res - t_win, MACS, ref_sat);
  endtask

  // ---- main -------------------------------------------------------------------
  initial begin
    int sat_ref_total;
    make_params();
    for (int n = 0; n < L0 + 3 * 1280; n++) ecg.push_back(ecg_value(n));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < prm_q.size(); a++) begin
      @(negedge clk);
      prm_we = 1; prm_addr = 16'(a); prm_wdata = prm_q[a];
    end
    @(negedge clk); prm_we = 0;
    checks++;
    if (prm_q.size() != 47281) begin failures++; $display("FAIL %0d parameters", prm_q.size()); end

    // window 0, then window 1 while busy
    feed(L0);
    feed(1280);
    repeat (3) @(negedge clk);
    checks++;
    if (!busy || overrun_count != 1) begin
      failures++; $display("FAIL expected overrun: busy=%0b overruns=%0d", busy, overrun_count);
    end
    wait (result_valid);
    repeat (2) @(negedge clk);
    check_result(0, 0);
    sat_ref_total = ref_sat;

    // window 2
    feed(1280);
    wait (result_valid);
    repeat (2) @(negedge clk);
    check_result(2560, 1);
    sat_ref_total += ref_sat;

    checks += 3;
    if (inference_count != 2) begin failures++; $display("FAIL inference_count %0d", inference_count); end
    if (overrun_count != 1)   begin failures++; $display("FAIL overrun_count %0d", overrun_count); end
    if (sat_count != 32'(sat_ref_total)) begin
      failures++; $display("FAIL sat_count %0d exp %0d", sat_count, sat_ref_total);
    end
    // every mechanism must have happened
    checks++;
    if (n_results != 2 || overrun_count == 0 || sat_count == 0) begin
      failures++; $display("FAIL mechanism not exercised: results %0d overruns %0d saturations %0d",
                           n_results, overrun_count, sat_count);
    end
    $display("mechanisms: windows taken %0d, windows dropped %0d, clipped activations %0d",
             inference_count, overrun_count, sat_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
