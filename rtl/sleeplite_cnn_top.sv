// sleeplite_cnn_top -- quantized SleepLiteCNN sleep-stage classifier.
//
// A single-lead ECG stream goes in; every 10 s of signal (1280 samples at
// 128 Hz) the accelerator classifies the latest 30 s window (3840 samples)
// into WAKE, REM, LIGHT or DEEP sleep. The network is
//   BN -> conv(5 filters, k10, s2) -> ReLU -> maxpool(2, s2)
//      -> conv(45, k10, s1) -> ReLU -> maxpool(2, s2)
//      -> conv(25, k30, s1) -> ReLU -> maxpool(4, s POOL3_S)
//      -> BN -> flatten (111 x 25 = 2775) -> [dropout] -> FC(4)
//      -> argmax (stage) and softmax (probabilities)
// with 8-bit weights and activations, 47,333 parameters in all.
//
// Dataflow: ecg_window_buffer announces a complete window; sleeplite_ctrl
// takes it and copies it through the input BN into fm0, then runs the
// convolution engines one after another. Each engine streams its sums through
// ReLU/requantization and max pooling into the next feature-map RAM (fm1,
// fm2); the last one also passes the 25-channel BN on its way into fm3. The
// fully connected layer reads fm3 in address order (that is the flatten) and
// the largest of its four scores is the stage. An inference takes about
// 17.3 million clock cycles with the default shapes.
//
// Parameters are loaded before use through prm_we/prm_addr/prm_wdata (one
// signed byte per write) with this flat address map:
//   input BN (scale, bias) | conv1 w,b | conv2 w,b | conv3 w,b |
//   output BN (25 scales, 25 biases) | FC w (o*2775+i), b
// Conv weights are ordered w[f][k][c] ((f*K+k)*C+c), each followed by its
// biases. By default all values are Q0.7 int8 and each layer shifts by 7 to
// return to that scale, the ECG sample being read with 7 fraction bits; the
// *_SHIFT and *_BSHIFT parameters set other power-of-two scales per layer.
//
// Outputs: result_valid pulses for one cycle with stage, logits and prob
// (softmax, 255 = 1.0, held until the next result); busy is
// high during an inference; inference_count and overrun_count (windows
// dropped because the previous inference was still running) and sat_count
// (activations clipped at +127) are running totals since reset.
//
// The layer shapes, window and step follow the published design. The
// hardware organisation (sequential layers, one MAC per layer), the number
// formats, the parameter port and the counters are this design's.
module sleeplite_cnn_top
  import sleeplite_pkg::*;
#(
  parameter int unsigned WIN     = WIN_LEN,
  parameter int unsigned STEP    = STEP_LEN,
  parameter int unsigned POOL3_S = 4,
  // requantization: each layer shifts its sum right by *_SHIFT bits and
  // aligns its int8 bias by *_BSHIFT bits (7 and 7 for all-Q0.7 tensors)
  parameter int unsigned BNI_SHIFT  = 7,
  parameter int unsigned BNI_BSHIFT = 7,
  parameter int unsigned C1_SHIFT   = 7,
  parameter int unsigned C1_BSHIFT  = 7,
  parameter int unsigned C2_SHIFT   = 7,
  parameter int unsigned C2_BSHIFT  = 7,
  parameter int unsigned C3_SHIFT   = 7,
  parameter int unsigned C3_BSHIFT  = 7,
  parameter int unsigned BNO_SHIFT  = 7,
  parameter int unsigned BNO_BSHIFT = 7,
  parameter int unsigned FC_BSHIFT  = 7,
  // fraction bits of the class scores (FC input 7 + FC weight 7)
  parameter int unsigned LOGIT_FRAC = 14,
  // ---- derived shapes ---------------------------------------------------------
  localparam int unsigned L1C   = conv_len(WIN, C1_K, C1_S),
  localparam int unsigned L1    = pool_len(L1C, P1_P, P1_S),
  localparam int unsigned L2C   = conv_len(L1, C2_K, C2_S),
  localparam int unsigned L2    = pool_len(L2C, P2_P, P2_S),
  localparam int unsigned L3C   = conv_len(L2, C3_K, C3_S),
  localparam int unsigned L3    = pool_len(L3C, P3_P, POOL3_S),
  localparam int unsigned N_FC  = L3 * C3_F,
  // ---- parameter address map -------------------------------------------------
  localparam int unsigned N_BNI = 2,
  localparam int unsigned N_C1  = conv_prm(1, C1_F, C1_K),
  localparam int unsigned N_C2  = conv_prm(C1_F, C2_F, C2_K),
  localparam int unsigned N_C3  = conv_prm(C2_F, C3_F, C3_K),
  localparam int unsigned N_BNO = 2 * C3_F,
  localparam int unsigned N_FCP = N_FC * N_CLASSES + N_CLASSES,
  localparam int unsigned B_C1  = N_BNI,
  localparam int unsigned B_C2  = B_C1 + N_C1,
  localparam int unsigned B_C3  = B_C2 + N_C2,
  localparam int unsigned B_BNO = B_C3 + N_C3,
  localparam int unsigned B_FC  = B_BNO + N_BNO,
  localparam int unsigned N_PRM = B_FC + N_FCP,
  localparam int unsigned AW    = $clog2(N_PRM)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ECG input
  input  logic                       sample_valid,
  input  logic signed [SAMPLE_W-1:0] sample,
  // parameter load port
  input  logic                       prm_we,
  input  logic [AW-1:0]              prm_addr,
  input  logic [7:0]                 prm_wdata,
  // results
  output logic                       result_valid,
  output logic [1:0]                 stage,
  output logic signed [ACC_W-1:0]    logits [N_CLASSES],
  output logic [7:0]                 prob   [N_CLASSES],
  output logic                       busy,
  output logic [15:0]                inference_count,
  output logic [15:0]                overrun_count,
  output logic [31:0]                sat_count
);

  // ---- parameter decode ----------------------------------------------------------
  function automatic logic in_rng(logic [AW-1:0] a, int unsigned b, int unsigned n);
    return (32'(a) >= b) && (32'(a) < b + n);
  endfunction
  logic [AW-1:0] a_c1, a_c2, a_c3, a_bno, a_fc;
  assign a_c1  = prm_addr - AW'(B_C1);
  assign a_c2  = prm_addr - AW'(B_C2);
  assign a_c3  = prm_addr - AW'(B_C3);
  assign a_bno = prm_addr - AW'(B_BNO);
  assign a_fc  = prm_addr - AW'(B_FC);

  // ---- control ---------------------------------------------------------------
  localparam int unsigned IW = $clog2(WIN);
  logic          win_ready, take, clear, overrun, win_rd_en;
  logic [IW-1:0] win_rd_idx;
  logic          start_c1, start_c2, start_c3, start_fc;
  logic          done_c1, done_c2, done_c3, done_fc;
  logic          ctrl_result;

  sleeplite_ctrl #(.WIN_LEN(WIN)) u_ctrl (
    .clk, .rst_n, .win_ready, .take, .clear, .overrun, .win_rd_en, .win_rd_idx,
    .start_c1, .start_c2, .start_c3, .start_fc,
    .done_c1, .done_c2, .done_c3, .done_fc,
    .busy, .result_valid(ctrl_result)
  );

  // ---- window buffer and input BN -> fm0 --------------------------------------
  logic signed [SAMPLE_W-1:0] win_data;
  logic                       win_data_valid;

  ecg_window_buffer #(.WIN_LEN(WIN), .STEP_LEN(STEP), .SAMPLE_W(SAMPLE_W)) u_wbuf (
    .clk, .rst_n, .sample_valid, .sample, .win_ready, .take,
    .rd_idx(win_rd_idx), .rd_data(win_data)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) win_data_valid <= 1'b0;
    else        win_data_valid <= win_rd_en;

  logic              bni_valid;
  logic signed [7:0] bni_data;
  logic [0:0]        bni_ch;

  batchnorm_q #(.C(1), .IN_W(SAMPLE_W), .SHIFT(BNI_SHIFT), .BIAS_SHIFT(BNI_BSHIFT)) u_bn_in (
    .clk, .rst_n, .in_valid(win_data_valid), .in_data(win_data), .in_ch(1'b0),
    .out_valid(bni_valid), .out_data(bni_data), .out_ch(bni_ch),
    .prm_we(prm_we && in_rng(prm_addr, 0, N_BNI)), .prm_addr(prm_addr[0:0]),
    .prm_wdata
  );

  localparam int unsigned D0 = WIN, D1 = L1 * C1_F, D2 = L2 * C2_F, D3 = N_FC;
  logic [$clog2(D0)-1:0] wa0, ra0;
  logic [$clog2(D1)-1:0] wa1, ra1;
  logic [$clog2(D2)-1:0] wa2, ra2;
  logic [$clog2(D3)-1:0] wa3, ra3;
  logic signed [7:0] rd0, rd1, rd2, rd3;

  sdp_ram #(.DEPTH(D0), .W(8)) u_fm0 (.clk, .we(bni_valid), .waddr(wa0),
    .wdata(bni_data), .raddr(ra0), .rdata(rd0));

  // ---- stage 1 ---------------------------------------------------------------
  localparam int unsigned T1 = $clog2(WIN + 1);
  logic                     y1_valid;
  logic signed [ACC_W-1:0]  y1_acc;
  logic [T1-1:0]            y1_pos;
  logic [$clog2(C1_F)-1:0]  y1_ch, p1_ch;
  logic signed [7:0]        r1, p1_data;
  logic                     s1, p1_valid, busy_c1;

  conv1d_engine #(.C_IN(1), .F(C1_F), .K(C1_K), .S(C1_S), .L_IN(WIN),
                  .BIAS_SHIFT(C1_BSHIFT)) u_conv1 (
    .clk, .rst_n, .start(start_c1), .busy(busy_c1), .done(done_c1),
    .x_addr(ra0), .x_data(rd0),
    .prm_we(prm_we && in_rng(prm_addr, B_C1, N_C1)),
    .prm_addr(a_c1[$clog2(N_C1)-1:0]), .prm_wdata,
    .y_valid(y1_valid), .y_acc(y1_acc), .y_pos(y1_pos), .y_ch(y1_ch)
  );
  relu_requant #(.ACC_W(ACC_W), .OUT_W(8), .SHIFT(C1_SHIFT)) u_relu1 (
    .acc(y1_acc), .y(r1), .sat(s1));
  maxpool1d #(.F(C1_F), .P(P1_P), .S(P1_S), .PW(T1)) u_pool1 (
    .clk, .rst_n, .clear, .in_valid(y1_valid), .in_data(r1), .in_pos(y1_pos),
    .in_ch(y1_ch), .out_valid(p1_valid), .out_data(p1_data), .out_ch(p1_ch));

  sdp_ram #(.DEPTH(D1), .W(8)) u_fm1 (.clk, .we(p1_valid), .waddr(wa1),
    .wdata(p1_data), .raddr(ra1), .rdata(rd1));

  // ---- stage 2 ---------------------------------------------------------------
  localparam int unsigned T2 = $clog2(L1 + 1);
  logic                     y2_valid;
  logic signed [ACC_W-1:0]  y2_acc;
  logic [T2-1:0]            y2_pos;
  logic [$clog2(C2_F)-1:0]  y2_ch, p2_ch;
  logic signed [7:0]        r2, p2_data;
  logic                     s2, p2_valid, busy_c2;

  conv1d_engine #(.C_IN(C1_F), .F(C2_F), .K(C2_K), .S(C2_S), .L_IN(L1),
                  .BIAS_SHIFT(C2_BSHIFT)) u_conv2 (
    .clk, .rst_n, .start(start_c2), .busy(busy_c2), .done(done_c2),
    .x_addr(ra1), .x_data(rd1),
    .prm_we(prm_we && in_rng(prm_addr, B_C2, N_C2)),
    .prm_addr(a_c2[$clog2(N_C2)-1:0]), .prm_wdata,
    .y_valid(y2_valid), .y_acc(y2_acc), .y_pos(y2_pos), .y_ch(y2_ch)
  );
  relu_requant #(.ACC_W(ACC_W), .OUT_W(8), .SHIFT(C2_SHIFT)) u_relu2 (
    .acc(y2_acc), .y(r2), .sat(s2));
  maxpool1d #(.F(C2_F), .P(P2_P), .S(P2_S), .PW(T2)) u_pool2 (
    .clk, .rst_n, .clear, .in_valid(y2_valid), .in_data(r2), .in_pos(y2_pos),
    .in_ch(y2_ch), .out_valid(p2_valid), .out_data(p2_data), .out_ch(p2_ch));

  sdp_ram #(.DEPTH(D2), .W(8)) u_fm2 (.clk, .we(p2_valid), .waddr(wa2),
    .wdata(p2_data), .raddr(ra2), .rdata(rd2));

  // ---- stage 3 and output BN ------------------------------------------------
  localparam int unsigned T3 = $clog2(L2 + 1);
  logic                     y3_valid;
  logic signed [ACC_W-1:0]  y3_acc;
  logic [T3-1:0]            y3_pos;
  logic [$clog2(C3_F)-1:0]  y3_ch, p3_ch, bno_ch;
  logic signed [7:0]        r3, p3_data, bno_data;
  logic                     s3, p3_valid, bno_valid, busy_c3;

  conv1d_engine #(.C_IN(C2_F), .F(C3_F), .K(C3_K), .S(C3_S), .L_IN(L2),
                  .BIAS_SHIFT(C3_BSHIFT)) u_conv3 (
    .clk, .rst_n, .start(start_c3), .busy(busy_c3), .done(done_c3),
    .x_addr(ra2), .x_data(rd2),
    .prm_we(prm_we && in_rng(prm_addr, B_C3, N_C3)),
    .prm_addr(a_c3[$clog2(N_C3)-1:0]), .prm_wdata,
    .y_valid(y3_valid), .y_acc(y3_acc), .y_pos(y3_pos), .y_ch(y3_ch)
  );
  relu_requant #(.ACC_W(ACC_W), .OUT_W(8), .SHIFT(C3_SHIFT)) u_relu3 (
    .acc(y3_acc), .y(r3), .sat(s3));
  maxpool1d #(.F(C3_F), .P(P3_P), .S(POOL3_S), .PW(T3)) u_pool3 (
    .clk, .rst_n, .clear, .in_valid(y3_valid), .in_data(r3), .in_pos(y3_pos),
    .in_ch(y3_ch), .out_valid(p3_valid), .out_data(p3_data), .out_ch(p3_ch));

  batchnorm_q #(.C(C3_F), .IN_W(8), .SHIFT(BNO_SHIFT), .BIAS_SHIFT(BNO_BSHIFT)) u_bn_out (
    .clk, .rst_n, .in_valid(p3_valid), .in_data(p3_data), .in_ch(p3_ch),
    .out_valid(bno_valid), .out_data(bno_data), .out_ch(bno_ch),
    .prm_we(prm_we && in_rng(prm_addr, B_BNO, N_BNO)),
    .prm_addr(a_bno[$clog2(N_BNO)-1:0]), .prm_wdata
  );

  sdp_ram #(.DEPTH(D3), .W(8)) u_fm3 (.clk, .we(bno_valid), .waddr(wa3),
    .wdata(bno_data), .raddr(ra3), .rdata(rd3));

  // ---- classifier ----------------------------------------------------------------
  logic busy_fc;
  logic signed [ACC_W-1:0] fc_logits [N_CLASSES];
  logic [1:0]              best;
  logic signed [ACC_W-1:0] best_val;

  dense_layer #(.N_IN(N_FC), .N_OUT(N_CLASSES), .BIAS_SHIFT(FC_BSHIFT)) u_fc (
    .clk, .rst_n, .start(start_fc), .busy(busy_fc), .done(done_fc),
    .x_addr(ra3), .x_data(rd3),
    .prm_we(prm_we && in_rng(prm_addr, B_FC, N_FCP)),
    .prm_addr(a_fc[$clog2(N_FCP)-1:0]), .prm_wdata,
    .logits(fc_logits)
  );

  stage_argmax #(.N(N_CLASSES), .ACC_W(ACC_W)) u_argmax (
    .logits(fc_logits), .idx(best), .max_val(best_val));

  // class probabilities, valid together with result_valid
  logic prob_valid;
  softmax_q #(.N(N_CLASSES), .ACC_W(ACC_W), .IN_FRAC(LOGIT_FRAC)) u_softmax (
    .clk, .rst_n, .in_valid(ctrl_result), .scores(fc_logits),
    .out_valid(prob_valid), .prob);

  // ---- feature-map write counters, results and statistics ---------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wa0 <= '0; wa1 <= '0; wa2 <= '0; wa3 <= '0;
      result_valid    <= 1'b0;
      stage           <= STAGE_WAKE;
      inference_count <= '0;
      overrun_count   <= '0;
      sat_count       <= '0;
      for (int unsigned k = 0; k < N_CLASSES; k++) logits[k] <= '0;
    end else begin
      if (clear) begin
        wa0 <= '0; wa1 <= '0; wa2 <= '0; wa3 <= '0;
      end else begin
        if (bni_valid) wa0 <= wa0 + 1'b1;
        if (p1_valid)  wa1 <= wa1 + 1'b1;
        if (p2_valid)  wa2 <= wa2 + 1'b1;
        if (bno_valid) wa3 <= wa3 + 1'b1;
      end
      result_valid <= ctrl_result;
      if (ctrl_result) begin
        stage           <= best;
        logits          <= fc_logits;
        inference_count <= inference_count + 1'b1;
      end
      if (overrun) overrun_count <= overrun_count + 1'b1;
      sat_count <= sat_count + 32'(y1_valid && s1) + 32'(y2_valid && s2)
                             + 32'(y3_valid && s3);
    end
  end

  // parameters may only be loaded while no inference runs
  assert property (@(posedge clk) disable iff (!rst_n) prm_we |-> !busy)
    else $error("sleeplite_cnn_top: parameter write during an inference");

endmodule
