// conv1d_engine -- one quantized 1-D convolution layer (valid padding).
//
// Computes, for every output position t (0..L_OUT-1) and filter f (0..F-1),
//   y[t][f] = (bias[f] <<< BIAS_SHIFT)
//           + sum_{k<K, c<C_IN} w[f][k][c] * x[t*S + k][c]
// on int8 weights and activations with a 32-bit accumulator. The input
// feature map is channel-last, x[p][c] at address p*C_IN + c, so the K*C_IN
// taps of one output are one contiguous address run; the weight memory holds
// w[f][k][c] at address (f*K + k)*C_IN + c, followed by the F biases.
//
// One multiply-accumulate per cycle with no bubbles: a layer takes
// L_OUT*F*K*C_IN cycles plus 2. Results leave position-major (all filters of
// position 0 first), which is what the pooling stage expects. The engine
// reads its input through x_addr/x_data from an external RAM with a one-cycle
// registered read.
//
// Ports: 'start' (one cycle, while idle) runs the layer; 'done' pulses with
// the last result. y_valid/y_acc/y_pos/y_ch is the result stream. prm_* write
// the weight and bias memory (only while idle); it is not reset.
//
// The layer shapes come from the published network (filters 5/45/25, kernels
// 10/10/30, strides 2/1/1). The sequential single-MAC organisation, the
// memory layouts and the bias alignment are this design's choices.
module conv1d_engine #(
  parameter int unsigned C_IN       = 1,
  parameter int unsigned F          = 5,
  parameter int unsigned K          = 10,
  parameter int unsigned S          = 2,
  parameter int unsigned L_IN       = 3840,
  parameter int unsigned BIAS_SHIFT = 7,
  localparam int unsigned L_OUT     = (L_IN - K) / S + 1,
  localparam int unsigned KC        = K * C_IN,
  localparam int unsigned WN        = F * KC,
  localparam int unsigned XAW       = $clog2(L_IN * C_IN),
  localparam int unsigned WAW       = (WN > 1) ? $clog2(WN) : 1,
  localparam int unsigned PAW       = $clog2(WN + F),
  localparam int unsigned TW        = $clog2(L_IN + 1),
  localparam int unsigned FW        = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned JW        = (KC > 1) ? $clog2(KC) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [XAW-1:0]        x_addr,
  input  logic signed [7:0]     x_data,
  input  logic                  prm_we,
  input  logic [PAW-1:0]        prm_addr,
  input  logic [7:0]            prm_wdata,
  output logic                  y_valid,
  output logic signed [31:0]    y_acc,
  output logic [TW-1:0]         y_pos,
  output logic [FW-1:0]         y_ch
);

  // ---- parameter memories ----------------------------------------------------
  logic signed [7:0] wmem [WN];
  logic signed [7:0] bmem [F];

  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (prm_addr < PAW'(WN)) wmem[WAW'(prm_addr)] <= prm_wdata;
      else                     bmem[FW'(prm_addr - PAW'(WN))] <= prm_wdata;
    end
  end

  // ---- issue counters --------------------------------------------------------
  logic           running;
  logic [TW-1:0]  t;
  logic [FW-1:0]  f;
  logic [JW-1:0]  j;
  logic [XAW-1:0] xbase;
  logic [WAW-1:0] wbase;
  logic           last_j, last_f, last_t;

  assign last_j = (j == JW'(KC - 1));
  assign last_f = (f == FW'(F - 1));
  assign last_t = (t == TW'(L_OUT - 1));
  assign x_addr = xbase + XAW'(j);

  // ---- pipeline stage 1: operands in flight ---------------------------------
  logic              s1_valid, s1_first, s1_last, s1_final;
  logic [TW-1:0]     s1_t;
  logic [FW-1:0]     s1_f;
  logic signed [7:0] w_q;

  always_ff @(posedge clk) begin
    w_q <= wmem[wbase + WAW'(j)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      t        <= '0;
      f        <= '0;
      j        <= '0;
      xbase    <= '0;
      wbase    <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_final <= 1'b0;
      s1_t     <= '0;
      s1_f     <= '0;
    end else begin
      s1_valid <= running;
      s1_first <= (j == '0);
      s1_last  <= last_j;
      s1_final <= last_j && last_f && last_t;
      s1_t     <= t;
      s1_f     <= f;
      if (start && !busy) begin
        running <= 1'b1;
        t       <= '0;
        f       <= '0;
        j       <= '0;
        xbase   <= '0;
        wbase   <= '0;
      end else if (running) begin
        if (!last_j) begin
          j <= j + 1'b1;
        end else begin
          j <= '0;
          if (!last_f) begin
            f     <= f + 1'b1;
            wbase <= wbase + WAW'(KC);
          end else begin
            f     <= '0;
            wbase <= '0;
            if (last_t) begin
              running <= 1'b0;
            end else begin
              t     <= t + 1'b1;
              xbase <= xbase + XAW'(S * C_IN);
            end
          end
        end
      end
    end
  end

  // ---- pipeline stage 2: multiply-accumulate --------------------------------
  logic signed [31:0] acc, acc_n, prod;

  always_comb begin
    prod  = 32'(w_q) * 32'(x_data);
    acc_n = (s1_first ? (32'(bmem[s1_f]) <<< BIAS_SHIFT) : acc) + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      y_valid <= 1'b0;
      y_acc   <= '0;
      y_pos   <= '0;
      y_ch    <= '0;
      done    <= 1'b0;
    end else begin
      y_valid <= s1_valid && s1_last;
      done    <= s1_valid && s1_last && s1_final;
      if (s1_valid) begin
        acc <= acc_n;
        if (s1_last) begin
          y_acc <= acc_n;
          y_pos <= s1_t;
          y_ch  <= s1_f;
        end
      end
    end
  end

  // busy covers the issue phase and the two pipeline stages behind it
  assign busy = running || s1_valid || y_valid;

  // parameters must not change while a layer runs
  assert property (@(posedge clk) disable iff (!rst_n) prm_we |-> !busy)
    else $error("conv1d_engine: parameter write while busy");

endmodule
