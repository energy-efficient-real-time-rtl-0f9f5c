// softmax_q -- fixed-point softmax over the class scores.
//
// Turns N signed class scores into N probabilities of P_W bits (255 = 1.0 by
// default) that sum to about 255:
//   d_i  = (max - s_i) in units of 1/8, the score having IN_FRAC fraction bits
//   e_i  = EXP[min(d_i, LUT_N-1)],  EXP[k] ~ 65535 * exp(-k/8)
//   p_i  = round(e_i * (2^P_W - 1) / sum_j e_j)
// The exponential table is built at elaboration by repeated multiplication,
// EXP[0] = 65535 and EXP[k] = round(EXP[k-1] * 57835 / 65536), with
// 57835 / 65536 ~ exp(-1/8). Differences beyond LUT_N/8 = 16 give
// EXP ~ 8 out of 65535, i.e. a probability that rounds to 0. The maximum comes
// from stage_argmax, so the largest score always maps to EXP[0].
//
// Timing: in_valid samples the scores; probabilities and out_valid appear on
// the next clock edge. The division is combinational (N dividers), acceptable
// here because it runs once per 10 s classification.
//
// A softmax output layer appears in the published processing overview; its
// fixed-point form (table size, resolution, output width) is this design's
// choice. It does not change the stage decision, which is the argmax.
module softmax_q #(
  parameter int unsigned N       = 4,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned IN_FRAC = 14,
  parameter int unsigned LUT_N   = 128,
  parameter int unsigned P_W     = 8,
  localparam int unsigned IW     = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned DW     = $clog2(LUT_N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] scores [N],
  output logic                    out_valid,
  output logic [P_W-1:0]          prob   [N]
);

  typedef logic [15:0] exp_t;
  typedef exp_t exp_table_t [LUT_N];

  function automatic exp_table_t make_exp();
    exp_table_t t;
    logic [31:0] v;
    t[0] = 16'hffff;
    for (int unsigned k = 1; k < LUT_N; k++) begin
      v    = (32'(t[k-1]) * 32'd57835 + 32'd32768) >> 16;
      t[k] = v[15:0];
    end
    return t;
  endfunction

  localparam exp_table_t EXP = make_exp();

  logic [IW-1:0]           max_idx;
  logic signed [ACC_W-1:0] max_val;

  stage_argmax #(.N(N), .ACC_W(ACC_W)) u_max (
    .logits(scores), .idx(max_idx), .max_val(max_val));

  logic [ACC_W-1:0] diff  [N];
  logic [DW-1:0]    d     [N];
  logic [15:0]      e     [N];
  logic [17+IW:0]   sum;
  logic [P_W-1:0]   p     [N];

  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < N; i++) begin
      diff[i] = ACC_W'(max_val - scores[i]) >> (IN_FRAC - 3);
      d[i]    = (diff[i] >= ACC_W'(LUT_N)) ? DW'(LUT_N - 1) : DW'(diff[i]);
      e[i]    = EXP[d[i]];
      sum     = sum + (18 + IW)'(e[i]);
    end
    for (int unsigned i = 0; i < N; i++)
      p[i] = P_W'(((18 + IW + P_W)'(e[i]) * ((18 + IW + P_W)'(1) << P_W)
                   - (18 + IW + P_W)'(e[i]) + (18 + IW + P_W)'(sum >> 1))
                  / (18 + IW + P_W)'(sum));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int unsigned i = 0; i < N; i++) prob[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) prob <= p;
    end
  end

  initial assert (IN_FRAC >= 3) else $error("softmax_q: IN_FRAC must be at least 3");

endmodule
