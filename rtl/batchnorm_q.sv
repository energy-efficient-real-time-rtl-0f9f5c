// batchnorm_q -- inference-time batch normalization, quantized.
//
// A batch-normalization layer at inference is a per-channel affine map; here
// it is folded into an int8 scale and an int8 bias per channel:
//   y = sat8((x * scale[ch] + (bias[ch] <<< BIAS_SHIFT)) >>> SHIFT)
// With the default shifts all of x (as read with SHIFT fraction bits), scale,
// bias and y are Q0.7 numbers. The network uses it twice: on the raw ECG
// samples (C = 1, 16-bit input) and on the 25 channels after the last pooling
// stage. The two placements follow the published architecture; folding and
// the number format are this design's choices.
//
// Interface: a stream (in_valid, in_data, in_ch); the result appears one cycle
// later on (out_valid, out_data, out_ch). Parameters are written through
// prm_we/prm_addr/prm_wdata: addresses 0..C-1 are scales, C..2C-1 biases.
// Parameters are not reset; load them before use.
module batchnorm_q #(
  parameter int unsigned C          = 1,
  parameter int unsigned IN_W       = 16,
  parameter int unsigned SHIFT      = 7,
  parameter int unsigned BIAS_SHIFT = 7,
  localparam int unsigned CW        = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned PAW       = $clog2(2 * C)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  input  logic [CW-1:0]          in_ch,
  output logic                   out_valid,
  output logic signed [7:0]      out_data,
  output logic [CW-1:0]          out_ch,
  input  logic                   prm_we,
  input  logic [PAW-1:0]         prm_addr,
  input  logic [7:0]             prm_wdata
);
  import sleeplite_pkg::*;

  logic signed [7:0] scale [C];
  logic signed [7:0] bias  [C];

  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (prm_addr < PAW'(C)) scale[prm_addr[CW-1:0]] <= prm_wdata;
      else                    bias[CW'(prm_addr - PAW'(C))] <= prm_wdata;
    end
  end

  logic signed [ACC_W-1:0] sum;
  always_comb begin
    sum = ACC_W'(in_data) * ACC_W'(scale[in_ch])
        + (ACC_W'(bias[in_ch]) <<< BIAS_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_ch    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= sat_data(sum >>> SHIFT);
        out_ch   <= in_ch;
      end
    end
  end

endmodule
