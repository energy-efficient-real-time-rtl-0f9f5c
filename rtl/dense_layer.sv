// dense_layer -- quantized fully connected layer (the classifier).
//
// Computes N_OUT class scores from the N_IN int8 values of the flattened
// feature map:
//   logits[o] = (bias[o] <<< BIAS_SHIFT) + sum_{i<N_IN} w[o][i] * x[i]
// The feature map before it is stored channel-last, so flattening it is
// nothing but reading that RAM in address order. Weights are stored at
// o*N_IN + i, followed by the N_OUT biases, in a memory written through prm_*
// (only while idle; not reset).
//
// One multiply-accumulate per cycle: N_OUT*N_IN + 3 cycles from 'start' to the
// 'done' pulse; logits hold their values until the next start. Input values
// arrive one cycle after x_addr (registered RAM read).
//
// The 2775-input, 4-output shape follows from the published network; dropout
// in front of it is the identity at inference and has no hardware. The
// single-MAC organisation and formats are this design's choices.
module dense_layer #(
  parameter int unsigned N_IN       = 2775,
  parameter int unsigned N_OUT      = 4,
  parameter int unsigned BIAS_SHIFT = 7,
  localparam int unsigned WN        = N_IN * N_OUT,
  localparam int unsigned XAW       = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned WAW       = $clog2(WN),
  localparam int unsigned PAW       = $clog2(WN + N_OUT),
  localparam int unsigned OW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [XAW-1:0]     x_addr,
  input  logic signed [7:0]  x_data,
  input  logic               prm_we,
  input  logic [PAW-1:0]     prm_addr,
  input  logic [7:0]         prm_wdata,
  output logic signed [31:0] logits [N_OUT]
);

  logic signed [7:0] wmem [WN];
  logic signed [7:0] bmem [N_OUT];

  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (prm_addr < PAW'(WN)) wmem[WAW'(prm_addr)] <= prm_wdata;
      else                     bmem[OW'(prm_addr - PAW'(WN))] <= prm_wdata;
    end
  end

  logic           running;
  logic [OW-1:0]  o;
  logic [XAW-1:0] i;
  logic [WAW-1:0] wbase;
  logic           last_i, last_o;

  assign last_i = (i == XAW'(N_IN - 1));
  assign last_o = (o == OW'(N_OUT - 1));
  assign x_addr = i;

  logic              s1_valid, s1_first, s1_last, s1_final;
  logic [OW-1:0]     s1_o;
  logic signed [7:0] w_q;

  always_ff @(posedge clk) begin
    w_q <= wmem[wbase + WAW'(i)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      o        <= '0;
      i        <= '0;
      wbase    <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_final <= 1'b0;
      s1_o     <= '0;
    end else begin
      s1_valid <= running;
      s1_first <= (i == '0);
      s1_last  <= last_i;
      s1_final <= last_i && last_o;
      s1_o     <= o;
      if (start && !busy) begin
        running <= 1'b1;
        o       <= '0;
        i       <= '0;
        wbase   <= '0;
      end else if (running) begin
        if (!last_i) begin
          i <= i + 1'b1;
        end else begin
          i <= '0;
          if (last_o) begin
            running <= 1'b0;
          end else begin
            o     <= o + 1'b1;
            wbase <= wbase + WAW'(N_IN);
          end
        end
      end
    end
  end

  logic signed [31:0] acc, acc_n, prod;

  always_comb begin
    prod  = 32'(w_q) * 32'(x_data);
    acc_n = (s1_first ? (32'(bmem[s1_o]) <<< BIAS_SHIFT) : acc) + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
      for (int unsigned k = 0; k < N_OUT; k++) logits[k] <= '0;
    end else begin
      done <= s1_valid && s1_final;
      if (s1_valid) begin
        acc <= acc_n;
        if (s1_last) logits[s1_o] <= acc_n;
      end
    end
  end

  assign busy = running || s1_valid;

  assert property (@(posedge clk) disable iff (!rst_n) prm_we |-> !busy)
    else $error("dense_layer: parameter write while busy");

endmodule
