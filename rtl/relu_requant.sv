// relu_requant -- quantized ReLU activation.
//
// Takes a signed ACC_W-bit convolution sum, applies ReLU, shifts it right by
// SHIFT bits (from the product scale back to the activation scale) and clips
// it to the positive signed 8-bit range 0..127. 'sat' flags a clipped value.
// Purely combinational. ReLU after every convolution follows the published
// network; the 8-bit Q0.7 activation format and the shift are this design's.
module relu_requant #(
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned OUT_W  = 8,
  parameter int unsigned SHIFT  = 7
) (
  input  logic signed [ACC_W-1:0] acc,
  output logic signed [OUT_W-1:0] y,
  output logic                    sat
);

  localparam logic signed [ACC_W-1:0] MAXV = (1 <<< (OUT_W - 1)) - 1;
  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    shifted = acc >>> SHIFT;
    sat     = 1'b0;
    if (shifted <= 0) begin
      y = '0;
    end else if (shifted > MAXV) begin
      y   = MAXV[OUT_W-1:0];
      sat = 1'b1;
    end else begin
      y = shifted[OUT_W-1:0];
    end
  end

endmodule
