// stage_argmax -- final sleep-stage decision.
//
// Returns the index of the largest of N signed class scores; on a tie the
// lowest index wins. With the four-class network the index is the sleep
// stage: 0 WAKE, 1 REM, 2 LIGHT, 3 DEEP (the order in which the published
// architecture lists its outputs; the binary encoding is this design's).
// A softmax would not change the decision, so none is computed.
// Purely combinational.
module stage_argmax #(
  parameter int unsigned N     = 4,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [ACC_W-1:0] logits [N],
  output logic [IW-1:0]           idx,
  output logic signed [ACC_W-1:0] max_val
);

  always_comb begin
    idx     = '0;
    max_val = logits[0];
    for (int unsigned i = 1; i < N; i++) begin
      if (logits[i] > max_val) begin
        max_val = logits[i];
        idx     = IW'(i);
      end
    end
  end

endmodule
