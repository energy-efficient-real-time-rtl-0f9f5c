// maxpool1d -- streaming 1-D max pooling, per channel.
//
// The input is a stream of int8 values in position-major order (all F
// channels of position 0, then position 1, ...), as produced by the
// convolution engine. For each channel the module keeps the last P-1 values in
// a small history. When the value at position pos completes a window that
// starts at a multiple of the stride S (pos = P-1, P-1+S, ...), it emits the
// maximum of the window for that channel. Windows that would run past the end
// are never completed, so trailing positions are dropped (valid pooling).
// Output L_OUT = (L_IN - P) / S + 1 positions, again position-major.
//
// Pool sizes 2, 2, 4 follow the published architecture. The published figure
// prints stride 1 for the last pooling while the stated parameter count needs
// stride 4; the stride is a parameter here, any 1 <= S <= P works.
//
// Timing: out_* are registered, one cycle after the completing input.
// 'clear' (one cycle, between layers) restarts the window schedule.
module maxpool1d #(
  parameter int unsigned F  = 5,
  parameter int unsigned P  = 2,
  parameter int unsigned S  = 2,
  parameter int unsigned PW = 12,
  localparam int unsigned CW = (F > 1) ? $clog2(F) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [7:0]    in_data,
  input  logic [PW-1:0]        in_pos,
  input  logic [CW-1:0]        in_ch,
  output logic                 out_valid,
  output logic signed [7:0]    out_data,
  output logic [CW-1:0]        out_ch
);

  logic signed [7:0] hist [F][P-1];
  logic [PW-1:0]     next_emit;
  logic signed [7:0] wmax;
  logic              emit;

  always_comb begin
    wmax = in_data;
    for (int unsigned i = 0; i < P - 1; i++)
      if (hist[in_ch][i] > wmax) wmax = hist[in_ch][i];
    emit = in_valid && (in_pos == next_emit);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int unsigned i = 0; i + 1 < P - 1; i++)
        hist[in_ch][i] <= hist[in_ch][i+1];
      hist[in_ch][P-2] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_emit <= PW'(P - 1);
      out_valid <= 1'b0;
      out_data  <= '0;
      out_ch    <= '0;
    end else begin
      out_valid <= emit;
      if (emit) begin
        out_data <= wmax;
        out_ch   <= in_ch;
      end
      if (clear)
        next_emit <= PW'(P - 1);
      else if (emit && in_ch == CW'(F - 1))
        next_emit <= next_emit + PW'(S);
    end
  end

  initial begin
    assert (P >= 2 && S >= 1 && S <= P)
      else $error("maxpool1d: need P >= 2 and 1 <= S <= P");
  end

endmodule
