// sdp_ram -- simple dual-port RAM: one write port and one registered read port.
//
// Holds the feature maps passed from one network layer to the next (the ECG
// window after input batch normalization and the output of each pooling
// stage). A write and a read in the same cycle to the same address return the
// old word (read-first). rdata is valid one cycle after raddr. The contents are
// not reset: every word is written by the producing layer before it is read.
// Layer-by-layer buffering is this design's choice; the published work only
// reports block-RAM use of its generated design.
module sdp_ram #(
  parameter int unsigned DEPTH = 4790,
  parameter int unsigned W     = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
