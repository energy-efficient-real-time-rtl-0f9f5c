// sleeplite_ctrl -- inference sequencer of the SleepLiteCNN accelerator.
//
// The layers run one after another on a whole window, each writing its result
// into a feature-map RAM that the next layer reads:
//   LOAD : copy the taken ECG window, through input batch normalization, into
//          the first feature-map RAM (one sample per cycle, WIN_LEN cycles)
//   C1, C2, C3 : the three convolution + ReLU + max-pool stages
//   FC   : the fully connected classifier (batch normalization after pool 3
//          was already applied on the way into its input RAM)
//   RESULT : one-cycle result_valid, back to IDLE
// Between stages the sequencer waits DRAIN cycles so that the last results of
// a stage, still in the ReLU/pool/BN pipeline, reach their RAM before the next
// stage starts reading.
//
// A window that completes while an inference is still running cannot be
// taken: it is dropped and 'overrun' pulses. With the intended 128 Hz input
// one inference (about 17.3 million cycles) fits a 10 s step for any clock
// above roughly 1.8 MHz.
//
// Handshakes: win_ready (from the window buffer) is answered in the same
// cycle by take. start_* are one-cycle pulses; done_* are one-cycle pulses
// from the engines. 'clear' pulses with take and restarts the write counters
// and pooling schedules of the datapath.
// The stage order follows the published network; the sequential schedule,
// the drain gap and the drop-on-overrun policy are this design's choices.
module sleeplite_ctrl #(
  parameter int unsigned WIN_LEN = 3840,
  parameter int unsigned DRAIN   = 4,
  localparam int unsigned IW     = $clog2(WIN_LEN),
  localparam int unsigned DW     = $clog2(DRAIN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          win_ready,
  output logic          take,
  output logic          clear,
  output logic          overrun,
  output logic          win_rd_en,
  output logic [IW-1:0] win_rd_idx,
  output logic          start_c1,
  output logic          start_c2,
  output logic          start_c3,
  output logic          start_fc,
  input  logic          done_c1,
  input  logic          done_c2,
  input  logic          done_c3,
  input  logic          done_fc,
  output logic          busy,
  output logic          result_valid
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_C1, S_C2, S_C3, S_FC, S_DRAIN, S_RESULT
  } state_e;

  state_e        state, nxt;
  logic [DW-1:0] dcnt;

  assign take    = win_ready && (state == S_IDLE);
  assign clear   = take;
  assign overrun = win_ready && (state != S_IDLE);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      nxt          <= S_IDLE;
      dcnt         <= '0;
      win_rd_en    <= 1'b0;
      win_rd_idx   <= '0;
      start_c1     <= 1'b0;
      start_c2     <= 1'b0;
      start_c3     <= 1'b0;
      start_fc     <= 1'b0;
      result_valid <= 1'b0;
    end else begin
      start_c1     <= 1'b0;
      start_c2     <= 1'b0;
      start_c3     <= 1'b0;
      start_fc     <= 1'b0;
      result_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (take) begin
            state      <= S_LOAD;
            win_rd_en  <= 1'b1;
            win_rd_idx <= '0;
          end
        end
        S_LOAD: begin
          if (win_rd_idx == IW'(WIN_LEN - 1)) begin
            win_rd_en <= 1'b0;
            state     <= S_DRAIN;
            nxt       <= S_C1;
            dcnt      <= DW'(DRAIN);
          end else begin
            win_rd_idx <= win_rd_idx + 1'b1;
          end
        end
        S_DRAIN: begin
          if (dcnt != '0) begin
            dcnt <= dcnt - 1'b1;
          end else begin
            state <= nxt;
            unique case (nxt)
              S_C1:    start_c1 <= 1'b1;
              S_C2:    start_c2 <= 1'b1;
              S_C3:    start_c3 <= 1'b1;
              S_FC:    start_fc <= 1'b1;
              default: ;
            endcase
          end
        end
        S_C1: if (done_c1) begin state <= S_DRAIN; nxt <= S_C2; dcnt <= DW'(DRAIN); end
        S_C2: if (done_c2) begin state <= S_DRAIN; nxt <= S_C3; dcnt <= DW'(DRAIN); end
        S_C3: if (done_c3) begin state <= S_DRAIN; nxt <= S_FC; dcnt <= DW'(DRAIN); end
        S_FC: if (done_fc) state <= S_RESULT;
        S_RESULT: begin
          result_valid <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a window is only taken while idle
  assert property (@(posedge clk) disable iff (!rst_n) take |-> !busy)
    else $error("sleeplite_ctrl: window taken while busy");

endmodule
