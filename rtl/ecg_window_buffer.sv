// ecg_window_buffer -- sliding 30-second ECG window with a 10-second step.
//
// The ECG arrives one sample at a time (128 Hz in the intended system). The
// samples go into a ring of WIN_LEN + STEP_LEN entries. When the first
// WIN_LEN samples have arrived, and after every further STEP_LEN samples, a
// new window is complete: 'win_ready' pulses for one cycle and the ring
// position of that window's oldest sample is remembered. The consumer answers
// with 'take' (same cycle or later) to freeze that window for reading, then
// reads it by relative index rd_idx (0 = oldest); rd_data follows one cycle
// later. Because the ring holds STEP_LEN samples beyond the window, a taken
// window stays intact until the next window is complete, so the reader has a
// whole step (10 s) to copy it.
//
// Window 3840 / step 1280 samples is the published 30 s / 10 s scheme at
// 128 Hz. The ring organisation and the take handshake are this design's.
module ecg_window_buffer #(
  parameter int unsigned WIN_LEN  = 3840,
  parameter int unsigned STEP_LEN = 1280,
  parameter int unsigned SAMPLE_W = 16,
  localparam int unsigned DEPTH   = WIN_LEN + STEP_LEN,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned IW      = $clog2(WIN_LEN),
  localparam int unsigned CW      = $clog2(WIN_LEN + 1),
  localparam int unsigned SW      = (STEP_LEN > 1) ? $clog2(STEP_LEN) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       sample_valid,
  input  logic signed [SAMPLE_W-1:0] sample,
  output logic                       win_ready,
  input  logic                       take,
  input  logic [IW-1:0]              rd_idx,
  output logic signed [SAMPLE_W-1:0] rd_data
);

  logic signed [SAMPLE_W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, wp_n, latest_base, rd_base, new_base, rd_addr;
  logic [CW-1:0] fill;
  logic [SW-1:0] step_cnt;
  logic [AW:0]   rsum;

  always_comb begin
    wp_n     = (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
    new_base = (wp_n >= AW'(WIN_LEN)) ? wp_n - AW'(WIN_LEN)
                                      : wp_n + AW'(DEPTH - WIN_LEN);
    rsum     = {1'b0, rd_base} + (AW+1)'(rd_idx);
    rd_addr  = (rsum >= (AW+1)'(DEPTH)) ? AW'(rsum - (AW+1)'(DEPTH)) : AW'(rsum);
  end

  always_ff @(posedge clk) begin
    if (sample_valid) mem[wp] <= sample;
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp          <= '0;
      fill        <= '0;
      step_cnt    <= '0;
      win_ready   <= 1'b0;
      latest_base <= '0;
      rd_base     <= '0;
    end else begin
      win_ready <= 1'b0;
      if (sample_valid) begin
        wp <= wp_n;
        if (fill != CW'(WIN_LEN)) begin
          fill <= fill + 1'b1;
          if (fill == CW'(WIN_LEN - 1)) begin
            win_ready   <= 1'b1;
            latest_base <= new_base;
            step_cnt    <= '0;
          end
        end else if (step_cnt == SW'(STEP_LEN - 1)) begin
          win_ready   <= 1'b1;
          latest_base <= new_base;
          step_cnt    <= '0;
        end else begin
          step_cnt <= step_cnt + 1'b1;
        end
      end
      if (take) rd_base <= latest_base;
    end
  end

endmodule
