// window_sampler: sliding-window front end between the IMU sample stream and
// the classifier.
//
// It keeps the most recent W raw triaxial samples in a shift register. Once W
// samples have arrived (the cold start of W/f seconds), it emits a window, and
// afterwards one every W*s samples, where s = STRIDE_NUM/STRIDE_DEN. W*s need
// not be an integer: a phase accumulator in units of 1/STRIDE_DEN sample adds
// STRIDE_DEN per sample and opens a window whenever it reaches
// W*STRIDE_NUM, so for W = 50, s = 1/4 windows are 13, 12, 13, 12 ... samples
// apart (12.5 on average, 8 windows per second at 100 Hz).
// Each emitted window is downsampled by D (every D-th sample, aligned so the
// newest sample is kept) and quantized to QBITS bits with the common
// requantization (multiplier inq_m, shift inq_s), giving W/D = 25 time steps.
//
// Timing: win and win_valid are registered one clock after the sample_valid
// that completes the window; win then holds until the next window.
//
// w = 50, f = 100 Hz, s = 0.25 and d = 2 are the paper's system parameters;
// the fractional stride, decimation method and input quantization are this
// design's own choices.
module window_sampler
  import sw_pkg::*;
#(
  parameter int unsigned W          = 50,
  parameter int unsigned D          = 2,
  parameter int unsigned STRIDE_NUM = 1,
  parameter int unsigned STRIDE_DEN = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_valid,
  input  word_t       sample [IN_CH],
  input  word_t       inq_m,
  input  shift_t      inq_s,
  output act_t        win [W/D][IN_CH],
  output logic        win_valid
);
  localparam int unsigned N       = W / D;
  localparam int unsigned HOP     = W * STRIDE_NUM;      // phase units per window
  localparam int unsigned PHW     = $clog2(HOP + STRIDE_DEN + 1);

  word_t                   sr [W][IN_CH];   // sr[0] oldest, sr[W-1] newest
  logic [$clog2(W+1)-1:0]  fill;
  logic [PHW-1:0]          phase;
  logic                    pending;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fill      <= '0;
      phase     <= '0;
      pending   <= 1'b0;
      win_valid <= 1'b0;
      for (int i = 0; i < W; i++) sr[i] <= '{default: '0};
    end else begin
      win_valid <= 1'b0;
      pending   <= 1'b0;
      if (sample_valid) begin
        for (int i = 0; i < W - 1; i++) sr[i] <= sr[i + 1];
        sr[W - 1] <= sample;
        if (32'(fill) < W) begin
          fill <= fill + 1'b1;
          if (32'(fill) == W - 1) begin
            pending <= 1'b1;           // first full window
            phase   <= '0;
          end
        end else if (32'(phase) + STRIDE_DEN >= HOP) begin
          pending <= 1'b1;
          phase   <= PHW'(32'(phase) + STRIDE_DEN - HOP);
        end else begin
          phase   <= PHW'(32'(phase) + STRIDE_DEN);
        end
      end
      if (pending) begin
        win_valid <= 1'b1;
        for (int j = 0; j < N; j++)
          for (int a = 0; a < IN_CH; a++)
            win[j][a] <= requant(acc_t'(sr[j * D + D - 1][a]), inq_m, inq_s, 1'b0);
      end
    end
  end

endmodule
