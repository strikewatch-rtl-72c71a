// maxpool1d: temporal max pooling, kernel P and stride P, per channel.
//
// y[t][c] = max(x[t*P + p][c]) for p = 0..P-1, t = 0..floor(LEN_IN/P)-1;
// a trailing sample that does not fill a window is dropped.
//
// Schedule: one output per clock (time, then channel): floor(LEN_IN/P)*CH
// cycles after start, done one cycle after the last write. The kernel size 2
// is the paper's; the stride equal to the kernel and the floor rule are this
// design's choices (the usual framework defaults).
module maxpool1d
  import sw_pkg::*;
#(
  parameter int unsigned CH     = 3,
  parameter int unsigned LEN_IN = 23,
  parameter int unsigned P      = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic done,
  input  act_t x [LEN_IN][CH],
  output act_t y [LEN_IN/P][CH]
);
  localparam int unsigned LEN_OUT = LEN_IN / P;

  logic [$clog2(LEN_OUT > 1 ? LEN_OUT : 2)-1:0] t;
  logic [$clog2(CH > 1 ? CH : 2)-1:0]      c;
  act_t mx;

  always_comb begin
    mx = x[t * P][c];
    for (int unsigned p = 1; p < P; p++)
      if (x[t * P + p][c] > mx) mx = x[t * P + p][c];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      c    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          t    <= '0;
          c    <= '0;
        end
      end else begin
        y[t][c] <= mx;
        if (32'(c) == CH - 1) begin
          c <= '0;
          if (32'(t) == LEN_OUT - 1) begin
            t    <= '0;
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

endmodule
