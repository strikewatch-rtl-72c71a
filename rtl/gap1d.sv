// gap1d: global average pooling over time.
//
// For each channel the LEN values are summed and the sum is requantized with
// multiplier m and shift s; the 1/LEN factor of the average is folded into m
// (m = round(2^s * in_scale / (LEN * out_scale))), so no divider is needed.
//
// Schedule: one addition per clock (channel, then time): CH*LEN cycles after
// start, done one cycle after the last write. Averaging over time is the
// paper's; folding the division into the multiplier is this design's choice.
module gap1d
  import sw_pkg::*;
#(
  parameter int unsigned CH  = 6,
  parameter int unsigned LEN = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  input  act_t   x [LEN][CH],
  input  word_t  m,
  input  shift_t s,
  output act_t   y [CH]
);
  logic [$clog2(LEN > 1 ? LEN : 2)-1:0] t;
  logic [$clog2(CH > 1 ? CH : 2)-1:0]  c;
  acc_t acc, acc_next;

  assign acc_next = ((t == 0) ? '0 : acc) + acc_t'(x[t][c]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      c    <= '0;
      acc  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          t    <= '0;
          c    <= '0;
        end
      end else begin
        acc <= acc_next;
        if (32'(t) == LEN - 1) begin
          y[c] <= requant(acc_next, m, s, 1'b0);
          t <= '0;
          if (32'(c) == CH - 1) begin
            c    <= '0;
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            c <= c + 1'b1;
          end
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

endmodule
