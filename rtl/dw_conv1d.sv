// dw_conv1d: depthwise 1D convolution layer (first half of a separable block).
//
// Each of the CH channels is filtered by its own K-tap kernel with stride 1
// and no padding, a per-channel bias is added, and the result is requantized
// to QBITS bits (y = sat((acc*m + 2^(s-1)) >>> s)). There is no activation
// here; batch normalization and ReLU follow the pointwise convolution.
//
// Schedule: one multiply-accumulate per clock, output-major (time, then
// channel, then tap), so an inference of the layer takes (LEN_IN-K+1)*CH*K
// cycles after the start pulse; done pulses on the cycle after the last
// output is written. The input array must stay stable while busy. A start
// pulse while busy is ignored.
//
// The layer type, kernel size and stride follow the paper's model; the serial
// one-MAC schedule, valid padding and requantization format are this
// design's own choices.
module dw_conv1d
  import sw_pkg::*;
#(
  parameter int unsigned CH     = 3,
  parameter int unsigned LEN_IN = 25,
  parameter int unsigned K      = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  input  act_t   x [LEN_IN][CH],
  input  wgt_t   w [CH][K],
  input  word_t  b [CH],
  input  word_t  m,
  input  shift_t s,
  output act_t   y [LEN_IN-K+1][CH]
);
  localparam int unsigned LEN_OUT = LEN_IN - K + 1;
  localparam int unsigned XW      = $clog2(LEN_IN);

  logic [$clog2(LEN_OUT > 1 ? LEN_OUT : 2)-1:0] t;
  logic [$clog2(CH > 1 ? CH : 2)-1:0]      c;
  logic [$clog2(K > 1 ? K : 2)-1:0]       k;
  logic [XW-1:0]                xi;   // input time index t + k
  acc_t acc, acc_next;

  always_comb begin
    acc_t prod;
    xi       = XW'(t) + XW'(k);
    prod     = acc_t'(x[xi][c]) * acc_t'(w[c][k]);
    acc_next = ((k == 0) ? acc_t'(b[c]) : acc) + prod;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      c    <= '0;
      k    <= '0;
      acc  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          t    <= '0;
          c    <= '0;
          k    <= '0;
        end
      end else begin
        acc <= acc_next;
        if (32'(k) == K - 1) begin
          y[t][c] <= requant(acc_next, m, s, 1'b0);
          k <= '0;
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
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
