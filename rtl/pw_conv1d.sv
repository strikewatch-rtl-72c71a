// pw_conv1d: pointwise (kernel 1) convolution with batch normalization and
// ReLU, the second half of a depthwise-separable block.
//
// For every time step t and output channel co it forms
//   acc = b[co] + sum_ci x[t][ci] * w[co][ci]
// and passes acc through bn_relu with the channel's scale g[co], offset
// beta[co] and the layer shift s, giving a non-negative QBITS-bit value.
//
// Schedule: one multiply-accumulate per clock (time, then output channel,
// then input channel), so the layer takes LEN*COUT*CIN cycles after start;
// done pulses on the cycle after the last output is written. x must stay
// stable while busy; a start while busy is ignored.
//
// The paper gives the layer order (pointwise convolution, batch norm, ReLU);
// the serial schedule and integer BN form are this design's own.
module pw_conv1d
  import sw_pkg::*;
#(
  parameter int unsigned CIN  = 3,
  parameter int unsigned COUT = 3,
  parameter int unsigned LEN  = 23
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  input  act_t   x [LEN][CIN],
  input  wgt_t   w [COUT][CIN],
  input  word_t  b [COUT],
  input  word_t  g [COUT],
  input  word_t  beta [COUT],
  input  shift_t s,
  output act_t   y [LEN][COUT]
);
  logic [$clog2(LEN > 1 ? LEN : 2)-1:0]  t;
  logic [$clog2(COUT > 1 ? COUT : 2)-1:0] co;
  logic [$clog2(CIN > 1 ? CIN : 2)-1:0]  ci;
  acc_t acc, acc_next;
  act_t y_bn;

  always_comb begin
    acc_t prod;
    prod     = acc_t'(x[t][ci]) * acc_t'(w[co][ci]);
    acc_next = ((ci == 0) ? acc_t'(b[co]) : acc) + prod;
  end

  bn_relu u_bn (
    .acc (acc_next),
    .g   (g[co]),
    .beta(beta[co]),
    .s   (s),
    .y   (y_bn)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      t    <= '0;
      co   <= '0;
      ci   <= '0;
      acc  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          t    <= '0;
          co   <= '0;
          ci   <= '0;
        end
      end else begin
        acc <= acc_next;
        if (32'(ci) == CIN - 1) begin
          y[t][co] <= y_bn;
          ci <= '0;
          if (32'(co) == COUT - 1) begin
            co <= '0;
            if (32'(t) == LEN - 1) begin
              t    <= '0;
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              t <= t + 1'b1;
            end
          end else begin
            co <= co + 1'b1;
          end
        end else begin
          ci <= ci + 1'b1;
        end
      end
    end
  end

endmodule
