// bn_relu: integer batch normalization followed by ReLU (combinational).
//
// y = clamp((acc*g + beta*2^s + 2^(s-1)) >>> s, 0, 2^(QBITS-1)-1)
//
// g is the channel's folded BN scale (including the input and output
// quantization scales) and beta its offset expressed in output units. The
// paper places batch normalization and ReLU after every convolution; this
// integer form, with rounding to nearest and saturation, is this design's
// own. Purely combinational: the caller registers the result.
module bn_relu
  import sw_pkg::*;
(
  input  acc_t   acc,
  input  word_t  g,
  input  word_t  beta,
  input  shift_t s,
  output act_t   y
);
  logic signed [63:0] v;

  always_comb begin
    v = 64'(acc) * 64'(g) + (64'(beta) <<< s);
    y = round_shift_sat(v, s, 0, ACT_MAX);
  end

endmodule
