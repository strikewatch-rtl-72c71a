// sw_pkg: shared types, dimensions and arithmetic for the StrikeWatch gait
// classifier.
//
// The network is the 3-block 1D depthwise-separable CNN with 6-bit integer
// weights and activations. Its shape follows the published model: 25 time
// steps of triaxial acceleration, kernel-3 depthwise filters, channel widths
// 3, 3, 6, max pooling (kernel 2) after every block but the last, global
// average pooling, then a ReLU dense layer and a 2-way logit layer. The dense
// hidden width of 3 is not stated anywhere; it is the only width that gives
// the published count of 137 parameters. The valid (unpadded) convolutions,
// the quantization scheme and the parameter-store layout are this design's
// own choices.
//
// Quantization: activations and weights are signed QBITS-bit integers,
// products accumulate in 32 bits, and every layer that hands QBITS-bit values
// on requantizes with  y = sat((acc * m + 2^(s-1)) >>> s)  where m is a 16-bit
// signed multiplier and s a 5-bit shift (no rounding term when s = 0).
// Parameter store: 16-bit words; weights use their low QBITS bits, shifts
// their low 5 bits. The PRM_* constants below give each field's word address.
package sw_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned QBITS    = 6;   // quantization bit width b
  parameter int unsigned ACC_W    = 32;  // accumulator width
  parameter int unsigned IN_CH    = 3;   // a_x, a_y, a_z
  parameter int unsigned SEQ_LEN  = 25;  // n = w / d
  parameter int unsigned KSIZE    = 3;   // depthwise kernel
  parameter int unsigned POOL     = 2;   // max-pool kernel and stride
  parameter int unsigned C1       = 3;   // block 1 output channels
  parameter int unsigned C2       = 3;   // block 2 output channels
  parameter int unsigned C3       = 6;   // block 3 output channels
  parameter int unsigned HIDDEN   = 3;   // first dense layer width
  parameter int unsigned NCLASS   = 2;   // 0 = forefoot strike, 1 = heel strike

  // time lengths through the network (valid convolution, floor pooling)
  parameter int unsigned L1C = SEQ_LEN - KSIZE + 1;  // 23 after block-1 conv
  parameter int unsigned L1P = L1C / POOL;           // 11 after pool 1
  parameter int unsigned L2C = L1P - KSIZE + 1;      // 9
  parameter int unsigned L2P = L2C / POOL;           // 4
  parameter int unsigned L3C = L2P - KSIZE + 1;      // 2 (no pooling after block 3)

  // ---------------------------------------------------------------- types
  typedef logic signed [QBITS-1:0] act_t;   // activation
  typedef logic signed [QBITS-1:0] wgt_t;   // weight
  typedef logic signed [15:0]      word_t;  // parameter-store word, bias, multiplier
  typedef logic        [4:0]       shift_t; // requantization shift
  typedef logic signed [ACC_W-1:0] acc_t;   // accumulator

  parameter int ACT_MAX = (1 <<< (QBITS - 1)) - 1;
  parameter int ACT_MIN = -(1 <<< (QBITS - 1));

  // ---------------------------------------------------------------- parameter-store layout
  // input quantization
  parameter int unsigned PRM_INQ_M  = 0;
  parameter int unsigned PRM_INQ_S  = 1;
  // block 1: depthwise taps [c][k], bias [c], m, s; pointwise [co][ci], bias [co];
  // batch norm g [co], beta [co], s
  parameter int unsigned PRM_DW1_W  = 2;
  parameter int unsigned PRM_DW1_B  = PRM_DW1_W + IN_CH * KSIZE;
  parameter int unsigned PRM_DW1_M  = PRM_DW1_B + IN_CH;
  parameter int unsigned PRM_DW1_S  = PRM_DW1_M + 1;
  parameter int unsigned PRM_PW1_W  = PRM_DW1_S + 1;
  parameter int unsigned PRM_PW1_B  = PRM_PW1_W + C1 * IN_CH;
  parameter int unsigned PRM_BN1_G  = PRM_PW1_B + C1;
  parameter int unsigned PRM_BN1_B  = PRM_BN1_G + C1;
  parameter int unsigned PRM_BN1_S  = PRM_BN1_B + C1;
  // block 2
  parameter int unsigned PRM_DW2_W  = PRM_BN1_S + 1;
  parameter int unsigned PRM_DW2_B  = PRM_DW2_W + C1 * KSIZE;
  parameter int unsigned PRM_DW2_M  = PRM_DW2_B + C1;
  parameter int unsigned PRM_DW2_S  = PRM_DW2_M + 1;
  parameter int unsigned PRM_PW2_W  = PRM_DW2_S + 1;
  parameter int unsigned PRM_PW2_B  = PRM_PW2_W + C2 * C1;
  parameter int unsigned PRM_BN2_G  = PRM_PW2_B + C2;
  parameter int unsigned PRM_BN2_B  = PRM_BN2_G + C2;
  parameter int unsigned PRM_BN2_S  = PRM_BN2_B + C2;
  // block 3
  parameter int unsigned PRM_DW3_W  = PRM_BN2_S + 1;
  parameter int unsigned PRM_DW3_B  = PRM_DW3_W + C2 * KSIZE;
  parameter int unsigned PRM_DW3_M  = PRM_DW3_B + C2;
  parameter int unsigned PRM_DW3_S  = PRM_DW3_M + 1;
  parameter int unsigned PRM_PW3_W  = PRM_DW3_S + 1;
  parameter int unsigned PRM_PW3_B  = PRM_PW3_W + C3 * C2;
  parameter int unsigned PRM_BN3_G  = PRM_PW3_B + C3;
  parameter int unsigned PRM_BN3_B  = PRM_BN3_G + C3;
  parameter int unsigned PRM_BN3_S  = PRM_BN3_B + C3;
  // global average pooling
  parameter int unsigned PRM_GAP_M  = PRM_BN3_S + 1;
  parameter int unsigned PRM_GAP_S  = PRM_GAP_M + 1;
  // dense 1 (ReLU) and dense 2 (logits)
  parameter int unsigned PRM_FC1_W  = PRM_GAP_S + 1;
  parameter int unsigned PRM_FC1_B  = PRM_FC1_W + HIDDEN * C3;
  parameter int unsigned PRM_FC1_M  = PRM_FC1_B + HIDDEN;
  parameter int unsigned PRM_FC1_S  = PRM_FC1_M + 1;
  parameter int unsigned PRM_FC2_W  = PRM_FC1_S + 1;
  parameter int unsigned PRM_FC2_B  = PRM_FC2_W + NCLASS * HIDDEN;
  parameter int unsigned NPARAM     = PRM_FC2_B + NCLASS;   // 152 words

  // ---------------------------------------------------------------- arithmetic
  // Rounding arithmetic right shift of a wide value, then saturation to
  // [lo, hi].
  function automatic act_t round_shift_sat(input logic signed [63:0] v,
                                           input shift_t s, input int lo, input int hi);
    logic signed [63:0] r;
    r = (s == 0) ? v : ((v + (64'sd1 <<< (s - 1))) >>> s);
    if (r > 64'(hi))      return act_t'(hi);
    else if (r < 64'(lo)) return act_t'(lo);
    else                  return act_t'(r);
  endfunction

  // Requantize an accumulator with multiplier m and shift s; relu clamps at 0.
  function automatic act_t requant(input acc_t acc, input word_t m, input shift_t s,
                                   input logic relu);
    logic signed [63:0] p;
    p = 64'(acc) * 64'(m);
    return round_shift_sat(p, s, relu ? 0 : ACT_MIN, ACT_MAX);
  endfunction

  // Saturate an accumulator to a 16-bit logit.
  function automatic word_t sat16(input acc_t acc);
    if (acc > 32'sd32767)       return 16'sh7fff;
    else if (acc < -32'sd32768) return 16'sh8000;
    else                        return word_t'(acc);
  endfunction

endpackage
