// tb_ref_pkg: reference arithmetic and a plain behavioural model of the
// classifier for the testbenches.
//
// Everything here is written with 64-bit integers, floor division and
// explicit loops, independently of the RTL's shift-based datapath, so the
// testbenches can compare the hardware against it. Only the parameter-store
// word layout (sw_pkg::PRM_*) is shared, as it is the interface contract.
package tb_ref_pkg;
  import sw_pkg::*;

  // floor(a / b) for b > 0
  function automatic longint fdiv(longint a, longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  function automatic longint clamp(longint v, longint lo, longint hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  // round-half-up of v / 2^s, then clamp
  function automatic longint rshift_ref(longint v, int s, longint lo, longint hi);
    longint d;
    if (s == 0) return clamp(v, lo, hi);
    d = longint'(1) << s;
    return clamp(fdiv(v + d / 2, d), lo, hi);
  endfunction

  function automatic longint rq_ref(longint acc, longint m, int s, bit relu);
    return rshift_ref(acc * m, s, relu ? 0 : -(longint'(1) << (QBITS - 1)),
                      (longint'(1) << (QBITS - 1)) - 1);
  endfunction

  function automatic longint bn_ref(longint acc, longint g, longint beta, int s);
    return rshift_ref(acc * g + beta * (longint'(1) << s), s, 0,
                      (longint'(1) << (QBITS - 1)) - 1);
  endfunction

  // value of a QBITS-bit two's-complement field in the low bits of w
  function automatic longint sx(longint w);
    longint v;
    v = w % (longint'(1) << QBITS);
    if (v < 0) v = v + (longint'(1) << QBITS);
    if (v >= (longint'(1) << (QBITS - 1))) v = v - (longint'(1) << QBITS);
    return v;
  endfunction

  function automatic longint sat16_ref(longint v);
    return clamp(v, -32768, 32767);
  endfunction

  typedef longint prm_t [NPARAM];
  typedef longint win_t [SEQ_LEN][IN_CH];

  // One complete inference: returns the two logits.
  function automatic void model_ref(input win_t x, input prm_t p,
                                    output longint lg0, output longint lg1);
    longint a1c [L1C][IN_CH]; longint a1p [L1C][C1]; longint a1q [L1P][C1];
    longint a2c [L2C][C1];    longint a2p [L2C][C2]; longint a2q [L2P][C2];
    longint a3c [L3C][C2];    longint a3p [L3C][C3];
    longint ag [C3]; longint h [HIDDEN]; longint acc;
    // block 1
    for (int t = 0; t < L1C; t++)
      for (int c = 0; c < IN_CH; c++) begin
        acc = p[PRM_DW1_B + c];
        for (int k = 0; k < KSIZE; k++) acc += x[t+k][c] * sx(p[PRM_DW1_W + c*KSIZE + k]);
        a1c[t][c] = rq_ref(acc, p[PRM_DW1_M], int'(p[PRM_DW1_S] & 31), 0);
      end
    for (int t = 0; t < L1C; t++)
      for (int o = 0; o < C1; o++) begin
        acc = p[PRM_PW1_B + o];
        for (int i = 0; i < IN_CH; i++) acc += a1c[t][i] * sx(p[PRM_PW1_W + o*IN_CH + i]);
        a1p[t][o] = bn_ref(acc, p[PRM_BN1_G + o], p[PRM_BN1_B + o], int'(p[PRM_BN1_S] & 31));
      end
    for (int t = 0; t < L1P; t++)
      for (int c = 0; c < C1; c++)
        a1q[t][c] = (a1p[2*t][c] > a1p[2*t+1][c]) ? a1p[2*t][c] : a1p[2*t+1][c];
    // block 2
    for (int t = 0; t < L2C; t++)
      for (int c = 0; c < C1; c++) begin
        acc = p[PRM_DW2_B + c];
        for (int k = 0; k < KSIZE; k++) acc += a1q[t+k][c] * sx(p[PRM_DW2_W + c*KSIZE + k]);
        a2c[t][c] = rq_ref(acc, p[PRM_DW2_M], int'(p[PRM_DW2_S] & 31), 0);
      end
    for (int t = 0; t < L2C; t++)
      for (int o = 0; o < C2; o++) begin
        acc = p[PRM_PW2_B + o];
        for (int i = 0; i < C1; i++) acc += a2c[t][i] * sx(p[PRM_PW2_W + o*C1 + i]);
        a2p[t][o] = bn_ref(acc, p[PRM_BN2_G + o], p[PRM_BN2_B + o], int'(p[PRM_BN2_S] & 31));
      end
    for (int t = 0; t < L2P; t++)
      for (int c = 0; c < C2; c++)
        a2q[t][c] = (a2p[2*t][c] > a2p[2*t+1][c]) ? a2p[2*t][c] : a2p[2*t+1][c];
    // block 3
    for (int t = 0; t < L3C; t++)
      for (int c = 0; c < C2; c++) begin
        acc = p[PRM_DW3_B + c];
        for (int k = 0; k < KSIZE; k++) acc += a2q[t+k][c] * sx(p[PRM_DW3_W + c*KSIZE + k]);
        a3c[t][c] = rq_ref(acc, p[PRM_DW3_M], int'(p[PRM_DW3_S] & 31), 0);
      end
    for (int t = 0; t < L3C; t++)
      for (int o = 0; o < C3; o++) begin
        acc = p[PRM_PW3_B + o];
        for (int i = 0; i < C2; i++) acc += a3c[t][i] * sx(p[PRM_PW3_W + o*C2 + i]);
        a3p[t][o] = bn_ref(acc, p[PRM_BN3_G + o], p[PRM_BN3_B + o], int'(p[PRM_BN3_S] & 31));
      end
    // global average pooling
    for (int c = 0; c < C3; c++) begin
      acc = 0;
      for (int t = 0; t < L3C; t++) acc += a3p[t][c];
      ag[c] = rq_ref(acc, p[PRM_GAP_M], int'(p[PRM_GAP_S] & 31), 0);
    end
    // dense layers
    for (int o = 0; o < HIDDEN; o++) begin
      acc = p[PRM_FC1_B + o];
      for (int i = 0; i < C3; i++) acc += ag[i] * sx(p[PRM_FC1_W + o*C3 + i]);
      h[o] = rq_ref(acc, p[PRM_FC1_M], int'(p[PRM_FC1_S] & 31), 1);
    end
    acc = p[PRM_FC2_B + 0];
    for (int i = 0; i < HIDDEN; i++) acc += h[i] * sx(p[PRM_FC2_W + 0*HIDDEN + i]);
    lg0 = sat16_ref(acc);
    acc = p[PRM_FC2_B + 1];
    for (int i = 0; i < HIDDEN; i++) acc += h[i] * sx(p[PRM_FC2_W + 1*HIDDEN + i]);
    lg1 = sat16_ref(acc);
  endfunction

  function automatic longint rnd(longint lo, longint hi);
    return lo + longint'($urandom % (hi - lo + 1));
  endfunction

  // A random but well-scaled parameter set: weights over the full 6-bit
  // range, multipliers and shifts that keep activations mostly unsaturated.
  function automatic void random_params(output prm_t p);
    for (int i = 0; i < NPARAM; i++) p[i] = 0;
    p[PRM_INQ_M] = rnd(1, 3); p[PRM_INQ_S] = 11;
    for (int i = 0; i < IN_CH*KSIZE; i++) begin
      p[PRM_DW1_W+i] = rnd(-32, 31); p[PRM_DW2_W+i] = rnd(-32, 31); p[PRM_DW3_W+i] = rnd(-32, 31);
    end
    for (int i = 0; i < IN_CH; i++) begin
      p[PRM_DW1_B+i] = rnd(-300, 300); p[PRM_DW2_B+i] = rnd(-300, 300); p[PRM_DW3_B+i] = rnd(-300, 300);
    end
    p[PRM_DW1_M] = rnd(20, 60); p[PRM_DW1_S] = 11;
    p[PRM_DW2_M] = rnd(20, 60); p[PRM_DW2_S] = 11;
    p[PRM_DW3_M] = rnd(20, 60); p[PRM_DW3_S] = 11;
    for (int i = 0; i < C1*IN_CH; i++) begin p[PRM_PW1_W+i] = rnd(-32, 31); p[PRM_PW2_W+i] = rnd(-32, 31); end
    for (int i = 0; i < C3*C2; i++) p[PRM_PW3_W+i] = rnd(-32, 31);
    for (int i = 0; i < C1; i++) begin
      p[PRM_PW1_B+i] = rnd(-200, 200); p[PRM_BN1_G+i] = rnd(10, 60); p[PRM_BN1_B+i] = rnd(-8, 8);
      p[PRM_PW2_B+i] = rnd(-200, 200); p[PRM_BN2_G+i] = rnd(10, 60); p[PRM_BN2_B+i] = rnd(-8, 8);
    end
    for (int i = 0; i < C3; i++) begin
      p[PRM_PW3_B+i] = rnd(-200, 200); p[PRM_BN3_G+i] = rnd(10, 60); p[PRM_BN3_B+i] = rnd(-8, 8);
    end
    p[PRM_BN1_S] = 10; p[PRM_BN2_S] = 10; p[PRM_BN3_S] = 10;
    p[PRM_GAP_M] = rnd(48, 80); p[PRM_GAP_S] = 7;
    for (int i = 0; i < HIDDEN*C3; i++) p[PRM_FC1_W+i] = rnd(-32, 31);
    for (int i = 0; i < HIDDEN; i++) p[PRM_FC1_B+i] = rnd(-200, 200);
    p[PRM_FC1_M] = rnd(3, 12); p[PRM_FC1_S] = 10;
    for (int i = 0; i < NCLASS*HIDDEN; i++) p[PRM_FC2_W+i] = rnd(-32, 31);
    for (int i = 0; i < NCLASS; i++) p[PRM_FC2_B+i] = rnd(-100, 100);
  endfunction

endpackage
