// sepcnn_accel: the 6-bit, 3-block 1D depthwise-separable CNN that classifies
// a window of wrist acceleration as forefoot (class 0) or heel (class 1)
// strike.
//
// Data path (time x channels):
//   x_in 25x3 -> dw 23x3 -> pw+BN+ReLU 23x3 -> maxpool 11x3      (block 1)
//             -> dw  9x3 -> pw+BN+ReLU  9x3 -> maxpool  4x3      (block 2)
//             -> dw  2x3 -> pw+BN+ReLU  2x6                      (block 3)
//             -> global average pool 6 -> dense 3 + ReLU -> dense 2 logits
//             -> argmax
// Every layer keeps its own output buffer (registers) and its own
// multiplier, and the layers run strictly one after another: each layer's
// done pulse starts the next. The network shape is the paper's selected
// 1D-SepCNN; the layer-sequential schedule, valid padding and number formats
// are this design's own.
//
// Interface: start (pulse) launches an inference on x_in, which must hold
// still until done. done pulses once logit, pred_class are updated; busy is
// high in between. A start while busy is dropped and sets the sticky
// overrun flag (the window came before the previous inference finished).
// Parameters come from the prm word array (layout in sw_pkg).
//
// Timing: INFER_CYCLES = 207+207+33+81+81+12+18+36+12+18+6 work cycles plus
// one cycle per layer hand-over and one for the argmax register: 723 clocks
// from start to done.
module sepcnn_accel
  import sw_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  act_t  x_in [SEQ_LEN][IN_CH],
  input  word_t prm [NPARAM],
  output logic  busy,
  output logic  done,
  output word_t logit [NCLASS],
  output logic  pred_class,
  output logic  overrun
);
  // ---------------------------------------------------------------- parameter slices
  wgt_t  dw1_w [IN_CH][KSIZE];  word_t dw1_b [IN_CH];
  wgt_t  pw1_w [C1][IN_CH];     word_t pw1_b [C1];  word_t bn1_g [C1];  word_t bn1_b [C1];
  wgt_t  dw2_w [C1][KSIZE];     word_t dw2_b [C1];
  wgt_t  pw2_w [C2][C1];        word_t pw2_b [C2];  word_t bn2_g [C2];  word_t bn2_b [C2];
  wgt_t  dw3_w [C2][KSIZE];     word_t dw3_b [C2];
  wgt_t  pw3_w [C3][C2];        word_t pw3_b [C3];  word_t bn3_g [C3];  word_t bn3_b [C3];
  wgt_t  fc1_w [HIDDEN][C3];    word_t fc1_b [HIDDEN];
  wgt_t  fc2_w [NCLASS][HIDDEN]; word_t fc2_b [NCLASS];

  always_comb begin
    for (int c = 0; c < IN_CH; c++) begin
      for (int k = 0; k < KSIZE; k++) dw1_w[c][k] = wgt_t'(prm[PRM_DW1_W + c*KSIZE + k]);
      dw1_b[c] = prm[PRM_DW1_B + c];
    end
    for (int o = 0; o < C1; o++) begin
      for (int i = 0; i < IN_CH; i++) pw1_w[o][i] = wgt_t'(prm[PRM_PW1_W + o*IN_CH + i]);
      pw1_b[o] = prm[PRM_PW1_B + o];
      bn1_g[o] = prm[PRM_BN1_G + o];
      bn1_b[o] = prm[PRM_BN1_B + o];
    end
    for (int c = 0; c < C1; c++) begin
      for (int k = 0; k < KSIZE; k++) dw2_w[c][k] = wgt_t'(prm[PRM_DW2_W + c*KSIZE + k]);
      dw2_b[c] = prm[PRM_DW2_B + c];
    end
    for (int o = 0; o < C2; o++) begin
      for (int i = 0; i < C1; i++) pw2_w[o][i] = wgt_t'(prm[PRM_PW2_W + o*C1 + i]);
      pw2_b[o] = prm[PRM_PW2_B + o];
      bn2_g[o] = prm[PRM_BN2_G + o];
      bn2_b[o] = prm[PRM_BN2_B + o];
    end
    for (int c = 0; c < C2; c++) begin
      for (int k = 0; k < KSIZE; k++) dw3_w[c][k] = wgt_t'(prm[PRM_DW3_W + c*KSIZE + k]);
      dw3_b[c] = prm[PRM_DW3_B + c];
    end
    for (int o = 0; o < C3; o++) begin
      for (int i = 0; i < C2; i++) pw3_w[o][i] = wgt_t'(prm[PRM_PW3_W + o*C2 + i]);
      pw3_b[o] = prm[PRM_PW3_B + o];
      bn3_g[o] = prm[PRM_BN3_G + o];
      bn3_b[o] = prm[PRM_BN3_B + o];
    end
    for (int o = 0; o < HIDDEN; o++) begin
      for (int i = 0; i < C3; i++) fc1_w[o][i] = wgt_t'(prm[PRM_FC1_W + o*C3 + i]);
      fc1_b[o] = prm[PRM_FC1_B + o];
    end
    for (int o = 0; o < NCLASS; o++) begin
      for (int i = 0; i < HIDDEN; i++) fc2_w[o][i] = wgt_t'(prm[PRM_FC2_W + o*HIDDEN + i]);
      fc2_b[o] = prm[PRM_FC2_B + o];
    end
  end

  // ---------------------------------------------------------------- layer chain
  // st[i] starts layer i; dn[i] is its done pulse. Layer order:
  // 0 dw1, 1 pw1, 2 pool1, 3 dw2, 4 pw2, 5 pool2, 6 dw3, 7 pw3, 8 gap, 9 fc1, 10 fc2
  localparam int unsigned NL = 11;
  logic [NL-1:0] st, dn, bz;
  logic          launch;

  assign launch = start && !busy;
  assign st     = {dn[NL-2:0], launch};

  act_t  a1c [L1C][IN_CH];
  act_t  a1p [L1C][C1];
  act_t  a1q [L1P][C1];
  act_t  a2c [L2C][C1];
  act_t  a2p [L2C][C2];
  act_t  a2q [L2P][C2];
  act_t  a3c [L3C][C2];
  act_t  a3p [L3C][C3];
  act_t  ag  [C3];
  word_t h1w [HIDDEN];
  act_t  h1  [HIDDEN];
  word_t lg  [NCLASS];
  word_t unused_m;

  always_comb
    for (int o = 0; o < HIDDEN; o++) h1[o] = act_t'(h1w[o]);

  assign unused_m = '0;

  dw_conv1d #(.CH(IN_CH), .LEN_IN(SEQ_LEN), .K(KSIZE)) u_dw1 (
    .clk, .rst_n, .start(st[0]), .busy(bz[0]), .done(dn[0]), .x(x_in), .w(dw1_w), .b(dw1_b),
    .m(prm[PRM_DW1_M]), .s(shift_t'(prm[PRM_DW1_S])), .y(a1c));
  pw_conv1d #(.CIN(IN_CH), .COUT(C1), .LEN(L1C)) u_pw1 (
    .clk, .rst_n, .start(st[1]), .busy(bz[1]), .done(dn[1]), .x(a1c), .w(pw1_w), .b(pw1_b),
    .g(bn1_g), .beta(bn1_b), .s(shift_t'(prm[PRM_BN1_S])), .y(a1p));
  maxpool1d #(.CH(C1), .LEN_IN(L1C), .P(POOL)) u_pool1 (
    .clk, .rst_n, .start(st[2]), .busy(bz[2]), .done(dn[2]), .x(a1p), .y(a1q));

  dw_conv1d #(.CH(C1), .LEN_IN(L1P), .K(KSIZE)) u_dw2 (
    .clk, .rst_n, .start(st[3]), .busy(bz[3]), .done(dn[3]), .x(a1q), .w(dw2_w), .b(dw2_b),
    .m(prm[PRM_DW2_M]), .s(shift_t'(prm[PRM_DW2_S])), .y(a2c));
  pw_conv1d #(.CIN(C1), .COUT(C2), .LEN(L2C)) u_pw2 (
    .clk, .rst_n, .start(st[4]), .busy(bz[4]), .done(dn[4]), .x(a2c), .w(pw2_w), .b(pw2_b),
    .g(bn2_g), .beta(bn2_b), .s(shift_t'(prm[PRM_BN2_S])), .y(a2p));
  maxpool1d #(.CH(C2), .LEN_IN(L2C), .P(POOL)) u_pool2 (
    .clk, .rst_n, .start(st[5]), .busy(bz[5]), .done(dn[5]), .x(a2p), .y(a2q));

  dw_conv1d #(.CH(C2), .LEN_IN(L2P), .K(KSIZE)) u_dw3 (
    .clk, .rst_n, .start(st[6]), .busy(bz[6]), .done(dn[6]), .x(a2q), .w(dw3_w), .b(dw3_b),
    .m(prm[PRM_DW3_M]), .s(shift_t'(prm[PRM_DW3_S])), .y(a3c));
  pw_conv1d #(.CIN(C2), .COUT(C3), .LEN(L3C)) u_pw3 (
    .clk, .rst_n, .start(st[7]), .busy(bz[7]), .done(dn[7]), .x(a3c), .w(pw3_w), .b(pw3_b),
    .g(bn3_g), .beta(bn3_b), .s(shift_t'(prm[PRM_BN3_S])), .y(a3p));

  gap1d #(.CH(C3), .LEN(L3C)) u_gap (
    .clk, .rst_n, .start(st[8]), .busy(bz[8]), .done(dn[8]), .x(a3p),
    .m(prm[PRM_GAP_M]), .s(shift_t'(prm[PRM_GAP_S])), .y(ag));
  dense #(.IN(C3), .OUT(HIDDEN), .RELU(1'b1), .REQUANT(1'b1)) u_fc1 (
    .clk, .rst_n, .start(st[9]), .busy(bz[9]), .done(dn[9]), .x(ag), .w(fc1_w), .b(fc1_b),
    .m(prm[PRM_FC1_M]), .s(shift_t'(prm[PRM_FC1_S])), .y(h1w));
  dense #(.IN(HIDDEN), .OUT(NCLASS), .RELU(1'b0), .REQUANT(1'b0)) u_fc2 (
    .clk, .rst_n, .start(st[9+1]), .busy(bz[10]), .done(dn[10]), .x(h1), .w(fc2_w), .b(fc2_b),
    .m(unused_m), .s('0), .y(lg));

  // ---------------------------------------------------------------- result and control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      overrun    <= 1'b0;
      pred_class <= 1'b0;
      logit      <= '{default: '0};
    end else begin
      done <= 1'b0;
      if (launch) busy <= 1'b1;
      if (start && busy) overrun <= 1'b1;
      if (dn[NL-1]) begin
        logit      <= lg;
        pred_class <= (lg[1] > lg[0]);
        busy       <= 1'b0;
        done       <= 1'b1;
      end
    end
  end

  // a layer only starts when it is idle
  assert property (@(posedge clk) disable iff (!rst_n) (st & bz) == '0)
    else $error("layer started while busy");

endmodule
