// tb_pw_conv1d: runs the pointwise convolution + BN + ReLU at its default
// size (3 -> 3 channels, 23 steps) and at the block-3 size (3 -> 6, 2 steps)
// on random data and checks all outputs and the LEN*COUT*CIN+1 cycle count.
module tb_pw_conv1d;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int CIN = 3, COUT = 3, LEN = 23;
  localparam int COUT2 = 6, LEN2 = 2;

  logic clk = 0, rst_n = 0, start = 0, busy, done, start2 = 0, busy2, done2;
  act_t  x [LEN][CIN];
  wgt_t  w [COUT2][CIN];
  word_t b [COUT2], g [COUT2], beta [COUT2];
  shift_t s;
  act_t  y [LEN][COUT];
  act_t  x2 [LEN2][CIN];
  act_t  y2 [LEN2][COUT2];
  wgt_t  w1 [COUT][CIN];
  word_t b1 [COUT], g1 [COUT], beta1 [COUT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  always_comb
    for (int o = 0; o < COUT; o++) begin
      w1[o] = w[o]; b1[o] = b[o]; g1[o] = g[o]; beta1[o] = beta[o];
    end
  always_comb
    for (int t = 0; t < LEN2; t++) x2[t] = x[t];

  pw_conv1d #(.CIN(CIN), .COUT(COUT), .LEN(LEN)) dut (
    .clk, .rst_n, .start, .busy, .done, .x, .w(w1), .b(b1), .g(g1), .beta(beta1), .s, .y);
  pw_conv1d #(.CIN(CIN), .COUT(COUT2), .LEN(LEN2)) dut2 (
    .clk, .rst_n, .start(start2), .busy(busy2), .done(done2), .x(x2), .w, .b, .g, .beta, .s, .y(y2));

  function automatic longint expect_at(int t, int o);
    longint acc;
    acc = b[o];
    for (int i = 0; i < CIN; i++) acc += longint'(x[t][i]) * longint'(w[o][i]);
    return bn_ref(acc, g[o], beta[o], s);
  endfunction

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 20; trial++) begin
      for (int t = 0; t < LEN; t++) for (int c = 0; c < CIN; c++) x[t][c] = act_t'(rnd(-32, 31));
      for (int o = 0; o < COUT2; o++) begin
        for (int i = 0; i < CIN; i++) w[o][i] = wgt_t'(rnd(-32, 31));
        b[o] = word_t'(rnd(-500, 500)); g[o] = word_t'(rnd(-60, 60)); beta[o] = word_t'(rnd(-20, 20));
      end
      s = shift_t'(rnd(0, 12));
      @(posedge clk);
      start <= 1; start2 <= 1;
      @(posedge clk);
      #1 start = 0; start2 = 0;
      cyc = 1;
      while (!done) begin
        @(posedge clk); #1; cyc++;
        if (done2) begin
          checks++;
          if (cyc != LEN2 * COUT2 * CIN + 1) begin failures++; $display("FAIL dut2 cycles %0d", cyc); end
        end
      end
      checks++;
      if (cyc != LEN * COUT * CIN + 1) begin
        failures++;
        $display("FAIL cycles %0d expected %0d", cyc, LEN * COUT * CIN + 1);
      end
      for (int t = 0; t < LEN; t++)
        for (int o = 0; o < COUT; o++) begin
          checks++;
          if (longint'(y[t][o]) != expect_at(t, o)) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d o=%0d got %0d expected %0d", t, o, y[t][o], expect_at(t, o));
          end
        end
      for (int t = 0; t < LEN2; t++)
        for (int o = 0; o < COUT2; o++) begin
          checks++;
          if (longint'(y2[t][o]) != expect_at(t, o)) begin
            failures++;
            if (failures < 10) $display("FAIL dut2 t=%0d o=%0d got %0d expected %0d", t, o, y2[t][o], expect_at(t, o));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
