// tb_dw_conv1d: runs the depthwise convolution at its default size (3
// channels, 25 steps, kernel 3) on 20 random input/weight sets and checks
// every output against the reference and the cycle count against
// (LEN_IN-K+1)*CH*K.
module tb_dw_conv1d;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int CH = 3, LEN_IN = 25, K = 3, LEN_OUT = LEN_IN - K + 1;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  act_t x [LEN_IN][CH];
  wgt_t w [CH][K];
  word_t b [CH];
  word_t m;
  shift_t s;
  act_t y [LEN_OUT][CH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dw_conv1d #(.CH(CH), .LEN_IN(LEN_IN), .K(K)) dut (.*);

  initial begin
    longint acc, e;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 20; trial++) begin
      for (int t = 0; t < LEN_IN; t++) for (int c = 0; c < CH; c++) x[t][c] = act_t'(rnd(-32, 31));
      for (int c = 0; c < CH; c++) begin
        for (int k = 0; k < K; k++) w[c][k] = wgt_t'(rnd(-32, 31));
        b[c] = word_t'(rnd(-500, 500));
      end
      m = word_t'(rnd(-80, 80));
      s = shift_t'(rnd(0, 13));
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != LEN_OUT * CH * K + 1) begin
        failures++;
        $display("FAIL cycles %0d expected %0d", cyc, LEN_OUT * CH * K + 1);
      end
      for (int t = 0; t < LEN_OUT; t++)
        for (int c = 0; c < CH; c++) begin
          acc = b[c];
          for (int k = 0; k < K; k++) acc += longint'(x[t+k][c]) * longint'(w[c][k]);
          e = rq_ref(acc, m, s, 0);
          checks++;
          if (longint'(y[t][c]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d c=%0d got %0d expected %0d", t, c, y[t][c], e);
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
