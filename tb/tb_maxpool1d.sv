// tb_maxpool1d: max pooling (kernel 2, stride 2) on 23 steps x 3 channels,
// including the dropped odd last step; checks every output and the
// floor(LEN_IN/2)*CH+1 cycle count.
module tb_maxpool1d;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int CH = 3, LEN_IN = 23, P = 2, LEN_OUT = LEN_IN / P;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  act_t x [LEN_IN][CH];
  act_t y [LEN_OUT][CH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  maxpool1d #(.CH(CH), .LEN_IN(LEN_IN), .P(P)) dut (.*);

  initial begin
    longint e;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 30; trial++) begin
      for (int t = 0; t < LEN_IN; t++) for (int c = 0; c < CH; c++) x[t][c] = act_t'(rnd(-32, 31));
      // the dropped last step holds the largest value: it must not appear
      for (int c = 0; c < CH; c++) x[LEN_IN-1][c] = act_t'(31);
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != LEN_OUT * CH + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
      for (int t = 0; t < LEN_OUT; t++)
        for (int c = 0; c < CH; c++) begin
          e = x[2*t][c];
          if (x[2*t+1][c] > e) e = x[2*t+1][c];
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
