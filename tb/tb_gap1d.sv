// tb_gap1d: global average pooling of 6 channels over 2 steps and, with a
// second instance, over 5 steps; checks the requantized averages and the
// CH*LEN+1 cycle count.
module tb_gap1d;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int CH = 6, LEN = 2, LEN2 = 5;

  logic clk = 0, rst_n = 0, start = 0, busy, done, busy2, done2;
  act_t x [LEN2][CH];
  act_t xa [LEN][CH];
  word_t m;
  shift_t s;
  act_t y [CH], y2 [CH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always_comb for (int t = 0; t < LEN; t++) xa[t] = x[t];

  gap1d #(.CH(CH), .LEN(LEN))  dut  (.clk, .rst_n, .start, .busy, .done, .x(xa), .m, .s, .y);
  gap1d #(.CH(CH), .LEN(LEN2)) dut2 (.clk, .rst_n, .start, .busy(busy2), .done(done2), .x, .m, .s, .y(y2));

  initial begin
    longint sum, e;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int t = 0; t < LEN2; t++) for (int c = 0; c < CH; c++) x[t][c] = act_t'(rnd(-32, 31));
      m = word_t'(rnd(-100, 100));
      s = shift_t'(rnd(0, 9));
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done2) begin
        @(posedge clk); #1; cyc++;
        if (done) begin
          checks++;
          if (cyc != CH * LEN + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
        end
      end
      checks++;
      if (cyc != CH * LEN2 + 1) begin failures++; $display("FAIL dut2 cycles %0d", cyc); end
      for (int c = 0; c < CH; c++) begin
        sum = 0;
        for (int t = 0; t < LEN; t++) sum += x[t][c];
        e = rq_ref(sum, m, s, 0);
        checks++;
        if (longint'(y[c]) != e) begin failures++; $display("FAIL c=%0d got %0d expected %0d", c, y[c], e); end
        for (int t = LEN; t < LEN2; t++) sum += x[t][c];
        e = rq_ref(sum, m, s, 0);
        checks++;
        if (longint'(y2[c]) != e) begin failures++; $display("FAIL dut2 c=%0d got %0d expected %0d", c, y2[c], e); end
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
