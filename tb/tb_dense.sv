// tb_dense: the hidden layer (6 -> 3, requantized with ReLU) and the logit
// layer (3 -> 2, raw 16-bit saturated) on random data, including large
// biases that force logit saturation; checks outputs and OUT*IN+1 cycles.
module tb_dense;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int IN = 6, OUT = 3, IN2 = 3, OUT2 = 2;

  logic clk = 0, rst_n = 0, start = 0, busy, done, busy2, done2;
  act_t  x [IN];
  wgt_t  w [OUT][IN];
  word_t b [OUT];
  word_t m;
  shift_t s;
  word_t y [OUT];
  act_t  x2 [IN2];
  wgt_t  w2 [OUT2][IN2];
  word_t b2 [OUT2];
  word_t y2 [OUT2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dense #(.IN(IN), .OUT(OUT), .RELU(1'b1), .REQUANT(1'b1)) dut (.*);
  dense #(.IN(IN2), .OUT(OUT2), .RELU(1'b0), .REQUANT(1'b0)) dut2 (
    .clk, .rst_n, .start, .busy(busy2), .done(done2), .x(x2), .w(w2), .b(b2), .m, .s, .y(y2));

  initial begin
    longint acc, e;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 60; trial++) begin
      for (int i = 0; i < IN; i++) x[i] = act_t'(rnd(-32, 31));
      for (int o = 0; o < OUT; o++) begin
        for (int i = 0; i < IN; i++) w[o][i] = wgt_t'(rnd(-32, 31));
        b[o] = word_t'(rnd(-3000, 3000));
      end
      for (int i = 0; i < IN2; i++) x2[i] = act_t'(rnd(-32, 31));
      for (int o = 0; o < OUT2; o++) begin
        for (int i = 0; i < IN2; i++) w2[o][i] = wgt_t'(rnd(-32, 31));
        b2[o] = word_t'((trial % 3 == 0) ? rnd(-32768, 32767) : rnd(-2000, 2000));
      end
      m = word_t'(rnd(-100, 100));
      s = shift_t'(rnd(0, 12));
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done) begin
        @(posedge clk); #1; cyc++;
        if (done2) begin
          checks++;
          if (cyc != OUT2 * IN2 + 1) begin failures++; $display("FAIL dut2 cycles %0d", cyc); end
        end
      end
      checks++;
      if (cyc != OUT * IN + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
      for (int o = 0; o < OUT; o++) begin
        acc = b[o];
        for (int i = 0; i < IN; i++) acc += longint'(x[i]) * longint'(w[o][i]);
        e = rq_ref(acc, m, s, 1);
        checks++;
        if (longint'(y[o]) != e) begin failures++; $display("FAIL o=%0d got %0d expected %0d", o, y[o], e); end
      end
      for (int o = 0; o < OUT2; o++) begin
        acc = b2[o];
        for (int i = 0; i < IN2; i++) acc += longint'(x2[i]) * longint'(w2[o][i]);
        e = sat16_ref(acc);
        checks++;
        if (longint'(y2[o]) != e) begin failures++; $display("FAIL dut2 o=%0d got %0d expected %0d", o, y2[o], e); end
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
