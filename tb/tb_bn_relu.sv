// tb_bn_relu: checks the integer batch-norm + ReLU against the reference
// model for corner shifts, zero, saturation and 4000 random operand sets.
module tb_bn_relu;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  acc_t   acc;
  word_t  g, beta;
  shift_t s;
  act_t   y;
  int checks = 0, failures = 0;

  bn_relu dut (.acc, .g, .beta, .s, .y);

  task automatic check(longint a, longint gg, longint bb, int ss);
    longint e;
    acc = acc_t'(a); g = word_t'(gg); beta = word_t'(bb); s = shift_t'(ss);
    #1;
    e = bn_ref(a, gg, bb, ss);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      $display("FAIL acc=%0d g=%0d beta=%0d s=%0d: got %0d expected %0d", a, gg, bb, ss, y, e);
    end
  endtask

  initial begin
    check(0, 0, 0, 0);
    check(100, 1, 0, 0);        // saturates at 31
    check(-5, 3, 0, 0);         // ReLU
    check(48, 1, 0, 4);         // 3.0 -> 3
    check(40, 1, 0, 4);         // 2.5 -> 3 (round half up)
    check(-40, 1, 3, 4);        // -2.5 + 3 = 0.5 -> 1
    check(1000, 20, -4, 10);    // 19.53 - 4 -> 16
    for (int i = 0; i < 4000; i++)
      check(rnd(-20000, 20000), rnd(-60, 60), rnd(-40, 40), int'(rnd(0, 14)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
