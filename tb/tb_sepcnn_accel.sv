// tb_sepcnn_accel: full inferences of the 1D-SepCNN at its real size (25x3
// window, 3 blocks, 152-word parameter set) with random parameters and
// inputs. Checks both logits and the class against the behavioural model,
// the 723-cycle latency (and that it is inside the 2800 cycles the published
// implementation needs), that both classes occur, and the overrun flag when
// a second start arrives during an inference.
module tb_sepcnn_accel;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int LATENCY = 723;

  logic  clk = 0, rst_n = 0, start = 0, busy, done, pred_class, overrun;
  act_t  x_in [SEQ_LEN][IN_CH];
  word_t prm [NPARAM];
  word_t logit [NCLASS];
  int checks = 0, failures = 0, n_cls1 = 0, n_cls0 = 0;

  always #5 clk = ~clk;

  sepcnn_accel dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    prm_t p;
    win_t xw;
    longint l0, l1;
    int cyc;
    for (int i = 0; i < NPARAM; i++) prm[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 60; trial++) begin
      if (trial % 4 == 0) begin
        random_params(p);
        for (int i = 0; i < NPARAM; i++) prm[i] = word_t'(p[i]);
      end
      for (int t = 0; t < SEQ_LEN; t++)
        for (int c = 0; c < IN_CH; c++) begin
          xw[t][c] = rnd(-32, 31);
          x_in[t][c] = act_t'(xw[t][c]);
        end
      model_ref(xw, p, l0, l1);
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      chk(cyc == LATENCY, $sformatf("latency %0d expected %0d", cyc, LATENCY));
      chk(cyc <= 2800, "latency within the published 2800 cycles");
      chk(longint'(logit[0]) == l0, $sformatf("trial %0d logit0 %0d expected %0d", trial, logit[0], l0));
      chk(longint'(logit[1]) == l1, $sformatf("trial %0d logit1 %0d expected %0d", trial, logit[1], l1));
      chk(pred_class == (l1 > l0), "class");
      if (pred_class) n_cls1++; else n_cls0++;
      chk(!overrun, "no overrun on spaced starts");
    end
    chk(n_cls1 > 0 && n_cls0 > 0, $sformatf("both classes seen (%0d/%0d)", n_cls0, n_cls1));
    // a second start in the middle of an inference is dropped and flagged
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    repeat (100) @(posedge clk);
    start <= 1;
    @(posedge clk);
    #1 start = 0;
    chk(overrun, "overrun flagged");
    cyc = 102;
    while (!done) begin @(posedge clk); #1; cyc++; end
    chk(cyc == LATENCY, $sformatf("overrun did not restart: %0d", cyc));
    repeat (LATENCY + 10) @(posedge clk);
    #1 chk(!busy, "idle after dropped start");
    $display("classes: %0d forefoot, %0d heel", n_cls0, n_cls1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
