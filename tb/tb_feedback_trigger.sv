// tb_feedback_trigger: drives prediction sequences into the N_consec = 5
// trigger and compares fire, run length and event count with a reference
// counter after every prediction: isolated positives, runs of exactly 4
// (no event), runs of 5, long runs (re-fire every 4 further positives) and
// 2000 random predictions.
module tb_feedback_trigger;
  logic clk = 0, rst_n = 0, pred_valid = 0, pred_class = 0, fire;
  logic [7:0] run_len, events;
  int checks = 0, failures = 0, n_fire = 0;
  int ref_run = 0, ref_events = 0;

  always #5 clk = ~clk;

  feedback_trigger #(.N_CONSEC(5), .TARGET_CLASS(1'b1)) dut (.*);

  task automatic predict(bit cls);
    bit ref_fire;
    ref_fire = 0;
    if (cls) begin
      ref_run++;
      if (ref_run == 5) begin ref_fire = 1; ref_run = 1; ref_events++; end
    end else ref_run = 0;
    pred_class = cls;
    pred_valid = 1;
    @(posedge clk); #1;
    pred_valid = 0;
    checks++;
    if (fire !== ref_fire || int'(run_len) != ref_run || int'(events) != (ref_events % 256)) begin
      failures++;
      if (failures < 10) $display("FAIL fire %0d/%0d run %0d/%0d events %0d/%0d", fire, ref_fire, run_len, ref_run, events, ref_events);
    end
    if (fire) n_fire++;
    // idle gap: fire must be a single-cycle pulse
    @(posedge clk); #1;
    checks++;
    if (fire) begin failures++; $display("FAIL fire longer than one cycle"); end
  endtask

  initial begin
    int n_before;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    repeat (4) predict(1);      // 4 in a row: nothing
    checks++;
    if (n_fire != 0) begin failures++; $display("FAIL fired after 4"); end
    predict(0);
    repeat (5) predict(1);      // the 5th fires
    checks++;
    if (n_fire != 1) begin failures++; $display("FAIL no fire after 5"); end
    n_before = n_fire;
    repeat (8) predict(1);      // continuing run: fires after 4 and 8 more
    checks++;
    if (n_fire - n_before != 2) begin failures++; $display("FAIL re-fire count %0d", n_fire - n_before); end
    for (int i = 0; i < 2000; i++) predict(($urandom % 8) != 0);
    $display("events: %0d", n_fire);
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
