// feedback_trigger: turns a stream of per-window predictions into feedback
// events for the runner.
//
// A run counter counts consecutive predictions of TARGET_CLASS (heel strike);
// any other prediction clears it. When a prediction brings the run to
// N_CONSEC, fire pulses for one clock and the run restarts at 1, so a
// continuing run re-fires after N_CONSEC-1 further positives. With
// N_CONSEC = 5 and 8 windows per second this gives the first event 0.5 s
// after the first positive window and at most 2 events per second.
//
// Interface: pred_valid/pred_class arrive together; fire is registered and
// appears on the clock after the deciding prediction. events counts fired
// events modulo 256; run_len is the current run (saturating at 255).
//
// The consecutive-count rule and N_CONSEC = 5 are the paper's; restarting the
// run at 1 after an event is this design's reading of its "up to 2 feedback
// events per second".
module feedback_trigger #(
  parameter int unsigned N_CONSEC     = 5,
  parameter bit          TARGET_CLASS = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pred_valid,
  input  logic       pred_class,
  output logic       fire,
  output logic [7:0] run_len,
  output logic [7:0] events
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fire    <= 1'b0;
      run_len <= '0;
      events  <= '0;
    end else begin
      fire <= 1'b0;
      if (pred_valid) begin
        if (pred_class != TARGET_CLASS) begin
          run_len <= '0;
        end else if (32'(run_len) + 1 >= N_CONSEC) begin
          fire    <= 1'b1;
          events  <= events + 1'b1;
          run_len <= 8'd1;
        end else if (run_len != 8'hff) begin
          run_len <= run_len + 1'b1;
        end
      end
    end
  end

endmodule
