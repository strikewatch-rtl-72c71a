// tb_window_sampler: streams 400 random triaxial samples into the window
// front end (w = 50, d = 2, s = 0.25). Checks that the first window opens
// exactly at the 50th sample (cold start), that later windows open exactly
// where the count of elapsed quarter-window
// hops says (13, 12, 13, ... samples apart; both gaps
// are required to occur), and that every window holds the odd-indexed
// (newest-aligned) samples of the last 50, quantized with the reference
// requantization.
module tb_window_sampler;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 50, D = 2, N = W / D;

  logic   clk = 0, rst_n = 0, sample_valid = 0, win_valid;
  word_t  sample [IN_CH];
  word_t  inq_m;
  shift_t inq_s;
  act_t   win [N][IN_CH];
  int checks = 0, failures = 0;
  longint hist [$][IN_CH];

  always #5 clk = ~clk;

  window_sampler #(.W(W), .D(D), .STRIDE_NUM(1), .STRIDE_DEN(4)) dut (.*);

  // a window must open after sample count n (independent formula:
  // n == W, or the count of elapsed quarter-window hops increases)
  function automatic bit opens(int n);
    if (n < W) return 0;
    if (n == W) return 1;
    return ((n - W) * 4) / W != ((n - W - 1) * 4) / W;
  endfunction

  initial begin
    longint e;
    int last = 0, gap12 = 0, gap13 = 0, nwin = 0;
    bit got;
    inq_m = 16'sd3;
    inq_s = 5'd11;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int n = 1; n <= 400; n++) begin
      longint smp [IN_CH];
      for (int a = 0; a < IN_CH; a++) begin
        smp[a] = rnd(-32768, 32767);
        sample[a] = word_t'(smp[a]);
      end
      hist.push_back(smp);
      sample_valid = 1;
      @(posedge clk); #1;
      sample_valid = 0;
      // window, if any, appears one clock later; watch a few clocks
      got = 0;
      for (int k = 0; k < 4; k++) begin
        @(posedge clk); #1;
        if (win_valid) got = 1;
        if (win_valid) begin
          for (int j = 0; j < N; j++)
            for (int a = 0; a < IN_CH; a++) begin
              e = rq_ref(hist[hist.size() - W + j * D + (D - 1)][a], inq_m, inq_s, 0);
              checks++;
              if (longint'(win[j][a]) != e) begin
                failures++;
                if (failures < 10) $display("FAIL n=%0d j=%0d a=%0d got %0d expected %0d", n, j, a, win[j][a], e);
              end
            end
        end
      end
      checks++;
      if (got != opens(n)) begin
        failures++;
        $display("FAIL window at sample %0d: got %0d expected %0d", n, got, opens(n));
      end
      if (got) begin
        nwin++;
        if (last != 0 && n - last == 12) gap12++;
        if (last != 0 && n - last == 13) gap13++;
        last = n;
      end
    end
    checks++;
    if (gap12 == 0 || gap13 == 0) begin failures++; $display("FAIL gaps 12:%0d 13:%0d", gap12, gap13); end
    // 400 samples = 4 s at 100 Hz: cold start then 8 windows per second
    checks++;
    if (nwin != 1 + (400 - W) * 4 / W) begin failures++; $display("FAIL %0d windows", nwin); end
    $display("windows %0d, gaps of 12: %0d, of 13: %0d", nwin, gap12, gap13);
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
