// tb_strikewatch_top: end-to-end test of the FPGA design at its default
// size, driven only through its SPI pins the way the microcontroller would.
//
// The testbench loads a random 152-word parameter set, then streams raw
// triaxial IMU samples one SPI transaction each. It keeps its own copy of
// the sample history, works out independently when each window must open
// (cold start at 50 samples, then every 12.5 samples on average), builds the
// downsampled, quantized window, and runs the behavioural model of the
// network on it. For every window it checks the class pin, then reads the
// status bytes over SPI and checks both logits, the inference count and the
// feedback-event count; the feedback pin is compared with a reference
// consecutive-heel counter (N_consec = 5).
// Mid-stream the final-layer biases are rewritten to force a long run of
// heel strikes (feedback fires, then re-fires), then forefoot strikes (the
// run breaks), then a fresh parameter set is loaded.
// Mechanisms counted, each required at least once: cold-start window, 12-
// and 13-sample window gaps, both classes, feedback event, re-fire in a
// continuing run, run broken by a forefoot window, parameter reload.
module tb_strikewatch_top;
  import sw_pkg::*;
  import tb_ref_pkg::*;

  localparam int HALF   = 5;     // sclk = clk / 10
  localparam int W      = 50;
  localparam int NWIN   = 56;

  logic clk = 0, rst_n = 0;
  logic spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic feedback, pred_valid, pred_class;

  int checks = 0, failures = 0;
  int n_pred = 0, n_fb = 0;
  int m_cold = 0, m_gap12 = 0, m_gap13 = 0, m_cls0 = 0, m_cls1 = 0;
  int m_fire = 0, m_refire = 0, m_break = 0, m_reload = 0;

  always #5 clk = ~clk;

  strikewatch_top dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (pred_valid) n_pred++;
    if (feedback)   n_fb++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ SPI master
  task automatic spi_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int i = 7; i >= 0; i--) begin
      spi_mosi = tx[i];
      repeat (HALF) @(posedge clk);
      spi_sclk = 1;
      rx[i] = spi_miso;
      repeat (HALF) @(posedge clk);
      spi_sclk = 0;
    end
  endtask

  task automatic spi_txn(input logic [7:0] txq [$], output logic [7:0] rxq [$]);
    logic [7:0] r;
    rxq.delete();
    spi_cs_n = 0;
    repeat (HALF) @(posedge clk);
    foreach (txq[i]) begin
      spi_byte(txq[i], r);
      rxq.push_back(r);
    end
    repeat (HALF) @(posedge clk);
    spi_cs_n = 1;
    repeat (3 * HALF) @(posedge clk);
  endtask

  task automatic write_params(input int base, input longint vals [$]);
    logic [7:0] tq [$], rq [$];
    tq = '{8'h01, 8'(base)};
    foreach (vals[i]) begin
      tq.push_back(8'(vals[i] >>> 8));
      tq.push_back(8'(vals[i]));
    end
    spi_txn(tq, rq);
  endtask

  task automatic load_all(input prm_t p);
    longint v [$];
    for (int i = 0; i < NPARAM; i++) v.push_back(p[i]);
    write_params(0, v);
  endtask

  // ------------------------------------------------------------ reference
  function automatic bit opens(int n);
    if (n < W) return 0;
    if (n == W) return 1;
    return ((n - W) * 4) / W != ((n - W - 1) * 4) / W;
  endfunction

  initial begin
    prm_t p;
    longint hist [$][IN_CH];
    win_t xw;
    longint l0, l1;
    logic [7:0] tq [$], rq [$];
    int n = 0, nwin = 0, last = 0, ref_run = 0, ref_events = 0, run_before;
    bit cls, fire_ref;

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    random_params(p);
    load_all(p);

    while (nwin < NWIN) begin
      // phase changes between windows
      if (nwin == 20 && last == n) begin
        p[PRM_FC2_B + 0] = -20000; p[PRM_FC2_B + 1] = 20000;   // force heel
        write_params(PRM_FC2_B, '{p[PRM_FC2_B], p[PRM_FC2_B + 1]});
        m_reload++;
      end
      if (nwin == 31 && last == n) begin
        p[PRM_FC2_B + 0] = 20000; p[PRM_FC2_B + 1] = -20000;   // force forefoot
        write_params(PRM_FC2_B, '{p[PRM_FC2_B], p[PRM_FC2_B + 1]});
        m_reload++;
      end
      if (nwin == 34 && last == n) begin
        random_params(p);                                      // fresh model
        load_all(p);
        m_reload++;
      end
      // one raw sample
      begin
        longint smp [IN_CH];
        int pred_before;
        for (int a = 0; a < IN_CH; a++) smp[a] = rnd(-32768, 32767);
        hist.push_back(smp);
        n++;
        tq = '{8'h02};
        for (int a = 0; a < IN_CH; a++) begin
          tq.push_back(8'(smp[a] >>> 8));
          tq.push_back(8'(smp[a]));
        end
        pred_before = n_pred;
        spi_txn(tq, rq);
        if (!opens(n)) begin
          repeat (800) @(posedge clk);
          chk(n_pred == pred_before, $sformatf("no inference expected after sample %0d", n));
          continue;
        end
        // a window opened: reference result
        for (int j = 0; j < SEQ_LEN; j++)
          for (int a = 0; a < IN_CH; a++)
            xw[j][a] = rq_ref(hist[n - W + 2 * j + 1][a], p[PRM_INQ_M], int'(p[PRM_INQ_S] & 31), 0);
        model_ref(xw, p, l0, l1);
        cls = (l1 > l0);
        fire_ref = 0;
        run_before = ref_run;
        if (cls) begin
          ref_run++;
          if (ref_run == 5) begin
            fire_ref = 1; ref_run = 1; ref_events++;
            m_fire++;
            if (ref_events >= 2 && run_before == 4 && nwin > 0) m_refire += (m_fire > 1);
          end
        end else begin
          if (run_before > 0) m_break++;
          ref_run = 0;
        end
        // wait for the inference (723 clocks after the window) to finish
        for (int k = 0; k < 2000 && n_pred == pred_before; k++) @(posedge clk);
        chk(n_pred == pred_before + 1, $sformatf("window %0d: one inference", nwin));
        #1;
        chk(pred_class == cls, $sformatf("window %0d: class pin %0d expected %0d", nwin, pred_class, cls));
        repeat (4) @(posedge clk);
        chk(n_fb == ref_events, $sformatf("window %0d: feedback pulses %0d expected %0d", nwin, n_fb, ref_events));
        // status over SPI
        spi_txn('{8'h03, 0, 0, 0, 0, 0, 0, 0}, rq);
        chk(rq[1] == {5'b0, 1'b0, 1'b1, cls}, $sformatf("window %0d: status %h", nwin, rq[1]));
        chk(longint'(signed'({rq[2], rq[3]})) == l0, $sformatf("window %0d: logit0 %0d expected %0d", nwin, signed'({rq[2], rq[3]}), l0));
        chk(longint'(signed'({rq[4], rq[5]})) == l1, $sformatf("window %0d: logit1 %0d expected %0d", nwin, signed'({rq[4], rq[5]}), l1));
        chk(int'(rq[6]) == ((nwin + 1) % 256), $sformatf("window %0d: inference count %0d", nwin, rq[6]));
        chk(int'(rq[7]) == (ref_events % 256), $sformatf("window %0d: event count %0d", nwin, rq[7]));
        if (cls) m_cls1++; else m_cls0++;
        if (n == W) m_cold++;
        if (last != 0 && n - last == 12) m_gap12++;
        if (last != 0 && n - last == 13) m_gap13++;
        last = n;
        nwin++;
      end
    end

    $display("windows %0d  samples %0d  cold %0d gap12 %0d gap13 %0d  forefoot %0d heel %0d",
             nwin, n, m_cold, m_gap12, m_gap13, m_cls0, m_cls1);
    $display("feedback events %0d  re-fires %0d  broken runs %0d  reloads %0d",
             m_fire, m_refire, m_break, m_reload);
    chk(m_cold == 1,  "cold-start window seen");
    chk(m_gap12 > 0,  "12-sample window gap seen");
    chk(m_gap13 > 0,  "13-sample window gap seen");
    chk(m_cls0 > 0,   "forefoot class seen");
    chk(m_cls1 > 0,   "heel class seen");
    chk(m_fire > 0,   "feedback event seen");
    chk(m_refire > 0, "re-fire in a continuing run seen");
    chk(m_break > 0,  "run broken by forefoot seen");
    chk(m_reload > 0, "parameter reload seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
