// tb_spi_slave: an SPI mode-0 master (sclk = clk/10) sends transactions of
// random length and content. The testbench answers each received byte b
// with b ^ 8'hA5 as the next response byte, so the master must read back,
// for byte k+1, the transformed byte k. Checks every received byte, every
// response byte, one start pulse per transaction and miso = 0 while idle.
module tb_spi_slave;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso, sel, start, rx_valid;
  logic [7:0] rx_byte, tx_byte;
  int checks = 0, failures = 0, n_start = 0;
  logic [7:0] got_rx [$];

  localparam int HALF = 5;

  always #5 clk = ~clk;

  spi_slave dut (.*);

  always_ff @(posedge clk) begin
    if (!rst_n) tx_byte <= 8'h00;
    else if (rx_valid) begin
      tx_byte <= rx_byte ^ 8'hA5;
      got_rx.push_back(rx_byte);
    end
    if (rst_n && start) n_start++;
  end

  task automatic xfer(input logic [7:0] tx, output logic [7:0] rx);
    for (int i = 7; i >= 0; i--) begin
      mosi = tx[i];
      repeat (HALF) @(posedge clk);
      sclk = 1;
      rx[i] = miso;
      repeat (HALF) @(posedge clk);
      sclk = 0;
    end
  endtask

  initial begin
    logic [7:0] sent [$];
    logic [7:0] r;
    int nt;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    for (int t = 0; t < 40; t++) begin
      int len;
      len = 1 + $urandom % 8;
      sent.delete();
      got_rx.delete();
      cs_n = 0;
      repeat (HALF) @(posedge clk);
      for (int k = 0; k < len; k++) begin
        logic [7:0] b;
        b = 8'($urandom);
        sent.push_back(b);
        xfer(b, r);
        if (k > 0) begin
          checks++;
          if (r != (sent[k-1] ^ 8'hA5)) begin
            failures++;
            $display("FAIL t=%0d k=%0d miso byte %h expected %h", t, k, r, sent[k-1] ^ 8'hA5);
          end
        end
      end
      repeat (HALF) @(posedge clk);
      cs_n = 1;
      repeat (4 * HALF) @(posedge clk);
      checks++;
      if (miso !== 1'b0) begin failures++; $display("FAIL miso not 0 when idle"); end
      checks++;
      if (got_rx.size() != len) begin
        failures++;
        $display("FAIL t=%0d received %0d bytes, sent %0d", t, got_rx.size(), len);
      end else
        for (int k = 0; k < len; k++) begin
          checks++;
          if (got_rx[k] != sent[k]) begin failures++; $display("FAIL rx %h expected %h", got_rx[k], sent[k]); end
        end
      nt = t + 1;
      checks++;
      if (n_start != nt) begin failures++; $display("FAIL start pulses %0d expected %0d", n_start, nt); end
    end
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
