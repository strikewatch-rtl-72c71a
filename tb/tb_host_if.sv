// tb_host_if: feeds byte streams to the command decoder as spi_slave would
// deliver them (start pulse, then rx_valid per byte) and checks the three
// commands: parameter writes (address auto-increment, 16-bit words MSB
// first, also in transactions longer than 255 bytes), raw-sample pushes (several samples in one command, 16-bit signed
// MSB first), status reads (tx_byte = status[k-1] after k received bytes,
// 0 past the end), and that an unknown command does nothing.
module tb_host_if;
  import sw_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, rx_valid = 0;
  logic [7:0] rx_byte = 0, tx_byte;
  logic [7:0] status [7];
  logic prm_we, sample_valid;
  logic [7:0] prm_addr;
  word_t prm_wdata;
  word_t sample [IN_CH];
  int checks = 0, failures = 0;

  typedef struct { int addr; int data; } wr_t;
  wr_t writes [$];
  word_t samples [$][IN_CH];

  always #5 clk = ~clk;

  host_if #(.NSTATUS(7)) dut (.*);

  always @(posedge clk) begin
    if (prm_we) writes.push_back('{int'(prm_addr), int'(prm_wdata)});
    if (sample_valid) samples.push_back(sample);
  end

  task automatic begin_txn();
    start = 1; @(posedge clk); #1; start = 0;
    repeat (2) @(posedge clk); #1;
  endtask

  task automatic send(input logic [7:0] b);
    rx_byte = b; rx_valid = 1; @(posedge clk); #1; rx_valid = 0;
    repeat (3) @(posedge clk); #1;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int base, nw;
    word_t wv [150];
    word_t sv [5][IN_CH];
    for (int i = 0; i < 7; i++) status[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk); #1;
    for (int rep = 0; rep < 10; rep++) begin
      // parameter write
      // every third write is longer than 255 bytes
      base = (rep % 3 == 0) ? 0 : $urandom % 100;
      nw = (rep % 3 == 0) ? 150 : 1 + $urandom % 20;
      writes.delete();
      begin_txn();
      send(8'h01);
      send(8'(base));
      for (int i = 0; i < nw; i++) begin
        wv[i] = word_t'($urandom);
        send(wv[i][15:8]);
        send(wv[i][7:0]);
      end
      chk(writes.size() == nw, $sformatf("%0d writes expected %0d", writes.size(), nw));
      for (int i = 0; i < writes.size() && i < nw; i++)
        chk(writes[i].addr == base + i && writes[i].data == int'(wv[i]),
            $sformatf("write %0d: addr %0d data %h", i, writes[i].addr, writes[i].data));
      // sample push
      samples.delete();
      begin_txn();
      send(8'h02);
      for (int s = 0; s < 1 + rep % 5; s++)
        for (int a = 0; a < IN_CH; a++) begin
          sv[s][a] = word_t'($urandom);
          send(sv[s][a][15:8]);
          send(sv[s][a][7:0]);
        end
      chk(samples.size() == 1 + rep % 5, $sformatf("%0d samples", samples.size()));
      for (int s = 0; s < samples.size() && s < 1 + rep % 5; s++)
        for (int a = 0; a < IN_CH; a++)
          chk(samples[s][a] == sv[s][a], $sformatf("sample %0d axis %0d", s, a));
      // status read
      begin_txn();
      send(8'h03);
      for (int k = 1; k <= 9; k++) begin
        chk(tx_byte == ((k <= 7) ? status[k-1] : 8'h00), $sformatf("status byte %0d: %h", k, tx_byte));
        send(8'h00);
      end
      // unknown command: no writes, no samples, tx 0
      writes.delete(); samples.delete();
      begin_txn();
      send(8'h7e);
      for (int k = 0; k < 8; k++) begin
        chk(tx_byte == 8'h00, "tx 0 for unknown command");
        send(8'($urandom));
      end
      chk(writes.size() == 0 && samples.size() == 0, "unknown command ignored");
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
