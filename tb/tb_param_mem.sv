// tb_param_mem: writes random words to random addresses of the 152-word
// parameter store (and to addresses past its end, which must be ignored),
// then compares every word with a shadow copy; also checks reset clears it.
module tb_param_mem;
  import sw_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] addr;
  word_t wdata;
  word_t mem [NPARAM];
  word_t shadow [NPARAM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  param_mem dut (.*);

  task automatic compare(string when);
    for (int i = 0; i < NPARAM; i++) begin
      checks++;
      if (mem[i] !== shadow[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s word %0d: %h expected %h", when, i, mem[i], shadow[i]);
      end
    end
  endtask

  initial begin
    addr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NPARAM; i++) shadow[i] = '0;
    @(posedge clk); #1;
    compare("after reset");
    for (int n = 0; n < 1500; n++) begin
      addr  = 8'($urandom % 256);
      wdata = word_t'($urandom);
      we    = 1;
      if (addr < NPARAM) shadow[addr] = wdata;
      @(posedge clk); #1;
      we = 0;
      if (n % 100 == 0) compare("during writes");
    end
    compare("after writes");
    rst_n = 0;
    @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < NPARAM; i++) shadow[i] = '0;
    compare("after second reset");
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
