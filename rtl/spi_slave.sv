// spi_slave: SPI target (mode 0: CPOL = 0, CPHA = 0, MSB first) clocked by the
// system clock.
//
// sclk, cs_n and mosi pass through two-flop synchronizers; edges of the
// synchronized sclk drive the shifters. On each rising edge one mosi bit is
// shifted in, and after eight bits rx_byte/rx_valid present the byte for one
// clock. On each falling edge the next miso bit is shifted out; the first
// falling edge after a completed byte loads tx_byte (which the consumer may
// change in reaction to rx_valid), so byte k+1 of the response is chosen
// after byte k of the request has been seen. While cs_n is high, miso is 0
// and the bit counter is cleared; start pulses when cs_n falls.
//
// Timing: sclk must be at most clk/8 so both sclk phases are seen by the
// synchronizers with time for the consumer to answer. The paper uses SPI for
// the model I/O between the MCU and the FPGA; mode, bit order and framing are
// this design's own.
module spi_slave (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       sel,
  output logic       start,
  output logic       rx_valid,
  output logic [7:0] rx_byte,
  input  logic [7:0] tx_byte
);
  logic [2:0] sclk_q, cs_q;
  logic [1:0] mosi_q;
  logic       rise, fall;
  logic [2:0] bitcnt;
  logic [7:0] rx_sh, tx_sh;
  logic       byte_done;   // a byte completed; load tx_byte on the next falling edge

  assign rise  = sclk_q[1] && !sclk_q[2];
  assign fall  = !sclk_q[1] && sclk_q[2];
  assign sel   = !cs_q[1];
  assign miso  = sel ? tx_sh[7] : 1'b0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sclk_q    <= '0;
      cs_q      <= '1;
      mosi_q    <= '0;
      bitcnt    <= '0;
      rx_sh     <= '0;
      tx_sh     <= '0;
      rx_byte   <= '0;
      rx_valid  <= 1'b0;
      start     <= 1'b0;
      byte_done <= 1'b0;
    end else begin
      sclk_q   <= {sclk_q[1:0], sclk};
      cs_q     <= {cs_q[1:0], cs_n};
      mosi_q   <= {mosi_q[0], mosi};
      rx_valid <= 1'b0;
      start    <= cs_q[2] && !cs_q[1];
      if (!sel) begin
        bitcnt    <= '0;
        tx_sh     <= '0;
        byte_done <= 1'b0;
      end else begin
        if (rise) begin
          rx_sh  <= {rx_sh[6:0], mosi_q[1]};
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 3'd7) begin
            rx_byte   <= {rx_sh[6:0], mosi_q[1]};
            rx_valid  <= 1'b1;
            byte_done <= 1'b1;
          end
        end
        if (fall) begin
          if (byte_done) begin
            tx_sh     <= tx_byte;
            byte_done <= 1'b0;
          end else begin
            tx_sh     <= {tx_sh[6:0], 1'b0};
          end
        end
      end
    end
  end

endmodule
