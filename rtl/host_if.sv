// host_if: command decoder between the SPI byte stream from the MCU and the
// classifier.
//
// A transaction starts when chip select falls; its first byte is the command:
//   0x01 WRITE_PARAM  addr, then 16-bit words MSB first; addr increments per
//                     word. Loads the parameter store.
//   0x02 PUSH_SAMPLE  6 bytes per sample: a_x, a_y, a_z as signed 16-bit MSB
//                     first; several samples may follow one command. Each
//                     completed sample pulses sample_valid.
//   0x03 READ_STATUS  the target returns status[0], status[1], ... on the
//                     bytes that follow the command (7 bytes defined by the
//                     top level; later bytes read 0).
// Other commands are ignored until the next chip select.
// tx_byte is combinational from the byte index and is sampled by spi_slave on
// the falling sclk edge after each received byte.
//
// The paper only states that SPI carries the model I/O; this command set is
// this design's own.
module host_if
  import sw_pkg::*;
#(
  parameter int unsigned NSTATUS = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       rx_valid,
  input  logic [7:0] rx_byte,
  output logic [7:0] tx_byte,
  input  logic [7:0] status [NSTATUS],
  output logic       prm_we,
  output logic [7:0] prm_addr,
  output word_t      prm_wdata,
  output logic       sample_valid,
  output word_t      sample [IN_CH]
);
  typedef enum logic [7:0] {
    CMD_NONE        = 8'h00,
    CMD_WRITE_PARAM = 8'h01,
    CMD_PUSH_SAMPLE = 8'h02,
    CMD_READ_STATUS = 8'h03
  } cmd_e;

  localparam int unsigned SW = $clog2(NSTATUS > 1 ? NSTATUS : 2);

  cmd_e        cmd;
  logic [7:0]  idx;        // bytes received in this transaction (saturates at 255)
  logic [7:0]  hi_byte;
  logic [2:0]  sbyte;      // byte position inside a 6-byte sample or 2-byte word
  word_t       sreg [IN_CH];
  logic        addr_set;

  always_comb begin
    tx_byte = 8'h00;
    if (cmd == CMD_READ_STATUS && idx >= 8'd1 && 32'(idx) <= NSTATUS)
      tx_byte = status[SW'(idx - 8'd1)];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd          <= CMD_NONE;
      idx          <= '0;
      hi_byte      <= '0;
      sbyte        <= '0;
      sreg         <= '{default: '0};
      sample       <= '{default: '0};
      addr_set     <= 1'b0;
      prm_we       <= 1'b0;
      prm_addr     <= '0;
      prm_wdata    <= '0;
      sample_valid <= 1'b0;
    end else begin
      // the write strobe is one clock wide; the address advances after it
      if (prm_we) prm_addr <= prm_addr + 1'b1;
      prm_we       <= 1'b0;
      sample_valid <= 1'b0;
      if (start) begin
        cmd      <= CMD_NONE;
        idx      <= '0;
        sbyte    <= '0;
        addr_set <= 1'b0;
      end else if (rx_valid) begin
        if (idx != 8'hff) idx <= idx + 1'b1;
        if (idx == 0) begin
          case (rx_byte)
            CMD_WRITE_PARAM: cmd <= CMD_WRITE_PARAM;
            CMD_PUSH_SAMPLE: cmd <= CMD_PUSH_SAMPLE;
            CMD_READ_STATUS: cmd <= CMD_READ_STATUS;
            default:         cmd <= CMD_NONE;
          endcase
        end else begin
          case (cmd)
            CMD_WRITE_PARAM: begin
              if (!addr_set) begin
                prm_addr <= rx_byte;
                addr_set <= 1'b1;
              end else if (sbyte[0] == 1'b0) begin
                hi_byte  <= rx_byte;                 // first byte of a word: MSB
                sbyte[0] <= 1'b1;
              end else begin
                prm_wdata <= {hi_byte, rx_byte};     // second byte: LSB
                prm_we    <= 1'b1;
                sbyte[0]  <= 1'b0;
              end
            end
            CMD_PUSH_SAMPLE: begin
              if (sbyte[0] == 1'b0) hi_byte <= rx_byte;
              else                  sreg[sbyte[2:1]] <= {hi_byte, rx_byte};
              if (sbyte == 3'd5) begin
                sbyte        <= '0;
                sample       <= '{sreg[0], sreg[1], {hi_byte, rx_byte}};
                sample_valid <= 1'b1;
              end else begin
                sbyte <= sbyte + 1'b1;
              end
            end
            default: ;
          endcase
        end
      end
    end
  end

endmodule
