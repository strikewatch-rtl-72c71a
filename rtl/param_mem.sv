// param_mem: register file holding every quantized model parameter and
// requantization constant of the classifier (NPARAM 16-bit words, layout in
// sw_pkg).
//
// One synchronous write port (we, addr, wdata), written by the host over
// SPI; all words are read in parallel by the layers, which lets each layer
// see its weights without arbitration. Writes to addresses at or beyond
// NPARAM are ignored. Reset clears every word.
//
// The published flow bakes trained values into the generated RTL as
// constants; a writable store is this design's substitute, since trained
// values are not part of the published description.
module param_mem
  import sw_pkg::*;
#(
  parameter int unsigned N = NPARAM
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  logic [7:0] addr,
  input  word_t      wdata,
  output word_t      mem [N]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem <= '{default: '0};
    end else if (we && (32'(addr) < N)) begin
      mem[addr] <= wdata;
    end
  end

endmodule
