// dense: fully connected layer, one multiply-accumulate per clock.
//
// acc[o] = b[o] + sum_i x[i] * w[o][i]. With REQUANT = 1 the output is the
// requantized QBITS-bit value (clamped at 0 when RELU = 1), sign-extended to
// 16 bits; with REQUANT = 0 it is the accumulator saturated to 16 bits,
// which is how the final layer delivers its class logits.
//
// Schedule: OUT*IN cycles after start (output, then input), done one cycle
// after the last write. The two dense layers (ReLU, then logits) are the
// paper's; the serial schedule and number formats are this design's own.
module dense
  import sw_pkg::*;
#(
  parameter int unsigned IN      = 6,
  parameter int unsigned OUT     = 3,
  parameter bit          RELU    = 1'b1,
  parameter bit          REQUANT = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  input  act_t   x [IN],
  input  wgt_t   w [OUT][IN],
  input  word_t  b [OUT],
  input  word_t  m,
  input  shift_t s,
  output word_t  y [OUT]
);
  logic [$clog2(OUT > 1 ? OUT : 2)-1:0] o;
  logic [$clog2(IN > 1 ? IN : 2)-1:0]  i;
  acc_t  acc, acc_next;
  word_t y_next;

  always_comb begin
    acc_t prod;
    prod     = acc_t'(x[i]) * acc_t'(w[o][i]);
    acc_next = ((i == 0) ? acc_t'(b[o]) : acc) + prod;
    if (REQUANT) y_next = word_t'(requant(acc_next, m, s, RELU));
    else         y_next = sat16(acc_next);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      o    <= '0;
      i    <= '0;
      acc  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          o    <= '0;
          i    <= '0;
        end
      end else begin
        acc <= acc_next;
        if (32'(i) == IN - 1) begin
          y[o] <= y_next;
          i <= '0;
          if (32'(o) == OUT - 1) begin
            o    <= '0;
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            o <= o + 1'b1;
          end
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end

endmodule
