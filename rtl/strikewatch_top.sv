// strikewatch_top: FPGA side of the StrikeWatch wrist-worn gait classifier.
//
// The microcontroller reads the wrist IMU (100 Hz, triaxial) and forwards
// each raw sample over SPI. Inside the FPGA the samples fill a 50-sample
// sliding window; every 12.5 samples on average (stride ratio 0.25, i.e. 8
// windows per second) the window is downsampled by 2, quantized to 6 bits and
// classified by the 3-block depthwise-separable CNN as forefoot or heel
// strike. A feedback trigger raises the feedback pin when 5 consecutive
// windows say heel strike, for the LED or buzzer that tells the runner to
// change stride.
//
//   SPI -> spi_slave -> host_if -+-> param_mem ------------------+
//                                +-> window_sampler -> sepcnn_accel -> feedback_trigger
//   host_if READ_STATUS returns, in order:
//     0: {5'b0, overrun, result_valid, pred_class}
//     1..2: logit[0] (MSB first)   3..4: logit[1]
//     5: inferences completed (mod 256)   6: feedback events (mod 256)
//
// Timing: an inference takes 723 clocks (36 us at the 20 MHz used on the
// iCE40UP5K), far inside the 125 ms between windows; a window that arrives
// while an inference is still running is dropped and flagged as overrun.
// The split of windowing and feedback logic into the FPGA, the SPI command
// set and the status layout are this design's choices; the window, stride,
// downsampling, trigger threshold and network follow the paper.
module strikewatch_top
  import sw_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic spi_sclk,
  input  logic spi_cs_n,
  input  logic spi_mosi,
  output logic spi_miso,
  output logic feedback,
  output logic pred_valid,
  output logic pred_class
);
  localparam int unsigned NSTATUS = 7;

  logic       start, rx_valid, sel;
  logic [7:0] rx_byte, tx_byte;
  logic [7:0] status [NSTATUS];

  logic       prm_we;
  logic [7:0] prm_addr;
  word_t      prm_wdata;
  word_t      prm [NPARAM];

  logic       sample_valid;
  word_t      sample [IN_CH];
  act_t       win [SEQ_LEN][IN_CH];
  logic       win_valid;

  logic       busy, done, overrun, cls;
  word_t      logit [NCLASS];
  logic       result_valid;
  logic [7:0] n_infer, run_len, n_events;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .sel, .start, .rx_valid, .rx_byte, .tx_byte);

  host_if #(.NSTATUS(NSTATUS)) u_host (
    .clk, .rst_n, .start, .rx_valid, .rx_byte, .tx_byte, .status,
    .prm_we, .prm_addr, .prm_wdata, .sample_valid, .sample);

  param_mem u_prm (
    .clk, .rst_n, .we(prm_we), .addr(prm_addr), .wdata(prm_wdata), .mem(prm));

  window_sampler #(.W(2 * SEQ_LEN), .D(2), .STRIDE_NUM(1), .STRIDE_DEN(4)) u_win (
    .clk, .rst_n, .sample_valid, .sample,
    .inq_m(prm[PRM_INQ_M]), .inq_s(shift_t'(prm[PRM_INQ_S])), .win, .win_valid);

  sepcnn_accel u_cnn (
    .clk, .rst_n, .start(win_valid), .x_in(win), .prm, .busy, .done,
    .logit, .pred_class(cls), .overrun);

  feedback_trigger #(.N_CONSEC(5), .TARGET_CLASS(1'b1)) u_fb (
    .clk, .rst_n, .pred_valid(done), .pred_class(cls), .fire(feedback),
    .run_len, .events(n_events));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      result_valid <= 1'b0;
      n_infer      <= '0;
    end else if (done) begin
      result_valid <= 1'b1;
      n_infer      <= n_infer + 1'b1;
    end
  end

  assign pred_valid = done;
  assign pred_class = cls;

  always_comb begin
    status[0] = {5'b0, overrun, result_valid, cls};
    status[1] = logit[0][15:8];
    status[2] = logit[0][7:0];
    status[3] = logit[1][15:8];
    status[4] = logit[1][7:0];
    status[5] = n_infer;
    status[6] = n_events;
  end

endmodule
