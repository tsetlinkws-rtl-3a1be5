// tsetlinkws_top: the whole keyword-spotting chip.
//
// Three parts, as in the paper: the SPI slave with the configuration
// registers (chip set-up and model loading), the MFSC-SF feature extractor
// (I2S microphone in, binary 64x64 feature map out) and the convolutional
// Tsetlin machine accelerator (feature map in, 4-bit keyword class out with
// an Inf_Done pulse). Clocks: `mclk` is the 8.192 MHz audio master clock,
// `clk` the 400 kHz system clock; the I2S bit and frame clocks are derived
// from mclk. One active-low asynchronous reset serves all domains. IO pads
// are not modelled; their signals are the ports.
// Lint tools may report rst_n as used both asynchronously and
// synchronously: the synchronous use is only the `disable iff` of the
// blocks' assertions, which is not logic, so the warning stands.
module tsetlinkws_top
  import tkws_pkg::*;
(
  input  logic       mclk,
  input  logic       clk,
  input  logic       rst_n,
  // I2S microphone
  output logic       bclk,
  output logic       lrclk,
  input  logic       adc_sdata,
  // SPI configuration
  input  logic       sck,
  input  logic       cs_n,
  input  logic       mosi,
  // result
  output logic       inf_done,
  output logic [3:0] result
);
  logic        wr_en;
  logic [7:0]  wr_tgt;
  logic [15:0] wr_addr;
  logic [23:0] wr_data;
  logic        fe_enable, auto_infer, infer_req;
  logic [15:0] sf_thr;
  logic [6:0]  min_frames, n_frames;

  spi_slave u_spi (
    .clk, .rst_n, .sck, .cs_n, .mosi, .wr_en, .wr_tgt, .wr_addr, .wr_data
  );

  config_regs u_cfg (
    .clk, .rst_n, .wr_en, .wr_tgt, .wr_addr, .wr_data,
    .fe_enable, .auto_infer, .sf_thr, .min_frames, .infer_req
  );

  logic               fb_we, fb_half, infer_start, infer_skip, fifo_overflow, acc_busy;
  logic [4:0]         fb_addr;
  logic [NFRAMES-1:0] fb_wdata;
  logic [15:0]        last_cycles;

  feature_extractor u_fe (
    .mclk, .clk, .rst_n, .adc_sdata, .bclk, .lrclk,
    .fe_enable, .auto_infer, .sf_thr, .min_frames, .infer_req,
    .acc_busy, .fb_we, .fb_addr, .fb_half, .fb_wdata,
    .infer_start, .infer_skip, .fifo_overflow, .n_frames
  );

  ctm_accelerator u_ctm (
    .clk, .rst_n,
    .mw_en(wr_en), .mw_tgt(wr_tgt), .mw_addr(wr_addr), .mw_data(wr_data),
    .fb_we, .fb_addr, .fb_half, .fb_wdata,
    .start(infer_start), .busy(acc_busy), .inf_done, .result, .last_cycles
  );

  logic unused;
  assign unused = ^{infer_skip, fifo_overflow, n_frames, last_cycles};
endmodule
