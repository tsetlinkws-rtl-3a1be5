// config_regs: run-time configuration written over SPI.
//
// The paper names a configuration register block without listing its
// contents; the registers here are the knobs this design exposes
// (target TGT_CFG, word address):
//   0  control: bit 0 = feature extraction enable, bit 1 = start an
//      inference automatically after every stored frame      (reset 0)
//   1  SF binarisation threshold                             (reset 1024)
//   2  frames that must be stored before the first inference (reset 64)
//   3  any write: request one inference on the stored features
module config_regs
  import tkws_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [7:0]  wr_tgt,
  input  logic [15:0] wr_addr,
  input  logic [23:0] wr_data,
  output logic        fe_enable,
  output logic        auto_infer,
  output logic [15:0] sf_thr,
  output logic [6:0]  min_frames,
  output logic        infer_req
);
  logic sel;
  assign sel = wr_en && (wr_tgt == TGT_CFG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fe_enable  <= 1'b0;
      auto_infer <= 1'b0;
      sf_thr     <= 16'd1024;
      min_frames <= 7'(NFRAMES);
      infer_req  <= 1'b0;
    end else begin
      infer_req <= 1'b0;
      if (sel) begin
        unique case (wr_addr)
          16'd0: {auto_infer, fe_enable} <= wr_data[1:0];
          16'd1: sf_thr     <= wr_data[15:0];
          16'd2: min_frames <= wr_data[6:0];
          16'd3: infer_req  <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
