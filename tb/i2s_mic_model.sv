// i2s_mic_model: behavioural model of an I2S digital microphone (left channel).
//
// Not synthesizable logic of the chip: it stands in for the external
// microphone in testbenches. After each falling LRCLK edge it shifts out
// `word` (24 bits, MSB first) in bit-clock slots 1..24, changing SDATA on
// the falling BCLK edge; all other slots carry 0. `frame_tick` toggles each
// time a new word is taken, so the testbench can present the next sample.
module i2s_mic_model (
  input  logic        bclk,
  input  logic        lrclk,
  input  logic [23:0] word,
  output logic        sdata,
  output logic        frame_tick
);
  int          slot = 0;
  logic        lr_prev = 1'b1;
  logic [23:0] cur = '0;

  initial begin
    sdata      = 1'b0;
    frame_tick = 1'b0;
  end

  always @(negedge bclk) begin
    if (!lrclk && lr_prev) begin
      slot       = 0;
      cur        = word;
      frame_tick = ~frame_tick;
    end else begin
      slot = slot + 1;
    end
    lr_prev = lrclk;
    sdata  <= (!lrclk && slot >= 1 && slot <= 24) ? cur[24 - slot] : 1'b0;
  end
endmodule
