// i2s_master: clock generator and receiver for an I2S digital microphone.
//
// Runs on the 8.192 MHz audio master clock. A 9-bit counter divides it by 8
// for the 1.024 MHz bit clock (BCLK) and by 512 for the 16 kHz frame clock
// (LRCLK), so each frame has 64 bit-clock slots, 32 per channel. The divide
// ratios are the paper's; the rest is this design's choice: the left channel
// (LRCLK low) is used, data follows the standard I2S one-slot delay after the
// LRCLK edge, MSB first, and the 12 most significant bits of the word (slots
// 1..12) form the sample. SDATA is sampled in the middle of BCLK high (the
// microphone changes it on the falling edge). `sample` is updated once per
// frame, in the middle of the left half, so it is stable at the next rising
// LRCLK edge, which the pre-emphasis stage uses as its clock.
module i2s_master
  import tkws_pkg::*;
(
  input  logic                       mclk,
  input  logic                       rst_n,
  input  logic                       sdata,       // ADC_SDATA pad
  output logic                       bclk,        // 1.024 MHz
  output logic                       lrclk,       // 16 kHz
  output logic signed [SAMPLE_W-1:0] sample,      // latest left-channel sample
  output logic                       sample_valid // one-mclk pulse when updated
);
  logic [8:0]          cnt;
  logic [SAMPLE_W-1:0] shreg;
  logic [4:0]          slot;

  assign bclk  = cnt[2];
  assign lrclk = cnt[8];
  assign slot  = cnt[7:3];

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      shreg        <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      cnt          <= cnt + 9'd1;
      sample_valid <= 1'b0;
      if (!cnt[8] && cnt[2:0] == 3'd5 && slot >= 5'd1 && slot <= 5'(SAMPLE_W)) begin
        shreg <= {shreg[SAMPLE_W-2:0], sdata};
        if (slot == 5'(SAMPLE_W)) begin
          sample       <= {shreg[SAMPLE_W-2:0], sdata};
          sample_valid <= 1'b1;
        end
      end
    end
  end
endmodule
