// swap_unit: spectrum magnitude and bit-reversal reordering.
//
// Takes the FFT's output stream in bit-reversed bin order, forms the
// magnitude approximation |Re| + |Im| (the paper replaces the power spectrum
// by absolute values), saturates it to 15 bits (saturation is this design's
// choice) and writes bins 0..127 into the 128x15b swap memory at their bin
// address; bin 128..255 are dropped (the paper keeps 128 of the 129 real-FFT
// bins). Once all 128 bins of a frame are in, it reads them out in natural
// order, one per clock, on out_valid/out_bin/out_mag with out_last on bin 127.
// A new frame may start writing only after the read-out ends (it does: the
// FFT needs 255 pushes before its first output).
module swap_unit
  import tkws_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [7:0]         in_bin,
  input  logic signed [14:0] in_re,
  input  logic signed [14:0] in_im,
  output logic               out_valid,
  output logic [6:0]         out_bin,
  output logic [MAG_W-1:0]   out_mag,
  output logic               out_last
);
  logic [MAG_W-1:0] sram [NBINS];
  logic [15:0]      mag_full;
  logic [14:0]      a_re, a_im;
  logic [7:0]       wcnt;
  logic             reading;
  logic [6:0]       rptr;

  assign a_re     = in_re[14] ? 15'(-in_re) : 15'(in_re);
  assign a_im     = in_im[14] ? 15'(-in_im) : 15'(in_im);
  assign mag_full = 16'(a_re) + 16'(a_im);

  always_ff @(posedge clk) begin
    if (in_valid && !in_bin[7])
      sram[in_bin[6:0]] <= mag_full[15] ? {MAG_W{1'b1}} : mag_full[MAG_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt      <= '0;
      reading   <= 1'b0;
      rptr      <= '0;
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_mag   <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid && !in_bin[7]) wcnt <= wcnt + 8'd1;
      if (!reading && wcnt == 8'(NBINS)) begin
        reading <= 1'b1;
        rptr    <= '0;
        wcnt    <= '0;
      end
      if (reading) begin
        out_valid <= 1'b1;
        out_bin   <= rptr;
        out_mag   <= sram[rptr];
        out_last  <= (rptr == 7'(NBINS-1));
        rptr      <= rptr + 7'd1;
        if (rptr == 7'(NBINS-1)) reading <= 1'b0;
      end
    end
  end
endmodule
