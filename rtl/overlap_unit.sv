// overlap_unit: turns two adjacent Mel frames into MFSC and spectral flux.
//
// The paper defers the 50% frame overlap until after the Mel filters: the
// MFSC of frame n is the sum of the Mel outputs of subframes n and n+1, and
// the spectral flux (SF) is their difference, computed with one adder and
// one subtractor. On `start` the unit walks the 32 coefficients, reading the
// newest (cur) and previous (prev) Mel outputs through rd_idx, and presents
// one coefficient every second clock on out_valid/out_coef, matching the
// two-clock threshold update of the binarizer (pacing is this design's
// choice). MFSC saturates to 16 bits; SF is kept as a 17-bit signed value so
// the binarizer's |SF| is exact (the paper draws 16 bits).
module overlap_unit
  import tkws_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic [4:0]               rd_idx,
  input  logic [MEL_W-1:0]         rd_cur,
  input  logic [MEL_W-1:0]         rd_prev,
  output logic                     out_valid,
  output logic [4:0]               out_coef,
  output logic [MEL_W-1:0]         out_mfsc,
  output logic signed [MEL_W:0]    out_sf,
  output logic                     out_last,
  output logic                     busy
);
  logic [5:0]     step;   // 2 clocks per coefficient
  logic [MEL_W:0] s;

  assign rd_idx = step[5:1];
  assign s      = (MEL_W+1)'(rd_cur) + (MEL_W+1)'(rd_prev);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; step <= '0; out_valid <= 1'b0; out_coef <= '0;
      out_mfsc <= '0; out_sf <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        if (!step[0]) begin
          out_valid <= 1'b1;
          out_coef  <= step[5:1];
          out_mfsc  <= s[MEL_W] ? {MEL_W{1'b1}} : s[MEL_W-1:0];
          out_sf    <= $signed({1'b0, rd_cur}) - $signed({1'b0, rd_prev});
          out_last  <= (step[5:1] == 5'(NMEL-1));
        end
        step <= step + 6'd1;
        if (step == 6'(2*NMEL-1)) busy <= 1'b0;
      end
    end
  end
endmodule
