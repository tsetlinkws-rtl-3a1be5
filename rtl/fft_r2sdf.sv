// fft_r2sdf: 256-point radix-2 single-path delay feedback FFT.
//
// Eight fft_sdf_stage instances with delays 128, 64, ..., 1 form the paper's
// eight-stage R2SDF pipeline, with its stage-wise quantisation: integer bits
// [12,13,13,13,14,14,14,15] and fractional bits [1,1,1,1,1,0,0,0], so the
// output is 15 bits per component. The input is real (12-bit samples).
//
// Framing (this design's choice): a frame is 256 pushed samples, after which
// the module pushes 256 zeros by itself (in_ready is low meanwhile) so the
// whole spectrum drains without waiting for the next subframe. All stages
// share one push counter t, because the latency in front of each stage is a
// multiple of its period. The output word that leaves with push number P of
// a frame (P = 255..510) is bin bitrev8(P-255); `out_valid` marks those 256
// pushes and `out_bin` gives the bin. The first-half samples may arrive at
// any pace (in_valid), the flush runs one push per clock.
module fft_r2sdf
  import tkws_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [SAMPLE_W-1:0] in_sample,
  output logic                       out_valid,
  output logic [7:0]                 out_bin,
  output logic signed [14:0]         out_re,
  output logic signed [14:0]         out_im,
  output logic                       out_last
);
  localparam int IB [8] = '{12, 13, 13, 13, 14, 14, 14, 15};
  localparam int FB [8] = '{ 1,  1,  1,  1,  1,  0,  0,  0};

  function automatic int wof(input int unsigned s);  return IB[s] + FB[s]; endfunction
  function automatic int wif(input int unsigned s);  return (s == 0) ? SAMPLE_W : wof(s-1); endfunction
  function automatic int fif(input int unsigned s);  return (s == 0) ? 0 : FB[s-1]; endfunction

  logic [8:0] p;          // push number within the frame, 0..511
  logic       push;

  assign in_ready = !p[8];
  assign push     = p[8] | in_valid;

  logic signed [SAMPLE_W-1:0] x0;
  assign x0 = p[8] ? '0 : in_sample;

  for (genvar s = 0; s < 8; s++) begin : g_st
    localparam int unsigned WI_ = unsigned'(wif(s));
    localparam int unsigned WO_ = unsigned'(wof(s));
    logic signed [WI_-1:0] i_re, i_im;
    logic signed [WO_-1:0] o_re, o_im;
    if (s == 0) begin : g_in0
      assign i_re = WI_'(x0);
      assign i_im = '0;
    end else begin : g_inn
      assign i_re = WI_'(g_st[s-1].o_re);
      assign i_im = WI_'(g_st[s-1].o_im);
    end
    fft_sdf_stage #(
      .D(128 >> s), .STAGE(s), .WI(WI_), .FI(unsigned'(fif(s))),
      .WO(WO_), .FO(unsigned'(FB[s])), .TWID(s < 7)
    ) u_stage (
      .clk, .rst_n, .en(push), .t(p[7:0]),
      .in_re(i_re), .in_im(i_im), .out_re(o_re), .out_im(o_im)
    );
  end

  assign out_re    = g_st[7].o_re;
  assign out_im    = g_st[7].o_im;
  assign out_valid = push && (p >= 9'd255) && (p <= 9'd510);
  assign out_bin   = bitrev8(8'(p - 9'd255));
  assign out_last  = push && (p == 9'd510);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p <= '0;
    else if (push) p <= p + 9'd1;
  end
endmodule
