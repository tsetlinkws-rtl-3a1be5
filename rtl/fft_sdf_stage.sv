// fft_sdf_stage: one radix-2 decimation-in-frequency SDF stage.
//
// A stage with delay D holds D complex words in a feedback shift register.
// While the stage counter is in the first half of its 2D period (phase=0)
// the input is stored and the register's oldest word (a difference left over
// from the previous half) leaves the stage multiplied by twiddle W^(n*2^STAGE),
// n = position in the half. In the second half (phase=1) the butterfly adds
// the stored word and the input, sends the sum out (twiddle 1) and stores
// their difference. Input format: WI bits with FI fractional bits; output
// format: WO bits with FO fractional bits. Products are rounded (half up) to FO
// fractional bits and saturated to WO bits, which is how this design reads the
// paper's stage-wise integer/fractional widths. The stage is combinational
// from input to output; `en` shifts the register. Twiddles are Q2.10.
module fft_sdf_stage
  import tkws_pkg::*;
#(
  parameter int unsigned D     = 128,
  parameter int unsigned STAGE = 0,
  parameter int unsigned WI    = 12,
  parameter int unsigned FI    = 0,
  parameter int unsigned WO    = 13,
  parameter int unsigned FO    = 1,
  parameter bit          TWID  = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [7:0]           t,        // global sample counter (mod 256)
  input  logic signed [WI-1:0] in_re,
  input  logic signed [WI-1:0] in_im,
  output logic signed [WO-1:0] out_re,
  output logic signed [WO-1:0] out_im
);
  localparam int unsigned BW    = WI + 1;                    // butterfly width
  localparam int unsigned PFRAC = FI + (TWID ? TW_F : 0);    // product fraction bits
  localparam int unsigned PW    = BW + TW_W + 1;             // product width
  localparam int unsigned SH    = PFRAC - FO;
  localparam int unsigned LD    = (D > 1) ? $clog2(D) : 1;

  logic signed [BW-1:0] buf_re [D];
  logic signed [BW-1:0] buf_im [D];
  logic signed [BW-1:0] head_re, head_im, v_re, v_im, push_re, push_im;
  logic                 phase;
  logic [6:0]           tw_idx;
  logic signed [TW_W-1:0] w_re, w_im;
  logic signed [PW-1:0] p_re, p_im, q_re, q_im;

  // twiddle bank of this stage, values fixed at elaboration
  logic signed [TW_W-1:0] rom_re [128];
  logic signed [TW_W-1:0] rom_im [128];
  for (genvar k = 0; k < 128; k++) begin : g_rom
    assign rom_re[k] = TW_W'( tw_cos(k));
    assign rom_im[k] = TW_W'(-tw_sin(k));
  end

  assign phase   = (D == 128) ? t[7] : ((t & 8'(D)) != 8'd0);
  assign head_re = buf_re[D-1];
  assign head_im = buf_im[D-1];
  assign tw_idx  = 7'(((t & 8'(D-1)) << STAGE) & 8'h7f);

  always_comb begin
    if (phase) begin
      v_re    = head_re + BW'(in_re);
      v_im    = head_im + BW'(in_im);
      push_re = head_re - BW'(in_re);
      push_im = head_im - BW'(in_im);
      w_re    = TW_W'(1 << TW_F);
      w_im    = '0;
    end else begin
      v_re    = head_re;
      v_im    = head_im;
      push_re = BW'(in_re);
      push_im = BW'(in_im);
      w_re    = rom_re[tw_idx];
      w_im    = rom_im[tw_idx];
    end
    if (TWID) begin
      p_re = PW'(v_re) * PW'(w_re) - PW'(v_im) * PW'(w_im);
      p_im = PW'(v_re) * PW'(w_im) + PW'(v_im) * PW'(w_re);
    end else begin
      p_re = PW'(v_re);
      p_im = PW'(v_im);
    end
    if (SH > 0) begin
      q_re = (p_re + PW'(64'sd1 <<< (SH - 1))) >>> SH;
      q_im = (p_im + PW'(64'sd1 <<< (SH - 1))) >>> SH;
    end else begin
      q_re = p_re;
      q_im = p_im;
    end
  end

  function automatic logic signed [WO-1:0] sat(input logic signed [PW-1:0] v);
    logic signed [PW-1:0] hi, lo;
    hi = PW'((64'sd1 <<< (WO-1)) - 1);
    lo = -PW'(64'sd1 <<< (WO-1));
    if (v > hi)      return hi[WO-1:0];
    else if (v < lo) return lo[WO-1:0];
    else             return v[WO-1:0];
  endfunction

  assign out_re = sat(q_re);
  assign out_im = sat(q_im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(D); i++) begin
        buf_re[i] <= '0;
        buf_im[i] <= '0;
      end
    end else if (en) begin
      buf_re[0] <= push_re;
      buf_im[0] <= push_im;
      for (int i = 1; i < int'(D); i++) begin
        buf_re[i] <= buf_re[i-1];
        buf_im[i] <= buf_im[i-1];
      end
    end
  end

  logic unused;
  assign unused = ^LD;
endmodule
