// pre_emphasis: first-order pre-emphasis filter on the 12-bit audio stream.
//
// y[n] = x[n] - x[n-1] + (x[n-1] >>> 4), i.e. x[n] - 0.9375*x[n-1], built as in
// the paper's figure from one register, a shift by 4, a subtractor and an
// adder, so no multiplier is needed. One sample per rising edge of `clk`
// (the 16 kHz frame clock). The output is registered (one-sample latency)
// and saturated to 12 bits; saturation and the arithmetic shift are this
// design's choices. `y_valid` rises after the first sample and stays high.
module pre_emphasis
  import tkws_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic signed [SAMPLE_W-1:0] x,
  output logic signed [SAMPLE_W-1:0] y,
  output logic                       y_valid
);
  localparam logic signed [SAMPLE_W+1:0] YMAX = (1 <<< (SAMPLE_W-1)) - 1;
  localparam logic signed [SAMPLE_W+1:0] YMIN = -(1 <<< (SAMPLE_W-1));

  logic signed [SAMPLE_W-1:0] x_d;
  logic signed [SAMPLE_W+1:0] acc;

  always_comb begin
    acc = (SAMPLE_W+2)'(x) - (SAMPLE_W+2)'(x_d) + (SAMPLE_W+2)'(x_d >>> 4);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_d     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      x_d     <= x;
      y_valid <= 1'b1;
      if (acc > YMAX)      y <= YMAX[SAMPLE_W-1:0];
      else if (acc < YMIN) y <= YMIN[SAMPLE_W-1:0];
      else                 y <= acc[SAMPLE_W-1:0];
    end
  end
endmodule
