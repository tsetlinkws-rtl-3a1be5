// summation: clause evaluation and class confidence accumulation.
//
// Clause results arrive serially, one per clock with `valid`: the OR of the
// clause's 58 window results (a clause fires if any window matches) gates
// the clause's signed weight into the class-sum accumulator, as drawn in
// the paper (OR gate, adder, register). `clear` zeroes the sum at the start
// of a class. Weight and sum widths (8 and 16 bits, signed, wrapping) are
// this design's choice; 120 weights of at most 127 fit in 16 bits.
module summation
  import tkws_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic [NWIN-1:0]         pand,
  input  logic signed [WGT_W-1:0] weight,
  output logic signed [SUM_W-1:0] sum,
  output logic                    fired
);
  assign fired = |pand;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                sum <= '0;
    else if (clear)            sum <= '0;
    else if (valid && fired)   sum <= sum + SUM_W'(weight);
  end
endmodule
