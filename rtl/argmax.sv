// argmax: keeps the class with the highest confidence.
//
// Class sums arrive one at a time (valid, idx, sum). The first class of an
// inference (`first`) is taken as it is; a later class replaces the best one
// only if its sum is strictly greater, so ties go to the lower class index
// (this design's choice). best_idx is the 4-bit result of the chip.
module argmax
  import tkws_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic [3:0]              idx,
  input  logic signed [SUM_W-1:0] sum,
  output logic [3:0]              best_idx,
  output logic signed [SUM_W-1:0] best_sum
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_idx <= '0;
      best_sum <= '0;
    end else if (valid && (first || sum > best_sum)) begin
      best_idx <= idx;
      best_sum <= sum;
    end
  end
endmodule
