// pe_array: the 58x5 array of AND-gate processing elements.
//
// Column u serves decoder unit u, row w sliding window w. Each PE holds one
// partial-AND (Pand) register per clause of its unit's four merged matrices
// (2 clauses each), so the array has 58 x 5 x 8 = 2320 Pand registers, the
// paper's count. `clear` sets them all to 1 at the start of a batch (the
// constant-1 input of the PE's multiplexer). For a valid TA of column u the
// decoder's code and clause bit select the register, which is ANDed with the
// window's literal bit (S4). After the batch, Pand of clause j over all
// windows is read out at rd_sel = j, j = 8u + 2*code + clause.
module pe_array
  import tkws_pkg::*;
(
  input  logic            clk,
  input  logic            clear,
  input  ta_t             ta  [NUNITS],
  input  logic [NWIN-1:0] lit [NUNITS],
  input  logic [5:0]      rd_sel,
  output logic [NWIN-1:0] rd_pand
);
  logic [NWIN-1:0] pand [NCLB];

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int j = 0; j < int'(NCLB); j++) pand[j] <= '1;
    end else begin
      for (int u = 0; u < int'(NUNITS); u++)
        if (ta[u].valid)
          pand[8*u + 2*int'(ta[u].code) + int'(ta[u].clause)] <=
            pand[8*u + 2*int'(ta[u].code) + int'(ta[u].clause)] & lit[u];
    end
  end

  assign rd_pand = (int'(rd_sel) < int'(NCLB)) ? pand[rd_sel] : '0;
endmodule
