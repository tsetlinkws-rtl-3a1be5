// tb_overlap_unit: random current/previous Mel frames; checks MFSC = sat(cur+prev),
// SF = cur-prev, coefficient order, and one output every second clock.
module tb_overlap_unit;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, out_valid, out_last, busy;
  logic [4:0] rd_idx, out_coef;
  logic [15:0] rd_cur, rd_prev, out_mfsc;
  logic signed [16:0] out_sf;
  always #5 clk = ~clk;
  overlap_unit dut (.*);

  int cur [32], prev [32];
  assign rd_cur  = 16'(cur[rd_idx]);
  assign rd_prev = 16'(prev[rd_idx]);

  int nout, last_t, t;
  always @(posedge clk) t++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      int s;
      s = cur[nout] + prev[nout];
      if (s > 65535) s = 65535;
      checks++;
      if (int'(out_coef) != nout || int'(out_mfsc) != s || int'(out_sf) != cur[nout] - prev[nout]
          || out_last != (nout == 31) || (nout > 0 && t - last_t != 2)) begin
        failures++;
        $display("FAIL coef %0d mfsc %0d exp %0d sf %0d", out_coef, out_mfsc, s, out_sf);
      end
      last_t = t;
      nout++;
    end
  end

  initial begin
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int k = 0; k < 32; k++) begin
        cur[k]  = int'($urandom_range(0, 65535));
        prev[k] = int'($urandom_range(0, 65535));
      end
      nout = 0;
      start = 1; @(negedge clk); start = 0;
      repeat (80) @(negedge clk);
      checks++;
      if (nout != 32 || busy) begin failures++; $display("FAIL frame gave %0d", nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
