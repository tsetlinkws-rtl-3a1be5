// tb_summation: random clause outputs (Pand vectors, half of them all-zero)
// and signed weights; the class sum must add exactly the weights of the
// clauses with at least one firing window (the OR over windows), and clear
// must restart it.
module tb_summation;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, fired;
  logic [NWIN-1:0] pand = 0;
  logic signed [WGT_W-1:0] weight = 0;
  logic signed [SUM_W-1:0] sum;
  always #5 clk = ~clk;
  summation dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int e;
      e = 0;
      clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < 120; j++) begin
        logic [NWIN-1:0] p;
        p = ($urandom_range(0, 1) == 1) ? '0 : (NWIN'(1) << $urandom_range(0, NWIN - 1));
        valid = 1; pand = p; weight = WGT_W'(int'($urandom_range(0, 255)) - 128);
        if (p != 0) e += int'(weight);
        #1;
        checks++;
        if (fired != (p != 0)) begin failures++; $display("FAIL fired"); end
        @(negedge clk);
      end
      valid = 0;
      checks++;
      if (int'(sum) != e) begin failures++; $display("FAIL class %0d sum %0d exp %0d", n, sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
