// tb_argmax: 500 random sequences of 12 class sums (with many ties); the
// winner must be the first index holding the largest sum.
module tb_argmax;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid = 0, first = 0;
  logic [3:0] idx = 0, best_idx;
  logic signed [15:0] sum = 0, best_sum;
  always #5 clk = ~clk;
  argmax dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int bi, bs, s;
      bi = 0; bs = 0;
      for (int c = 0; c < 12; c++) begin
        s = (n % 2) ? int'($urandom_range(0, 8)) - 4 : int'($urandom_range(0, 65535)) - 32768;
        if (c == 0 || s > bs) begin bi = c; bs = s; end
        valid = 1; first = (c == 0); idx = 4'(c); sum = 16'(s);
        @(negedge clk);
      end
      valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      checks++;
      if (int'(best_idx) != bi || int'(best_sum) != bs) begin
        failures++; $display("FAIL seq %0d got %0d/%0d exp %0d/%0d", n, best_idx, best_sum, bi, bs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
