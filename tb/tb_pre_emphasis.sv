// tb_pre_emphasis: random samples against y = x[n] - x[n-1] + (x[n-1]>>4),
// saturated to 12 bits, with one sample of latency.
module tb_pre_emphasis;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [11:0] x, y;
  logic y_valid;
  always #5 clk = ~clk;
  pre_emphasis dut (.clk, .rst_n, .x, .y, .y_valid);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xp, e, xv;
    x = 0; xp = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      xv = (n % 3 == 0) ? int'($urandom_range(0, 4095)) - 2048 : int'($urandom_range(0, 200)) - 100;
      x = 12'(xv);
      @(negedge clk);
      e = xv - xp + (xp >>> 4);
      if (e > 2047) e = 2047;
      if (e < -2048) e = -2048;
      checks++;
      if (int'(y) != e || !y_valid) begin
        failures++;
        $display("FAIL n=%0d x=%0d xp=%0d y=%0d exp=%0d", n, xv, xp, y, e);
      end
      xp = xv;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
