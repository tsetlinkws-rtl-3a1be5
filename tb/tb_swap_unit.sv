// tb_swap_unit: sends two frames of 256 spectrum words in bit-reversed order
// and checks that bins 0..127 come out in natural order with
// min(|Re|+|Im|, 32767), one per clock, out_last on bin 127.
module tb_swap_unit;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, out_last;
  logic [7:0] in_bin;
  logic signed [14:0] in_re, in_im;
  logic [6:0] out_bin;
  logic [14:0] out_mag;
  always #5 clk = ~clk;
  swap_unit dut (.*);

  int exp_mag [128];
  int nout;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (out_bin != 7'(nout) || int'(out_mag) != exp_mag[nout] || out_last != (nout == 127)) begin
        failures++;
        $display("FAIL out %0d bin %0d mag %0d exp %0d", nout, out_bin, out_mag, exp_mag[nout]);
      end
      nout++;
    end
  end

  initial begin
    in_valid = 0; in_bin = 0; in_re = 0; in_im = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      nout = 0;
      for (int p = 0; p < 256; p++) begin
        int b, re, im, m;
        b = int'(bitrev8(8'(p)));
        re = (f == 1 && b == 5) ? -16384 : int'($urandom_range(0, 32767)) - 16384;
        im = (f == 1 && b == 5) ? -16384 : int'($urandom_range(0, 32767)) - 16384;
        m = (re < 0 ? -re : re) + (im < 0 ? -im : im);
        if (b < 128) exp_mag[b] = (m > 32767) ? 32767 : m;
        in_valid = 1; in_bin = 8'(b); in_re = 15'(re); in_im = 15'(im);
        @(negedge clk);
      end
      in_valid = 0;
      repeat (140) @(negedge clk);
      checks++;
      if (nout != 128) begin failures++; $display("FAIL frame %0d gave %0d bins", f, nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
