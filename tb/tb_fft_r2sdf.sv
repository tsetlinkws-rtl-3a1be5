// tb_fft_r2sdf: feeds three frames (random noise, a pure tone, an impulse)
// and compares every output bin with a floating-point DFT computed here.
// Amplitudes are small enough that no stage saturates; the tolerance covers
// the stage-wise truncation. Also checks the framing: 256 outputs per frame,
// each bin exactly once, the first one with push 255, in_ready low during
// the 256-push flush.
module tb_fft_r2sdf;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_last;
  logic signed [11:0] in_sample;
  logic [7:0] out_bin;
  logic signed [14:0] out_re, out_im;
  always #5 clk = ~clk;

  fft_r2sdf dut (.*);

  real xr [256];
  real ref_re [256], ref_im [256];
  bit  seen [256];
  int  nout, pushes, first_out_push, flush_cycles;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input int kind);
    real pi;
    pi = 3.14159265358979;
    for (int n = 0; n < 256; n++) begin
      case (kind)
        0: xr[n] = real'($urandom_range(0, 60)) - 30.0;
        1: xr[n] = real'($rtoi(50.0 * $cos(2.0 * pi * 10.0 * n / 256.0)));
        default: xr[n] = (n == 3) ? 1000.0 : 0.0;
      endcase
    end
    for (int k = 0; k < 256; k++) begin
      ref_re[k] = 0.0; ref_im[k] = 0.0; seen[k] = 0;
      for (int n = 0; n < 256; n++) begin
        ref_re[k] += xr[n] * $cos(2.0 * pi * k * n / 256.0);
        ref_im[k] -= xr[n] * $sin(2.0 * pi * k * n / 256.0);
      end
    end
    nout = 0; pushes = 0; first_out_push = -1; flush_cycles = 0;
    for (int n = 0; n < 256; n++) begin
      // random input gaps
      while ($urandom_range(0, 3) == 0) begin
        in_valid = 0; @(negedge clk);
      end
      in_valid = 1; in_sample = 12'($rtoi(xr[n]));
      @(negedge clk);
      while (!in_ready) @(negedge clk);
    end
    in_valid = 0;
    while (nout < 256) @(negedge clk);
    @(negedge clk);
    check(first_out_push == 255, $sformatf("first output at push %0d", first_out_push));
    check(flush_cycles == 256, $sformatf("flush lasted %0d clocks", flush_cycles));
    for (int k = 0; k < 256; k++) check(seen[k], $sformatf("bin %0d missing", k));
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (!in_ready) flush_cycles++;
      if (in_valid && in_ready || !in_ready) begin
        if (out_valid) begin
          real er, ei, tol;
          if (first_out_push < 0) first_out_push = pushes;
          er = real'(out_re) - ref_re[out_bin];
          ei = real'(out_im) - ref_im[out_bin];
          tol = 12.0;
          checks++;
          if (er > tol || er < -tol || ei > tol || ei < -tol) begin
            failures++;
            $display("FAIL bin %0d got %0d,%0d exp %f,%f", out_bin, out_re, out_im,
                     ref_re[out_bin], ref_im[out_bin]);
          end
          seen[out_bin] = 1;
          nout++;
        end
        pushes++;
      end
    end
  end

  initial begin
    in_valid = 0; in_sample = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    run_frame(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
