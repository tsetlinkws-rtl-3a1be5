// tb_mel_filter: three frames of random bin magnitudes; each filter output
// must equal the saturated sum of the bins [E[m], E[m+2]) of its frame, with
// the mel-scale edges recomputed here from the mel formula; the ping-pong
// read port must give the newest and the previous frame.
module tb_mel_filter;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_last, frame_done, have_prev;
  logic [6:0] in_bin;
  logic [14:0] in_mag;
  logic [4:0] rd_idx;
  logic [15:0] rd_cur, rd_prev;
  always #5 clk = ~clk;
  mel_filter dut (.*);

  int edges [34];
  int expv [3][32];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real lo, hi, m;
    lo = 0.0;
    hi = 2595.0 * $log10(1.0 + 8000.0 / 700.0);
    for (int i = 0; i < 34; i++) begin
      m = lo + i * (hi - lo) / 33.0;
      edges[i] = $rtoi((700.0 * ($pow(10.0, m / 2595.0) - 1.0)) / 62.5);
    end
    edges[33] = 128;
    in_valid = 0; in_last = 0; in_bin = 0; in_mag = 0; rd_idx = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      int mags [128];
      for (int b = 0; b < 128; b++)
        mags[b] = (f == 2) ? 32767 : int'($urandom_range(0, (f == 0) ? 3000 : 30000));
      for (int k = 0; k < 32; k++) begin
        int s;
        s = 0;
        for (int b = edges[k]; b < edges[k+2]; b++) s += mags[b];
        expv[f][k] = (s > 65535) ? 65535 : s;
      end
      for (int b = 0; b < 128; b++) begin
        in_valid = 1; in_bin = 7'(b); in_mag = 15'(mags[b]); in_last = (b == 127);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      checks++;
      if (!frame_done) begin failures++; $display("FAIL no frame_done"); end
      checks++;
      if (have_prev != (f > 0)) begin failures++; $display("FAIL have_prev"); end
      for (int k = 0; k < 32; k++) begin
        rd_idx = 5'(k);
        #1;
        checks++;
        if (int'(rd_cur) != expv[f][k] || (f > 0 && int'(rd_prev) != expv[f-1][k])) begin
          failures++;
          $display("FAIL f%0d m%0d cur %0d exp %0d prev %0d", f, k, rd_cur, expv[f][k], rd_prev);
        end
      end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
