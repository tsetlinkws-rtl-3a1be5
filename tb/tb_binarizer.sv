// tb_binarizer: feeds 80 frames of random MFSC/SF values (more than the
// 64-frame window, so the ring wraps and old values leave the mean) and,
// after selected frames, reads all 64 feature rows. Expected bits come from a
// plain history array: the MFSC threshold is the sum of (value>>6) over the
// last 64 frames, the SF bit is |SF| > sf_thr. Also checks n_frames,
// frame_stored and the read-out latency (one accept clock, then 8 clocks
// for an MFSC row or 1 for an SF row).
module tb_binarizer;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [15:0] sf_thr;
  logic init_busy, in_valid, in_last, frame_stored, rd_start, rd_done;
  logic [4:0] in_coef;
  logic [15:0] in_mfsc;
  logic signed [16:0] in_sf;
  logic [6:0] n_frames;
  logic [5:0] rd_row;
  logic [63:0] rd_data;
  always #5 clk = ~clk;
  binarizer dut (.*);

  int hm [200][32];
  int hs [200][32];
  int nf = 0, nstored = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (frame_stored) nstored++;

  task automatic read_all();
    for (int r = 0; r < 64; r++) begin
      logic [63:0] expv;
      int lat, thr;
      for (int j = 0; j < 64; j++) begin
        int f;
        f = nf - 64 + j;          // bit 0 = oldest of the last 64 frames
        if (f < 0) expv[j] = 1'b0;
        else if (r < 32) begin
          thr = 0;
          for (int g = nf - 64; g < nf; g++) if (g >= 0) thr += hm[g][r] >> 6;
          if (thr > 65535) thr = 65535;
          expv[j] = hm[f][r] > thr;
        end else begin
          int a;
          a = hs[f][r-32] < 0 ? -hs[f][r-32] : hs[f][r-32];
          expv[j] = a > int'(sf_thr);
        end
      end
      rd_row = 6'(r); rd_start = 1;
      @(negedge clk); rd_start = 0;
      lat = 1;
      while (!rd_done) begin @(negedge clk); lat++; end
      checks++;
      if (rd_data !== expv || lat != ((r < 32) ? 9 : 2)) begin
        failures++;
        $display("FAIL frame %0d row %0d got %h exp %h lat %0d", nf, r, rd_data, expv, lat);
      end
    end
  endtask

  initial begin
    sf_thr = 16'd1024;
    in_valid = 0; in_last = 0; in_coef = 0; in_mfsc = 0; in_sf = 0; rd_start = 0; rd_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (init_busy) @(negedge clk);
    read_all();
    for (nf = 0; nf < 80; ) begin
      for (int c = 0; c < 32; c++) begin
        hm[nf][c] = (nf % 17 == 3) ? 65535 : int'($urandom_range(0, 65535)) >> ($urandom_range(0, 7));
        hs[nf][c] = int'($urandom_range(0, 4096)) - 2048;
        in_valid = 1; in_coef = 5'(c); in_mfsc = 16'(hm[nf][c]); in_sf = 17'(hs[nf][c]);
        in_last = (c == 31);
        @(negedge clk);
        in_valid = 0; in_last = 0;
        @(negedge clk);
      end
      @(negedge clk);
      nf++;
      checks++;
      if (int'(n_frames) != ((nf > 64) ? 64 : nf) || nstored != nf) begin
        failures++; $display("FAIL n_frames %0d stored %0d after %0d", n_frames, nstored, nf);
      end
      if (nf inside {1, 5, 63, 64, 65, 70, 80}) read_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
