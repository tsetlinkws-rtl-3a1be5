// tb_feature_extractor: the front end from the I2S microphone to the feature
// map, with real clock rates (8.192 MHz master clock, 400 kHz system clock).
// The microphone sends three 256-sample subframes of silence and then a
// 1 kHz tone. With automatic inference after 6 frames, the test captures the
// 64 rows written to the feature bank and checks:
//  - the rows arrive in order (row r -> word r/2, half r%2), then infer_start;
//  - frames made only of silence give all-zero bits in every row;
//  - the tone's Mel channels (bin 16 lies in filters 11 and 12) have their
//    MFSC bit set in the frames that hold only tone;
//  - the SF row of one of those channels marks the onset;
//  - a request arriving while the accelerator is busy gives infer_skip;
//  - n_frames counts stored frames.
`timescale 1ns/1ps
module tb_feature_extractor;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic mclk = 0, clk = 0, rst_n = 1;
  logic adc_sdata, bclk, lrclk, tick;
  logic fe_enable = 0, auto_infer = 0, infer_req = 0, acc_busy = 0;
  logic [15:0] sf_thr = 16'd1024;
  logic [6:0] min_frames = 7'd6, n_frames;
  logic fb_we, fb_half, infer_start, infer_skip, fifo_overflow;
  logic [4:0] fb_addr;
  logic [63:0] fb_wdata;
  logic [23:0] word = 0;

  always #61 mclk = ~mclk;
  always #1250 clk = ~clk;

  feature_extractor dut (.*);
  i2s_mic_model mic (.bclk, .lrclk, .word, .sdata(adc_sdata), .frame_tick(tick));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000000) @(posedge mclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // microphone: silence, then a 1 kHz tone of amplitude 1500 (12-bit scale)
  int nsamp = 0;
  always @(tick) begin
    int v;
    v = (nsamp < 3 * 256 + 64) ? 0 : $rtoi(1500.0 * $sin(2.0 * 3.14159265 * 1000.0 * nsamp / 16000.0));
    word = {12'(v), 12'h000};
    nsamp++;
  end

  logic [63:0] rows [64];
  int nwr = 0, nstart = 0, nskip = 0, order_ok = 1;
  always @(posedge clk) if (rst_n) begin
    if (fb_we) begin
      if (fb_addr != 5'(nwr / 2) || fb_half != nwr[0]) order_ok = 0;
      rows[nwr % 64] = fb_wdata;
      nwr++;
    end
    if (infer_start) nstart++;
    if (infer_skip) nskip++;
  end

  initial begin
    // a real falling edge, so that every asynchronously reset flop resets
    // even in the clock domains that have no edge during reset
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fe_enable = 1; auto_infer = 1;
    wait (nstart == 1);
    @(negedge clk);
    check(nwr == 64 && order_ok == 1, "64 rows written in order before infer_start");
    check(n_frames == 7'd6, "n_frames is 6 at the first inference");
    // bit j = frame (6 + j) mod 64: frames 0..5 are bits 58..63
    for (int r = 0; r < 64; r++) begin
      check(rows[r][57:0] == '0, $sformatf("row %0d: unused frames are zero", r));
      check(rows[r][59:58] == '0, $sformatf("row %0d: silent frames 0,1 are zero", r));
    end
    for (int f = 3; f < 6; f++) begin
      check(rows[11][58 + f] == 1'b1, $sformatf("MFSC 11 set in tone frame %0d", f));
      check(rows[12][58 + f] == 1'b1, $sformatf("MFSC 12 set in tone frame %0d", f));
    end
    check(rows[32 + 11][60] || rows[32 + 12][60] || rows[32 + 11][61] || rows[32 + 12][61],
          "SF marks the tone onset");
    // accelerator busy: the next automatic request is skipped
    acc_busy = 1;
    wait (nskip == 1);
    @(negedge clk);
    acc_busy = 0;
    check(nstart == 1, "no start while busy");
    wait (nstart == 2);
    @(negedge clk);
    check(n_frames == 7'd8, "n_frames is 8 at the second inference");
    check(nwr == 128 && order_ok == 1, "second read-out in order");
    check(fifo_overflow == 1'b0, "no FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
