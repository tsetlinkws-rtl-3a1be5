// tb_i2s_master: checks the clock division (BCLK = MCLK/8, LRCLK = MCLK/512)
// and that each sample is the 12 MSBs of the word the microphone sent.
`timescale 1ns/1ps
module tb_i2s_master;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic mclk = 0, rst_n = 0;
  logic sdata, bclk, lrclk, sample_valid, tick;
  logic signed [11:0] sample;
  logic [23:0] word;

  always #61 mclk = ~mclk;

  i2s_master dut (.mclk, .rst_n, .sdata, .bclk, .lrclk, .sample, .sample_valid);
  i2s_mic_model mic (.bclk, .lrclk, .word, .sdata, .frame_tick(tick));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge mclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // clock ratios measured in mclk cycles
  int last_b = 0, last_l = 0, cyc = 0;
  always @(posedge mclk) cyc++;
  always @(posedge bclk) begin
    if (rst_n && last_b != 0) check(cyc - last_b == 8, "BCLK period");
    last_b = cyc;
  end
  always @(posedge lrclk) begin
    if (rst_n && last_l != 0) check(cyc - last_l == 512, "LRCLK period");
    last_l = cyc;
  end

  logic [23:0] sent [$];
  initial begin
    word = 24'h000000;
    repeat (5) @(posedge mclk);
    rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      @(tick);
      sent.push_back(word);
      word = $urandom();
    end
    repeat (600) @(posedge mclk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nsamp = 0;
  always @(posedge mclk) begin
    if (sample_valid) begin
      logic [23:0] w;
      w = sent.pop_front();
      nsamp++;
      // the first frame after reset starts mid-way for the microphone
      if (nsamp > 1) check(sample == w[23:12], $sformatf("sample %h expected %h", sample, w[23:12]));
    end
  end
endmodule
