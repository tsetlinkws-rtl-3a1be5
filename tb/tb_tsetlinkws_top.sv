// tb_tsetlinkws_top: the whole chip, at its default sizes, from microphone
// samples and SPI set-up to keyword results.
//
// 1. With the audio clock stopped, a random sparse model of about 14k
//    included TAs (12 classes x 120 clauses) is encoded into OG-BCSR lists
//    and written over SPI: all block-index words, the five row-count and
//    five CCL banks, all clause weights.
// 2. The audio clock starts with feature extraction still disabled, so the
//    first samples are discarded; then an SPI write enables extraction and
//    automatic inference (after the default 64 frames).
// 3. The microphone plays a changing mix of tones, silence and onsets. Each
//    result is checked against the reference classifier run on the feature
//    map in the feature bank, and each inference's clock count against the
//    count predicted from the encoded model.
// 4. Once three inferences are done, automatic inference is switched off
//    and one more is requested over SPI.
// Mechanisms counted (each must happen at least once): samples discarded
// while disabled, FFT flush cycles (input stalled), FIFO holding samples
// during a flush, empty blocks skipped, matrix switches inside a decoder
// unit, requests skipped because the accelerator was busy, SF feature bits,
// automatic and requested inferences.
`timescale 1ns/1ps
module tb_tsetlinkws_top;
  import tkws_pkg::*;
  import tb_ctm_model_pkg::*;
  int checks = 0, failures = 0;
  logic mclk = 0, clk = 0, rst_n = 1, mclk_on = 0;
  logic bclk, lrclk, adc_sdata, sck = 0, cs_n = 1, mosi = 0, inf_done, tick;
  logic [3:0] result;
  logic [23:0] word = 0;

  always #61 if (mclk_on) mclk = ~mclk; else mclk = 1'b0;
  always #1250 clk = ~clk;

  tsetlinkws_top dut (.*);
  i2s_mic_model mic (.bclk, .lrclk, .word, .sdata(adc_sdata), .frame_tick(tick));

  ctm_model m;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- SPI master (mode 0, SCK = clk/4) ----------------
  task automatic spi_write(input int tgt, input int addr, input int data);
    logic [47:0] w;
    w = {8'(tgt), 16'(addr), 24'(data)};
    @(negedge clk);
    cs_n = 0;
    for (int i = 47; i >= 0; i--) begin
      mosi = w[i];
      repeat (2) @(negedge clk);
      sck = 1;
      repeat (2) @(negedge clk);
      sck = 0;
    end
    repeat (2) @(negedge clk);
    cs_n = 1;
    repeat (2) @(negedge clk);
  endtask

  // ---------------- microphone ----------------
  int nsamp = 0;
  always @(tick) begin
    int sub, v;
    real f, a;
    sub = nsamp / 256;
    case (sub % 6)
      0: begin f = 500.0;  a = 1800.0; end
      1: begin f = 1250.0; a = 900.0;  end
      2: begin f = 0.0;    a = 0.0;    end
      3: begin f = 3000.0; a = 1500.0; end
      4: begin f = 250.0 + 125.0 * (sub % 11); a = 1200.0; end
      default: begin f = 6000.0; a = 400.0; end
    endcase
    v = $rtoi(a * $sin(2.0 * 3.14159265 * f * nsamp / 16000.0)) + int'($urandom_range(0, 40)) - 20;
    word = {12'(v), 12'h000};
    nsamp++;
  end

  // ---------------- mechanism counters ----------------
  int n_discard = 0, n_flush = 0, n_fifo_hold = 0, n_empty_blk = 0, n_mswitch = 0;
  int n_skip = 0, n_sf_bits = 0, n_done = 0, n_auto = 0, n_req = 0;
  logic prev_load = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_fe.fifo_pop && !dut.u_fe.fe_enable) n_discard++;
    if (!dut.u_fe.u_fft.in_ready) n_flush++;
    if (!dut.u_fe.u_fft.in_ready && !dut.u_fe.fifo_empty) n_fifo_hold++;
    if (dut.u_ctm.load && dut.u_ctm.bi_data == '0) n_empty_blk++;
    if (dut.u_ctm.u_dec.g_unit[0].u_unit.start_m && !prev_load) n_mswitch++;
    prev_load = dut.u_ctm.load;
    if (dut.u_fe.infer_skip) n_skip++;
    if (dut.u_fe.infer_start) begin
      if (dut.auto_infer) n_auto++; else n_req++;
    end
  end

  // ---------------- result check ----------------
  always @(posedge clk) if (rst_n && inf_done) begin
    bit [63:0] feat [64];
    int best, best_sum, sums [12];
    for (int b = 0; b < 32; b++) begin
      feat[2*b]     = dut.u_ctm.u_fb.mem[b][63:0];
      feat[2*b + 1] = dut.u_ctm.u_fb.mem[b][127:64];
    end
    for (int r = 32; r < 64; r++) n_sf_bits += $countones(feat[r]);
    m.classify(feat, best, best_sum, sums);
    n_done++;
    check(int'(result) == best, $sformatf("inference %0d: result %0d, reference %0d", n_done, result, best));
    check(int'(dut.u_ctm.last_cycles) == m.cycles,
          $sformatf("inference %0d: %0d clocks, predicted %0d", n_done, dut.u_ctm.last_cycles, m.cycles));
    $display("inference %0d at %0t: class %0d (sum %0d), %0d clocks, %0d frames stored",
             n_done, $time, result, best_sum, dut.u_ctm.last_cycles, dut.n_frames);
  end

  initial begin
    m = new();
    m.gen(4, 3, 5);
    m.encode();
    $display("model: %0d included TAs, %0d empty blocks, %0d clocks per inference",
             m.n_ta, m.n_empty_blocks, m.cycles);
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. model load over SPI, audio clock stopped
    for (int a = 0; a < NCLASS * NROUNDS * NBLOCKS; a++) spi_write(TGT_BI, a, int'(m.bi[a]));
    for (int u = 0; u < 5; u++) begin
      if (m.rc[u].size() > 2048 || m.ccl[u].size() > 4096) $fatal(1, "model too large");
      foreach (m.rc[u][i])  spi_write(int'(TGT_RC) + u, i, m.rc[u][i]);
      foreach (m.ccl[u][i]) spi_write(int'(TGT_CCL) + u, i, m.ccl[u][i]);
    end
    for (int c = 0; c < 12; c++)
      for (int j = 0; j < 120; j++) spi_write(TGT_WGT, c * 120 + j, m.wgt[c][j] & 255);
    spi_write(TGT_CFG, 1, 1024);
    $display("model loaded at %0t", $time);
    // 2. audio on, extraction still disabled, then enabled with auto inference
    mclk_on = 1;
    repeat (3000) @(negedge clk);
    spi_write(TGT_CFG, 0, 3);
    // 3. automatic inferences
    wait (n_done == 3);
    // 4. manual request
    spi_write(TGT_CFG, 0, 1);
    repeat (20000) @(negedge clk);
    spi_write(TGT_CFG, 3, 0);
    wait (n_done == 4);
    repeat (10) @(negedge clk);
    $display("mechanisms: discarded %0d, flush %0d, fifo-hold %0d, empty blocks %0d, matrix switches %0d, skipped %0d, SF bits %0d, auto %0d, requested %0d",
             n_discard, n_flush, n_fifo_hold, n_empty_blk, n_mswitch, n_skip, n_sf_bits, n_auto, n_req);
    check(n_discard > 0, "samples discarded while extraction disabled");
    check(n_flush > 0, "FFT flush stalls its input");
    check(n_fifo_hold > 0, "FIFO holds samples during a flush");
    check(n_empty_blk > 0, "empty blocks skipped");
    check(n_mswitch > 0, "decoder switches matrix inside a block");
    check(n_skip > 0, "request skipped while accelerator busy");
    check(n_sf_bits > 0, "SF bits in the feature map");
    check(n_auto == 3 && n_req == 1, "three automatic and one requested inference");
    check(dut.n_frames == 7'd64, "frame count saturates at 64");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
