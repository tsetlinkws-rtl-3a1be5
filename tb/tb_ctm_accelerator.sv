// tb_ctm_accelerator: end-to-end test of the inference engine at full size
// (12 classes x 120 clauses, 64x64 feature map). A random sparse model is
// encoded into OG-BCSR lists by the reference class and written through the
// model write port; random feature maps (dense, sparse, all-zero) are
// written through the feature-bank port. For each of several inferences the
// result, the winning class sum and the clock count (predicted from the
// per-block TA counts: max(2, max over units) per block, 40 summation clocks and
// fixed overheads per batch) are checked, as is the inf_done pulse.
module tb_ctm_accelerator;
  import tkws_pkg::*;
  import tb_ctm_model_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic mw_en = 0, fb_we = 0, fb_half = 0, start = 0;
  logic [7:0] mw_tgt = 0;
  logic [15:0] mw_addr = 0;
  logic [23:0] mw_data = 0;
  logic [4:0] fb_addr = 0;
  logic [63:0] fb_wdata = 0;
  logic busy, inf_done;
  logic [3:0] result;
  logic [15:0] last_cycles;
  always #5 clk = ~clk;
  ctm_accelerator dut (.*);

  ctm_model m;
  int ndone = 0;
  always @(posedge clk) if (rst_n && inf_done) ndone++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mw(input int tgt, input int addr, input int data);
    mw_en = 1; mw_tgt = 8'(tgt); mw_addr = 16'(addr); mw_data = 24'(data);
    @(negedge clk);
    mw_en = 0;
  endtask

  task automatic load_model();
    for (int a = 0; a < NCLASS * NROUNDS * NBLOCKS; a++) mw(TGT_BI, a, int'(m.bi[a]));
    for (int u = 0; u < 5; u++) begin
      if (m.rc[u].size() > 2048 || m.ccl[u].size() > 4096) $fatal(1, "model too large");
      foreach (m.rc[u][i])  mw(int'(TGT_RC) + u, i, m.rc[u][i]);
      foreach (m.ccl[u][i]) mw(int'(TGT_CCL) + u, i, m.ccl[u][i]);
    end
    for (int c = 0; c < 12; c++)
      for (int j = 0; j < 120; j++) mw(TGT_WGT, c * 120 + j, m.wgt[c][j] & 255);
  endtask

  task automatic run_one(input int kind);
    bit [63:0] feat [64];
    int best, best_sum, sums [12], t0, t;
    for (int r = 0; r < 64; r++) begin
      case (kind)
        0: feat[r] = {$urandom, $urandom};
        1: feat[r] = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
        default: feat[r] = '0;
      endcase
      fb_we = 1; fb_addr = 5'(r / 2); fb_half = r[0]; fb_wdata = feat[r];
      @(negedge clk);
    end
    fb_we = 0;
    m.classify(feat, best, best_sum, sums);
    start = 1; @(negedge clk); start = 0;
    t = 1;
    while (!inf_done) begin @(negedge clk); t++; end
    checks++;
    if (int'(result) != best || int'(dut.best_sum) != best_sum) begin
      failures++;
      $display("FAIL result %0d/%0d exp %0d/%0d", result, dut.best_sum, best, best_sum);
    end
    checks++;
    if (int'(last_cycles) != m.cycles || t != m.cycles + 1) begin
      failures++;
      $display("FAIL cycles %0d (counted %0d) exp %0d", last_cycles, t, m.cycles);
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    $display("inference kind %0d: class %0d sum %0d, %0d clocks", kind, best, best_sum, t);
  endtask

  initial begin
    m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // model 1: clustered literals, about the paper's 15.6k included TAs
    m.gen(4, 3, 5);
    m.encode();
    $display("model: %0d TAs, %0d empty blocks, predicted %0d clocks", m.n_ta, m.n_empty_blocks, m.cycles);
    load_model();
    run_one(0); run_one(1); run_one(2); run_one(0);
    // model 2: very sparse, many empty blocks and single-literal clauses
    m.gen(1, 1, 30);
    m.encode();
    load_model();
    run_one(1); run_one(2);
    checks++;
    if (ndone != 6) begin failures++; $display("FAIL %0d done pulses", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
