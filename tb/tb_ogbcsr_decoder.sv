// tb_ogbcsr_decoder: random OG-BCSR streams for 300 blocks (including empty
// blocks, single-TA matrices and rows with the maximum count of 7) are put
// into per-unit row-count and CCL memories that, like the model bank,
// return the word addressed one clock earlier. The decoder is driven as the
// accelerator drives it: block load, then run until `finishing`. Checks:
// every unit emits exactly its TAs in order (matrix code ascending, upper
// row first, then column/clause as stored), and each block takes
// max(1, max over units of its TA count) run clocks.
module tb_ogbcsr_decoder;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ptr_clear = 0, blk_load = 0, finishing, idle;
  logic [19:0] bi_word = 0;
  logic [5:0]  rc_data [5];
  logic [4:0]  ccl_data [5];
  logic [10:0] rc_addr [5];
  logic [11:0] ccl_addr [5];
  ta_t ta [5];
  always #5 clk = ~clk;
  ogbcsr_decoder dut (.*);

  logic [5:0] rc_mem [5][2048];
  logic [4:0] ccl_mem [5][4096];
  always @(posedge clk)
    for (int u = 0; u < 5; u++) begin
      rc_data[u]  <= rc_mem[u][rc_addr[u]];
      ccl_data[u] <= ccl_mem[u][ccl_addr[u]];
    end

  localparam int NB = 300;
  logic [19:0] words [NB];
  int          cost [NB];
  ta_t         expq [5][$];
  int          nrc [5], nccl [5];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect the TA stream
  always @(posedge clk) if (rst_n)
    for (int u = 0; u < 5; u++)
      if (ta[u].valid) begin
        ta_t e;
        checks++;
        if (expq[u].size() == 0) begin failures++; $display("FAIL unit %0d extra TA", u); end
        else begin
          e = expq[u].pop_front();
          if (ta[u] != e) begin failures++; $display("FAIL unit %0d TA %h exp %h", u, ta[u], e); end
        end
      end

  initial begin
    for (int u = 0; u < 5; u++) begin nrc[u] = 0; nccl[u] = 0; end
    for (int b = 0; b < NB; b++) begin
      int maxn;
      words[b] = '0; maxn = 0;
      for (int u = 0; u < 5; u++) begin
        int nu;
        nu = 0;
        for (int code = 0; code < 4; code++) begin
          int c0, c1, kind;
          kind = int'($urandom_range(0, 9));
          if (b % 7 == 3 || kind < 5) continue;          // matrix empty in this block
          c0 = (kind == 9) ? 7 : int'($urandom_range(0, 3));
          c1 = (kind == 8) ? 7 : int'($urandom_range(0, 3));
          if (c0 + c1 == 0) c0 = 1;
          words[b][4*u + code] = 1'b1;
          rc_mem[u][nrc[u]++] = 6'(c1 * 8 + c0);
          for (int h = 0; h < 2; h++)
            for (int k = 0; k < ((h == 0) ? c0 : c1); k++) begin
              ta_t t;
              logic [4:0] w;
              w = 5'($urandom);
              ccl_mem[u][nccl[u]++] = w;
              t = '0;
              t.valid = 1; t.row_sel = 1'(h); t.col = w[4:1]; t.code = 2'(code); t.clause = w[0];
              expq[u].push_back(t);
            end
          nu += c0 + c1;
        end
        if (nu > maxn) maxn = nu;
      end
      cost[b] = (maxn == 0) ? 1 : maxn;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    ptr_clear = 1; @(negedge clk); ptr_clear = 0;
    for (int b = 0; b < NB; b++) begin
      int n;
      checks++;
      if (!idle) begin failures++; $display("FAIL not idle before block %0d", b); end
      blk_load = 1; bi_word = words[b];
      @(negedge clk);
      blk_load = 0;
      n = 1;
      while (!finishing) begin @(negedge clk); n++; end
      checks++;
      if (n != cost[b]) begin failures++; $display("FAIL block %0d took %0d exp %0d", b, n, cost[b]); end
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    for (int u = 0; u < 5; u++) begin
      checks++;
      if (expq[u].size() != 0) begin failures++; $display("FAIL unit %0d missed %0d TAs", u, expq[u].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
