// tb_model_bank: fills every bank (block index, five row-count banks, five
// CCL banks, weights) with random words through the write port, including
// writes to unknown targets and out-of-range addresses that must change
// nothing, then reads every word back through the read ports, which return
// the word addressed one clock earlier.
module tb_model_bank;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, bi_re = 0;
  logic [7:0] wr_tgt = 0;
  logic [15:0] wr_addr = 0;
  logic [23:0] wr_data = 0;
  logic [10:0] bi_addr = 0;
  logic [19:0] bi_data;
  logic [10:0] rc_addr [5];
  logic [5:0]  rc_data [5];
  logic [11:0] ccl_addr [5];
  logic [4:0]  ccl_data [5];
  logic [10:0] w_addr = 0;
  logic signed [7:0] w_data;
  always #5 clk = ~clk;
  model_bank dut (.*);

  logic [19:0] e_bi [1152];
  logic [5:0]  e_rc [5][2048];
  logic [4:0]  e_ccl [5][4096];
  logic [7:0]  e_w [1440];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int tgt, input int addr, input logic [23:0] d);
    wr_en = 1; wr_tgt = 8'(tgt); wr_addr = 16'(addr); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    for (int u = 0; u < 5; u++) begin rc_addr[u] = 0; ccl_addr[u] = 0; end
    @(negedge clk);
    for (int a = 0; a < 1152; a++) begin e_bi[a] = 20'($urandom); wr(TGT_BI, a, 24'(e_bi[a]) | 24'hF00000); end
    for (int a = 0; a < 1440; a++) begin e_w[a] = 8'($urandom); wr(TGT_WGT, a, {16'hABCD, e_w[a]}); end
    for (int u = 0; u < 5; u++) begin
      for (int a = 0; a < 2048; a++) begin e_rc[u][a] = 6'($urandom); wr(int'(TGT_RC) + u, a, 24'(e_rc[u][a])); end
      for (int a = 0; a < 4096; a++) begin e_ccl[u][a] = 5'($urandom); wr(int'(TGT_CCL) + u, a, 24'(e_ccl[u][a])); end
    end
    // writes that must be ignored
    wr(TGT_BI, 1152, '1); wr(TGT_WGT, 1440, '1); wr(8'h7F, 0, '1); wr(TGT_CFG, 0, '1);
    wr(int'(TGT_RC) + 5, 0, '1); wr(int'(TGT_CCL) + 5, 0, '1);
    for (int a = 0; a < 4096; a++) begin
      bi_re = 1; bi_addr = 11'(a % 1152); w_addr = 11'(a % 1440);
      for (int u = 0; u < 5; u++) begin rc_addr[u] = 11'((a + u) % 2048); ccl_addr[u] = 12'((a * 7 + u) % 4096); end
      @(negedge clk);
      checks++;
      if (bi_data != e_bi[a % 1152] || w_data != e_w[a % 1440]) begin
        failures++; $display("FAIL bi/w at %0d", a);
      end
      for (int u = 0; u < 5; u++) begin
        checks++;
        if (rc_data[u] != e_rc[u][(a + u) % 2048] || ccl_data[u] != e_ccl[u][(a * 7 + u) % 4096]) begin
          failures++; $display("FAIL unit %0d at %0d", u, a);
        end
      end
    end
    // bi_re low holds the block-index output
    bi_re = 0; bi_addr = 0;
    @(negedge clk);
    checks++;
    if (bi_data != e_bi[4095 % 1152]) begin failures++; $display("FAIL bi hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
