// tb_distributor: loads random block words (two feature rows) and, for random
// TAs on all five units, checks the 58 literal bits against the definition:
// column k < 7 is row bit w+k, column 7 is the position literal w > row,
// columns 8..15 are the negations.
module tb_distributor;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, load = 0;
  logic [4:0] load_blk = 0;
  logic [127:0] load_data = 0;
  ta_t ta [5];
  logic [57:0] lit [5];
  always #5 clk = ~clk;
  distributor dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < 5; u++) ta[u] = '0;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      logic [63:0] rows [2];
      int blk;
      rows[0] = {$urandom, $urandom}; rows[1] = {$urandom, $urandom};
      blk = int'($urandom_range(0, 31));
      load = 1; load_blk = 5'(blk); load_data = {rows[1], rows[0]};
      @(negedge clk);
      load = 0; load_data = '0;
      for (int k = 0; k < 8; k++) begin
        for (int u = 0; u < 5; u++) begin
          ta[u].valid = 1; ta[u].row_sel = 1'($urandom); ta[u].col = 4'($urandom);
          ta[u].code = 2'($urandom); ta[u].clause = 1'($urandom);
        end
        #1;
        for (int u = 0; u < 5; u++) begin
          logic [57:0] e;
          int r, c;
          r = 2 * blk + int'(ta[u].row_sel);
          c = int'(ta[u].col);
          for (int w = 0; w < 58; w++) begin
            logic b;
            b = ((c & 7) == 7) ? (w > r) : rows[ta[u].row_sel][w + (c & 7)];
            e[w] = (c >= 8) ? !b : b;
          end
          checks++;
          if (lit[u] != e) begin failures++; $display("FAIL blk %0d unit %0d col %0d", blk, u, c); end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
