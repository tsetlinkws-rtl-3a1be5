// tb_pe_array: random sequences of TAs (valid or not) and literal vectors on
// the five columns; each of the 40 Pand registers must hold the AND of the
// literal vectors addressed to its clause since the last clear, and all ones
// after a clear.
module tb_pe_array;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clear = 0;
  ta_t ta [5];
  logic [57:0] lit [5];
  logic [5:0] rd_sel = 0;
  logic [57:0] rd_pand;
  always #5 clk = ~clk;
  pe_array dut (.*);

  logic [57:0] e [40];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input int n);
    for (int j = 0; j < 40; j++) begin
      rd_sel = 6'(j);
      #1;
      checks++;
      if (rd_pand != e[j]) begin failures++; $display("FAIL seq %0d clause %0d", n, j); end
    end
  endtask

  initial begin
    for (int u = 0; u < 5; u++) begin ta[u] = '0; lit[u] = '0; end
    @(negedge clk);
    for (int n = 0; n < 50; n++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int j = 0; j < 40; j++) e[j] = '1;
      check_all(n);
      for (int k = 0; k < 20; k++) begin
        for (int u = 0; u < 5; u++) begin
          ta[u] = '0;
          ta[u].valid = ($urandom_range(0, 3) != 0);
          ta[u].code = 2'($urandom); ta[u].clause = 1'($urandom);
          ta[u].col = 4'($urandom); ta[u].row_sel = 1'($urandom);
          lit[u] = {$urandom, $urandom} | {$urandom, $urandom};
          if (ta[u].valid) e[8*u + 2*int'(ta[u].code) + int'(ta[u].clause)] &= lit[u];
        end
        @(negedge clk);
      end
      for (int u = 0; u < 5; u++) ta[u].valid = 0;
      check_all(n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
