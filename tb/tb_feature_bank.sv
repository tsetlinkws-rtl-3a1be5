// tb_feature_bank: writes all 64 feature rows as half-words, reads the 32
// block words back (registered read, one clock) and checks them; then checks
// that en=0 holds the read register and blocks writes.
module tb_feature_bank;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, we = 0, whalf = 0;
  logic [4:0] addr = 0;
  logic [63:0] wdata = 0;
  logic [127:0] rdata;
  always #5 clk = ~clk;
  feature_bank dut (.*);

  logic [63:0] rows [64];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < 64; r++) begin
        rows[r] = {$urandom, $urandom};
        en = 1; we = 1; addr = 5'(r / 2); whalf = r[0]; wdata = rows[r];
        @(negedge clk);
      end
      we = 0;
      for (int b = 0; b < 32; b++) begin
        en = 1; addr = 5'(b);
        @(negedge clk);
        checks++;
        if (rdata != {rows[2*b+1], rows[2*b]}) begin failures++; $display("FAIL block %0d", b); end
      end
    end
    // disabled: no write, read register holds
    en = 0; we = 1; addr = 5'd3; wdata = '1;
    @(negedge clk);
    checks++;
    if (rdata != {rows[63], rows[62]}) begin failures++; $display("FAIL hold"); end
    en = 1; we = 0; addr = 5'd3;
    @(negedge clk);
    checks++;
    if (rdata != {rows[7], rows[6]}) begin failures++; $display("FAIL write while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
