// tb_async_fifo: writes on a slow clock, reads on a fast one with random
// gaps, checks order and data, the count, and the overflow flag when the
// reader stops.
`timescale 1ns/1ps
module tb_async_fifo;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic w_en, w_full, w_overflow, r_en, r_empty;
  logic [11:0] w_data, r_data;
  logic [8:0] r_count;
  always #37 wclk = ~wclk;
  always #5  rclk = ~rclk;

  async_fifo #(.DW(12), .DEPTH(256)) dut (.*, .wrst_n(rst_n), .rrst_n(rst_n));

  logic [11:0] q [$];
  int n_written = 0;
  bit reader_on = 1;

  initial begin
    repeat (200000) @(posedge rclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) begin
    if (rst_n && w_en && !w_full) begin q.push_back(w_data); n_written++; end
  end
  initial begin
    w_en = 0; w_data = 0;
    repeat (3) @(posedge wclk);
    rst_n = 1;
    repeat (1000) begin
      @(negedge wclk);
      w_en = ($urandom_range(0, 3) != 0);
      w_data = 12'($urandom());
    end
    @(negedge wclk); w_en = 0;
    // let the reader drain, then overflow the FIFO
    repeat (40) @(negedge wclk);
    checks++; if (!r_empty) begin failures++; $display("FAIL not drained"); end
    checks++; if (w_overflow) begin failures++; $display("FAIL early overflow"); end
    reader_on = 0;
    repeat (300) begin @(negedge wclk); w_en = 1; w_data = 12'($urandom()); end
    @(negedge wclk); w_en = 0;
    repeat (10) @(posedge rclk);
    checks++; if (!w_overflow) begin failures++; $display("FAIL no overflow"); end
    checks++; if (r_count != 9'd256) begin failures++; $display("FAIL count %0d", r_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial r_en = 0;
  always @(negedge rclk) r_en = reader_on && !r_empty && ($urandom_range(0, 1) == 1);
  always @(posedge rclk) begin
    if (rst_n && r_en) begin
      logic [11:0] e;
      e = q.pop_front();
      checks++;
      if (r_data != e) begin failures++; $display("FAIL data %h exp %h", r_data, e); end
    end
  end
endmodule
