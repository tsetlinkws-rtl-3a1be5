// tb_spi_slave: sends 200 random 48-bit frames (mode 0, MSB first, SCK at
// one quarter to one eighth of the system clock) and checks that each
// produces one wr_en pulse with the right target/address/data. Also aborts a
// frame half-way by raising CS and checks that it writes nothing and that the
// next frame is still received whole.
module tb_spi_slave;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sck = 0, cs_n = 1, mosi = 0;
  logic wr_en;
  logic [7:0] wr_tgt;
  logic [15:0] wr_addr;
  logic [23:0] wr_data;
  always #5 clk = ~clk;
  spi_slave dut (.*);

  logic [47:0] q [$];
  int nwr = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (wr_en) begin
    logic [47:0] e;
    nwr++;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected write"); end
    else begin
      e = q.pop_front();
      if ({wr_tgt, wr_addr, wr_data} != e) begin
        failures++; $display("FAIL got %h exp %h", {wr_tgt, wr_addr, wr_data}, e);
      end
    end
  end

  task automatic send(input logic [47:0] w, input int nbits, input int half);
    cs_n = 0;
    repeat (half) @(negedge clk);
    for (int i = 47; i > 47 - nbits; i--) begin
      mosi = w[i];
      repeat (half) @(negedge clk);
      sck = 1;
      repeat (half) @(negedge clk);
      sck = 0;
    end
    repeat (half) @(negedge clk);
    cs_n = 1;
    repeat (2 * half) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [47:0] w;
      w = {$urandom, $urandom};
      if (n == 50) send(w, 20, 2);      // aborted frame: must be ignored
      q.push_back(w);
      send(w, 48, 2 + (n % 3));
    end
    repeat (20) @(negedge clk);
    checks++;
    if (nwr != 200 || q.size() != 0) begin failures++; $display("FAIL %0d writes", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
