// tb_config_regs: checks the reset values (features off, SF threshold 1024,
// 64 frames before an automatic inference), random register writes and read
// back through the outputs, that writes to other targets are ignored, and
// that address 3 gives a one-clock inference request.
module tb_config_regs;
  import tkws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [7:0] wr_tgt = 0;
  logic [15:0] wr_addr = 0;
  logic [23:0] wr_data = 0;
  logic fe_enable, auto_infer, infer_req;
  logic [15:0] sf_thr;
  logic [6:0] min_frames;
  always #5 clk = ~clk;
  config_regs dut (.*);

  logic [1:0] e_ctl = 0; logic [15:0] e_thr = 1024; logic [6:0] e_min = 64;
  int nreq = 0, ereq = 0;
  always @(posedge clk) if (infer_req) nreq++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if ({auto_infer, fe_enable} != 2'b00 || sf_thr != 16'd1024 || min_frames != 7'd64 || infer_req) begin
      failures++; $display("FAIL reset values");
    end
    for (int n = 0; n < 2000; n++) begin
      wr_en = 1;
      wr_tgt = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(1, 255)) : TGT_CFG;
      wr_addr = 16'($urandom_range(0, 5));
      wr_data = 24'($urandom);
      if (wr_tgt == TGT_CFG) begin
        case (wr_addr)
          0: e_ctl = wr_data[1:0];
          1: e_thr = wr_data[15:0];
          2: e_min = wr_data[6:0];
          3: ereq++;
          default: ;
        endcase
      end
      @(negedge clk);
      wr_en = 0;
      checks++;
      if ({auto_infer, fe_enable} != e_ctl || sf_thr != e_thr || min_frames != e_min) begin
        failures++; $display("FAIL write %0d", n);
      end
    end
    @(negedge clk);
    checks++;
    if (nreq != ereq) begin failures++; $display("FAIL %0d requests, exp %0d", nreq, ereq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
