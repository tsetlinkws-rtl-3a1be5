// async_fifo: dual-clock FIFO (the paper's 256x12b subframe data buffer).
//
// The write side runs on the 16 kHz frame clock, the read side on the system
// clock, as in the paper. This design uses the usual Gray-coded pointers with
// two-flop synchronisers: the write side sees a synchronised read pointer to
// form `w_full`, the read side a synchronised write pointer to form `r_empty`
// and `r_count`. The read port is first-word-fall-through: `r_data` shows the
// oldest entry while `r_empty` is low and `r_en` pops it. A write while full
// is dropped and raises the sticky `w_overflow` flag.
module async_fifo #(
  parameter int unsigned DW    = 12,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     wclk,
  input  logic                     wrst_n,
  input  logic                     w_en,
  input  logic [DW-1:0]            w_data,
  output logic                     w_full,
  output logic                     w_overflow,
  input  logic                     rclk,
  input  logic                     rrst_n,
  input  logic                     r_en,
  output logic [DW-1:0]            r_data,
  output logic                     r_empty,
  output logic [$clog2(DEPTH):0]   r_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wbin, wgray, rbin, rgray;
  logic [AW:0]   rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0]   wbin_r, rbin_w;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---- write domain ----
  assign rbin_w = gray2bin(rgray_w2);
  assign w_full = (wbin[AW] != rbin_w[AW]) && (wbin[AW-1:0] == rbin_w[AW-1:0]);

  always_ff @(posedge wclk) begin
    if (w_en && !w_full) mem[wbin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; w_overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (w_en && !w_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
      if (w_en && w_full) w_overflow <= 1'b1;
    end
  end

  // ---- read domain ----
  assign wbin_r  = gray2bin(wgray_r2);
  assign r_count = wbin_r - rbin;
  assign r_empty = (r_count == '0);
  assign r_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (r_en && !r_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  // a pop is only legal when data is present
  assert property (@(posedge rclk) disable iff (!rrst_n) r_en |-> !r_empty)
    else $error("async_fifo: read while empty");
endmodule
