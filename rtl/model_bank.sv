// model_bank: on-chip store of the compressed CTM model.
//
// Holds the OG-BCSR lists and the clause weights, written once over SPI:
//   block index bank  BI_DEPTH  x 20 b  one bit per merged matrix per block,
//                                        word (class*3+round)*32+block
//   row count banks   5 x RC_DEPTH  x 6 b  two 3-bit row counts per non-empty
//                                        block of a matrix, {row1,row0}
//   CCL index banks   5 x CCL_DEPTH x 5 b  per included TA {column[3:0], clause}
//   weight bank       W_DEPTH   x 8 b   signed clause weight, class*120+clause
// There is one row-count and one CCL bank per decoder unit, each read in
// strictly sequential order, so the decoder keeps the next word prefetched:
// every read port returns the word at the address given one clock earlier.
// Write port: wr_tgt selects the bank (tkws_pkg::spi_target_e), wr_addr the
// word, wr_data[19:0] the value (unused upper bits ignored).
// The widths of the row count (3 b per row, from "no more than 7") and the 20 b
// block word follow the paper; depths and the weight width are this design's.
module model_bank
  import tkws_pkg::*;
#(
  parameter int unsigned BI_DEPTH  = NCLASS * NROUNDS * NBLOCKS,  // 1152
  parameter int unsigned RC_DEPTH  = 2048,
  parameter int unsigned CCL_DEPTH = 4096,
  parameter int unsigned W_DEPTH   = NCLASS * NCLAUSE             // 1440
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [7:0]                   wr_tgt,
  input  logic [15:0]                  wr_addr,
  input  logic [23:0]                  wr_data,
  input  logic                         bi_re,
  input  logic [$clog2(BI_DEPTH)-1:0]  bi_addr,
  output logic [NMAT-1:0]              bi_data,
  input  logic [$clog2(RC_DEPTH)-1:0]  rc_addr  [NUNITS],
  output logic [2*RC_W-1:0]            rc_data  [NUNITS],
  input  logic [$clog2(CCL_DEPTH)-1:0] ccl_addr [NUNITS],
  output logic [CCL_W-1:0]             ccl_data [NUNITS],
  input  logic [$clog2(W_DEPTH)-1:0]   w_addr,
  output logic signed [WGT_W-1:0]      w_data
);
  logic [NMAT-1:0]     bi_mem  [BI_DEPTH];
  logic [2*RC_W-1:0]   rc_mem  [NUNITS][RC_DEPTH];
  logic [CCL_W-1:0]    ccl_mem [NUNITS][CCL_DEPTH];
  logic [WGT_W-1:0]    w_mem   [W_DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_tgt == TGT_BI && 32'(wr_addr) < BI_DEPTH)
        bi_mem[wr_addr[$clog2(BI_DEPTH)-1:0]] <= wr_data[NMAT-1:0];
      if (wr_tgt == TGT_WGT && 32'(wr_addr) < W_DEPTH)
        w_mem[wr_addr[$clog2(W_DEPTH)-1:0]] <= wr_data[WGT_W-1:0];
      for (int u = 0; u < int'(NUNITS); u++) begin
        if (wr_tgt == 8'(TGT_RC + u) && 32'(wr_addr) < RC_DEPTH)
          rc_mem[u][wr_addr[$clog2(RC_DEPTH)-1:0]] <= wr_data[2*RC_W-1:0];
        if (wr_tgt == 8'(TGT_CCL + u) && 32'(wr_addr) < CCL_DEPTH)
          ccl_mem[u][wr_addr[$clog2(CCL_DEPTH)-1:0]] <= wr_data[CCL_W-1:0];
      end
    end
    if (bi_re) bi_data <= bi_mem[bi_addr];
    w_data <= w_mem[w_addr];
    for (int u = 0; u < int'(NUNITS); u++) begin
      rc_data[u]  <= rc_mem[u][rc_addr[u]];
      ccl_data[u] <= ccl_mem[u][ccl_addr[u]];
    end
  end
endmodule
