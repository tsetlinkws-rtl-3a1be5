// ogbcsr_decoder: the five parallel OG-BCSR decompression units (S1-S3).
//
// A batch of 40 clauses is stored as 20 merged TA matrices; for each block
// (two feature rows) the 20-bit block-index word says which matrices have
// included TAs there. The word is split into five groups of four matrices,
// group u going to unit u (matrices 4u..4u+3), so the 20 matrices time-share
// five decoders and five PE columns instead of twenty. All units work on the
// same block; `finishing` rises when every unit issues its last TA of the
// block (or has none), so the next block can be loaded in that clock.
module ogbcsr_decoder
  import tkws_pkg::*;
#(
  parameter int unsigned RC_AW  = 11,
  parameter int unsigned CCL_AW = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ptr_clear,
  input  logic                blk_load,
  input  logic [NMAT-1:0]     bi_word,
  input  logic [2*RC_W-1:0]   rc_data  [NUNITS],
  input  logic [CCL_W-1:0]    ccl_data [NUNITS],
  output logic [RC_AW-1:0]    rc_addr  [NUNITS],
  output logic [CCL_AW-1:0]   ccl_addr [NUNITS],
  output ta_t                 ta       [NUNITS],
  output logic                finishing,
  output logic                idle
);
  logic [NUNITS-1:0] fin, idl;

  for (genvar u = 0; u < int'(NUNITS); u++) begin : g_unit
    ogbcsr_unit #(.RC_AW(RC_AW), .CCL_AW(CCL_AW)) u_unit (
      .clk, .rst_n, .ptr_clear, .blk_load,
      .blk_bits (bi_word[GRP*u +: GRP]),
      .rc_data  (rc_data[u]),
      .ccl_data (ccl_data[u]),
      .rc_addr  (rc_addr[u]),
      .ccl_addr (ccl_addr[u]),
      .ta       (ta[u]),
      .finishing(fin[u]),
      .idle     (idl[u])
    );
  end

  assign finishing = &fin;
  assign idle      = &idl;
endmodule
