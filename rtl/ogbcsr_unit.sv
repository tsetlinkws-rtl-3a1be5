// ogbcsr_unit: one of the five OG-BCSR decompression units.
//
// A unit owns four of the 20 merged TA matrices of a batch. At `blk_load` it
// takes their four block-index bits (S1). A priority encoder picks the
// lowest-numbered pending matrix and gives its 2-bit code; the unit takes
// that matrix's two 3-bit row counts from its row-count bank (S2), then
// emits one included TA per clock, first the TAs of the block's upper row,
// then of the lower row, decrementing the count; each TA takes the next
// column/clause word from its CCL bank (S3). When both counts reach zero the
// next pending matrix starts in the following clock.
// Both banks are read sequentially, so this design keeps their next word
// prefetched (rc_addr / ccl_addr give the pointer for the next clock):
// matrix and block changes cost no idle clock. The TA leaves through the
// registered `ta` output one clock after it is issued and updates the PE
// array at the following edge (S4).
// `finishing` is high in the clock that issues the unit's last TA of the
// block, and whenever the unit has nothing left to issue; the next block may
// be loaded (blk_load) in that same clock, so blocks follow without a gap.
module ogbcsr_unit
  import tkws_pkg::*;
#(
  parameter int unsigned RC_AW  = 11,
  parameter int unsigned CCL_AW = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ptr_clear,   // start of an inference
  input  logic                blk_load,
  input  logic [GRP-1:0]      blk_bits,
  input  logic [2*RC_W-1:0]   rc_data,     // = rc bank[rc_ptr]
  input  logic [CCL_W-1:0]    ccl_data,    // = ccl bank[ccl_ptr]
  output logic [RC_AW-1:0]    rc_addr,
  output logic [CCL_AW-1:0]   ccl_addr,
  output ta_t                 ta,
  output logic                finishing,
  output logic                idle
);
  logic [GRP-1:0]    pend, pend_n;
  logic              active, active_n;
  logic [RC_W-1:0]   cnt0, cnt1, eff0, eff1, nc0, nc1;
  logic [1:0]        code_r, code_new, code_use;
  logic              start_m, issue;
  logic [RC_AW-1:0]  rc_ptr;
  logic [CCL_AW-1:0] ccl_ptr;

  // S1: priority encoder, lowest index first
  always_comb begin
    code_new = 2'd0;
    for (int i = int'(GRP) - 1; i >= 0; i--) if (pend[i]) code_new = 2'(i);
  end

  always_comb begin
    start_m  = !active && (pend != '0);
    pend_n   = pend;
    if (start_m) pend_n[code_new] = 1'b0;
    eff0     = start_m ? rc_data[RC_W-1:0]      : cnt0;
    eff1     = start_m ? rc_data[2*RC_W-1:RC_W] : cnt1;
    if (!active && !start_m) begin eff0 = '0; eff1 = '0; end
    code_use = start_m ? code_new : code_r;
    issue    = (eff0 != '0) || (eff1 != '0);
    nc0      = eff0;
    nc1      = eff1;
    if (eff0 != '0)      nc0 = eff0 - 1'b1;
    else if (eff1 != '0) nc1 = eff1 - 1'b1;
    active_n = (nc0 != '0) || (nc1 != '0);
  end

  assign finishing = (pend_n == '0) && !active_n;
  assign idle      = (pend == '0) && !active;
  assign rc_addr   = ptr_clear ? '0 : (start_m ? rc_ptr + 1'b1 : rc_ptr);
  assign ccl_addr  = ptr_clear ? '0 : (issue ? ccl_ptr + 1'b1 : ccl_ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; active <= 1'b0; cnt0 <= '0; cnt1 <= '0; code_r <= '0;
      rc_ptr <= '0; ccl_ptr <= '0; ta <= '0;
    end else begin
      ta.valid <= 1'b0;
      if (ptr_clear) begin
        pend <= '0; active <= 1'b0; rc_ptr <= '0; ccl_ptr <= '0;
      end else begin
        pend    <= blk_load ? blk_bits : pend_n;
        active  <= active_n;
        cnt0    <= nc0;
        cnt1    <= nc1;
        code_r  <= code_use;
        rc_ptr  <= rc_addr;
        ccl_ptr <= ccl_addr;
        if (issue) begin
          ta.valid   <= 1'b1;
          ta.row_sel <= (eff0 == '0);
          ta.col     <= ccl_data[CCL_W-1:1];
          ta.clause  <= ccl_data[0];
          ta.code    <= code_use;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) blk_load |-> finishing)
    else $error("ogbcsr_unit: block loaded before the last TA of the previous one");
endmodule
