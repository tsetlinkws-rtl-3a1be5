// ctm_accelerator: the state-driven convolutional Tsetlin machine engine.
//
// Holds the feature bank, the model bank, the OG-BCSR decoder, the
// distributor, the 58x5 PE array, the summation unit and the argmax unit,
// and sequences an inference: for each of the 12 classes, 3 batches (rounds)
// of 40 clauses; in each batch the Pand registers are set to 1, the 32
// blocks of two feature rows are walked in order, and then the 40 clause
// results are passed serially to the summation unit. After the third batch
// of a class its confidence goes to the argmax; after the last class the
// result is latched and `inf_done` pulses for one clock. The batch/block
// structure, the synchronous block walk and the serial 40-clause summation
// follow the paper; the clocking below is this design's.
//
// Block pipeline: the feature-bank word and block-index word of block b+1
// are read in the first run clock of block b. In the clock where every
// decoder unit issues its last TA of block b, the decoder loads block b+1's
// index bits, so decoding continues without a gap; the distributor's scratch
// pads take block b+1's rows one clock later, when the last TA of block b has
// been applied. A block therefore costs max(2, max_u TAs of unit u) clocks
// (the floor of 2 because the next block's words arrive one clock after the
// fetch). Per batch add 1 set-up clock (Pand clear and first fetch), 1 clock
// to load block 0, 1 drain clock and 40 summation clocks; per class 1 argmax
// clock; per inference 1 done clock.
// All model memories are read strictly in order, so their pointers only
// reset at `start` (this is what lets the decoder prefetch).
// While `busy` is low the feature extractor may write the feature bank
// through fb_we/fb_addr/fb_half/fb_wdata.
// rst_n also appears in the assertions' `disable iff`; lint tools may call
// that a synchronous use of an asynchronous reset, but it is not logic.
module ctm_accelerator
  import tkws_pkg::*;
#(
  parameter int unsigned RC_DEPTH  = 2048,
  parameter int unsigned CCL_DEPTH = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  // model load (from SPI)
  input  logic                mw_en,
  input  logic [7:0]          mw_tgt,
  input  logic [15:0]         mw_addr,
  input  logic [23:0]         mw_data,
  // feature bank load (from the feature extractor)
  input  logic                fb_we,
  input  logic [4:0]          fb_addr,
  input  logic                fb_half,
  input  logic [NFRAMES-1:0]  fb_wdata,
  // control and result
  input  logic                start,
  output logic                busy,
  output logic                inf_done,
  output logic [3:0]          result,
  output logic [15:0]         last_cycles
);
  localparam int unsigned BI_DEPTH = NCLASS * NROUNDS * NBLOCKS;
  localparam int unsigned W_DEPTH  = NCLASS * NCLAUSE;
  localparam int unsigned RC_AW    = $clog2(RC_DEPTH);
  localparam int unsigned CCL_AW   = $clog2(CCL_DEPTH);
  localparam int unsigned BI_AW    = $clog2(BI_DEPTH);
  localparam int unsigned W_AW     = $clog2(W_DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_BATCH, S_LOAD, S_RUN, S_DRAIN, S_SUM, S_CLASS, S_DONE
  } state_e;

  state_e state;
  logic [3:0]  cls;
  logic [1:0]  rnd;
  logic [4:0]  blk;
  logic [5:0]  j;
  logic [BI_AW-1:0] bi_ptr;
  logic [W_AW-1:0]  w_ptr, w_addr;
  logic [15:0] cyc;

  logic        ptr_clear, fetch, load, first_run, pe_clear, sum_clear, sum_valid, arg_valid;
  logic        fb_en;
  logic [4:0]  fb_a, fetch_blk;
  logic [2*NFRAMES-1:0] fb_rdata;
  logic [NMAT-1:0]      bi_data;
  logic [2*RC_W-1:0]    rc_data  [NUNITS];
  logic [CCL_W-1:0]     ccl_data [NUNITS];
  logic [RC_AW-1:0]     rc_addr  [NUNITS];
  logic [CCL_AW-1:0]    ccl_addr [NUNITS];
  ta_t                  ta       [NUNITS];
  logic [NWIN-1:0]      lit      [NUNITS];
  logic [NWIN-1:0]      rd_pand;
  logic                 dec_fin, dec_idle, fired;
  logic signed [WGT_W-1:0] w_data;
  logic signed [SUM_W-1:0] cls_sum, best_sum;
  logic [3:0]              best_idx;

  // ---------------- control decode ----------------
  always_comb begin
    ptr_clear = (state == S_IDLE) && start;
    pe_clear  = (state == S_BATCH);
    sum_clear = (state == S_BATCH) && (rnd == 2'd0);
    fetch     = (state == S_BATCH) || (first_run && blk != 5'(NBLOCKS-1));
    fetch_blk = (state == S_BATCH) ? 5'd0 : blk + 5'd1;
    load      = (state == S_LOAD) ||
                (state == S_RUN && dec_fin && !first_run && blk != 5'(NBLOCKS-1));
    sum_valid = (state == S_SUM);
    arg_valid = (state == S_CLASS);
    fb_en     = fetch || fb_we;
    fb_a      = busy ? fetch_blk : fb_addr;
    w_addr    = ptr_clear ? '0 : (sum_valid ? w_ptr + 1'b1 : w_ptr);
  end

  assign busy = (state != S_IDLE);

  // ---------------- datapath ----------------
  feature_bank u_fb (
    .clk, .en(fb_en), .we(fb_we && !busy), .addr(fb_a), .whalf(fb_half),
    .wdata(fb_wdata), .rdata(fb_rdata)
  );

  model_bank #(.RC_DEPTH(RC_DEPTH), .CCL_DEPTH(CCL_DEPTH)) u_mb (
    .clk, .wr_en(mw_en), .wr_tgt(mw_tgt), .wr_addr(mw_addr), .wr_data(mw_data),
    .bi_re(fetch), .bi_addr(bi_ptr), .bi_data,
    .rc_addr, .rc_data, .ccl_addr, .ccl_data,
    .w_addr, .w_data
  );

  ogbcsr_decoder #(.RC_AW(RC_AW), .CCL_AW(CCL_AW)) u_dec (
    .clk, .rst_n, .ptr_clear, .blk_load(load), .bi_word(bi_data),
    .rc_data, .ccl_data, .rc_addr, .ccl_addr, .ta,
    .finishing(dec_fin), .idle(dec_idle)
  );

  distributor u_dist (
    .clk, .load(first_run), .load_blk(blk), .load_data(fb_rdata), .ta, .lit
  );

  pe_array u_pe (
    .clk, .clear(pe_clear), .ta, .lit, .rd_sel(j), .rd_pand
  );

  summation u_sum (
    .clk, .rst_n, .clear(sum_clear), .valid(sum_valid), .pand(rd_pand),
    .weight(w_data), .sum(cls_sum), .fired
  );

  argmax u_arg (
    .clk, .rst_n, .valid(arg_valid), .first(cls == 4'd0), .idx(cls), .sum(cls_sum),
    .best_idx, .best_sum
  );

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cls <= '0; rnd <= '0; blk <= '0; j <= '0;
      bi_ptr <= '0; w_ptr <= '0; cyc <= '0; inf_done <= 1'b0; result <= '0; first_run <= 1'b0;
      last_cycles <= '0;
    end else begin
      inf_done  <= 1'b0;
      first_run <= load;
      w_ptr     <= w_addr;
      if (busy) cyc <= cyc + 16'd1;
      if (fetch) bi_ptr <= bi_ptr + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cls <= '0; rnd <= '0; bi_ptr <= '0; cyc <= 16'd1;
          state <= S_BATCH;
        end
        S_BATCH: begin blk <= '0; state <= S_LOAD; end
        S_LOAD:  state <= S_RUN;
        S_RUN: if (dec_fin && !first_run) begin
          if (blk == 5'(NBLOCKS-1)) state <= S_DRAIN;
          else blk <= blk + 5'd1;
        end
        S_DRAIN: begin j <= '0; state <= S_SUM; end
        S_SUM: begin
          j <= j + 6'd1;
          if (j == 6'(NCLB-1)) begin
            if (rnd == 2'(NROUNDS-1)) state <= S_CLASS;
            else begin rnd <= rnd + 2'd1; state <= S_BATCH; end
          end
        end
        S_CLASS: begin
          rnd <= '0;
          if (cls == 4'(NCLASS-1)) state <= S_DONE;
          else begin cls <= cls + 4'd1; state <= S_BATCH; end
        end
        S_DONE: begin
          result      <= best_idx;
          inf_done    <= 1'b1;
          last_cycles <= cyc;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) fb_we |-> !busy)
    else $error("ctm_accelerator: feature bank written during an inference");
  assert property (@(posedge clk) disable iff (!rst_n) load |-> dec_fin)
    else $error("ctm_accelerator: block loaded before the decoder finished");
  assert property (@(posedge clk) disable iff (!rst_n) state == S_BATCH |-> dec_idle)
    else $error("ctm_accelerator: decoder busy at batch start");
endmodule
