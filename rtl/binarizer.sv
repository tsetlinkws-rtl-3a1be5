// binarizer: turns MFSC and SF values into the Boolean feature map.
//
// SF: |SF| > sf_thr (1024 in the paper, here a configuration input) gives one
// bit, stored in the SF scratch pad of 32 coefficients x 64 frames.
// MFSC: each coefficient is compared with its own running mean over the last
// 64 frames. The MFSC scratch pad keeps those 64 values per coefficient in
// eight banks (bank = frame mod 8, address = coef*8 + frame/8), the
// threshold bank keeps one 16-bit mean per coefficient. An update takes two
// clocks, as in the paper: clock 1 reads the old mean and the value the new
// one will replace and registers the new value; clock 2 writes
// mean + (new>>6) - (old>>6) and stores the new value. So the mean is a
// moving average of 64 frames without a divider, and every memory needs only
// one port. A frame of 32 coefficients advances the ring pointer `wp`.
//
// Read-out (rd_start/rd_row): feature row r < 32 is MFSC coefficient r, row
// 32+c is SF coefficient c. Bit j of rd_data is frame wp+j (mod 64), i.e.
// bit 0 is the oldest frame. An MFSC row takes 8 clocks, reading the eight
// banks at once and comparing each value with the mean (value > mean);
// an SF row takes one clock. rd_done pulses with rd_data valid.
//
// After reset the unit clears its memories in 256 clocks (init_busy);
// rd_* and in_* must wait. `n_frames` counts stored frames up to 64.
module binarizer
  import tkws_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [15:0]           sf_thr,
  output logic                  init_busy,
  input  logic                  in_valid,
  input  logic [4:0]            in_coef,
  input  logic [MEL_W-1:0]      in_mfsc,
  input  logic signed [MEL_W:0] in_sf,
  input  logic                  in_last,
  output logic                  frame_stored,
  output logic [6:0]            n_frames,
  input  logic                  rd_start,
  input  logic [5:0]            rd_row,
  output logic                  rd_done,
  output logic [NFRAMES-1:0]    rd_data
);
  logic [MEL_W-1:0]   spad  [8][NMEL*8];
  logic [MEL_W-1:0]   thr   [NMEL];
  logic [NFRAMES-1:0] sfpad [NMEL];

  logic [5:0]       wp;
  logic [8:0]       init_cnt;
  logic             upd, upd_last;
  logic [4:0]       coef_r;
  logic [MEL_W-1:0] new_r, old_r, thr_r;
  logic [MEL_W:0]   sf_abs;
  logic [MEL_W+1:0] thr_next;

  logic             rd_busy;
  logic [5:0]       rd_row_r;
  logic [2:0]       rd_k;
  logic [5:0]       f_idx [8];

  assign init_busy = !init_cnt[8];
  assign sf_abs    = in_sf[MEL_W] ? (MEL_W+1)'(-in_sf) : (MEL_W+1)'(in_sf);
  assign thr_next  = (MEL_W+2)'(thr_r) + (MEL_W+2)'(new_r >> 6) - (MEL_W+2)'(old_r >> 6);

  // frames read in this read-out clock: oldest first
  always_comb begin
    for (int j = 0; j < 8; j++) f_idx[j] = wp + {rd_k, 3'b000} + 6'(j);
  end

  // memories (no reset: cleared by the init sweep)
  always_ff @(posedge clk) begin
    if (init_busy) begin
      for (int b = 0; b < 8; b++) spad[b][init_cnt[7:0]] <= '0;
      thr[init_cnt[4:0]]   <= '0;
      sfpad[init_cnt[4:0]] <= '0;
    end else begin
      if (in_valid) sfpad[in_coef][wp] <= (sf_abs > (MEL_W+1)'(sf_thr));
      if (upd) begin
        thr[coef_r] <= thr_next[MEL_W+1] ? '0 :
                       (thr_next[MEL_W] ? {MEL_W{1'b1}} : thr_next[MEL_W-1:0]);
        spad[wp[2:0]][{coef_r, wp[5:3]}] <= new_r;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_cnt <= '0; wp <= '0; upd <= 1'b0; upd_last <= 1'b0; coef_r <= '0;
      new_r <= '0; old_r <= '0; thr_r <= '0; frame_stored <= 1'b0; n_frames <= '0;
      rd_busy <= 1'b0; rd_row_r <= '0; rd_k <= '0; rd_done <= 1'b0; rd_data <= '0;
    end else begin
      frame_stored <= 1'b0;
      rd_done      <= 1'b0;
      upd          <= 1'b0;
      if (init_busy) init_cnt <= init_cnt + 9'd1;
      // clock 1 of an update
      if (in_valid && !init_busy) begin
        upd      <= 1'b1;
        upd_last <= in_last;
        coef_r   <= in_coef;
        new_r    <= in_mfsc;
        old_r    <= spad[wp[2:0]][{in_coef, wp[5:3]}];
        thr_r    <= thr[in_coef];
      end
      // clock 2
      if (upd && upd_last) begin
        wp           <= wp + 6'd1;
        frame_stored <= 1'b1;
        if (n_frames != 7'(NFRAMES)) n_frames <= n_frames + 7'd1;
      end
      // read-out
      if (rd_start && !rd_busy && !init_busy) begin
        rd_row_r <= rd_row;
        rd_k     <= '0;
        rd_busy  <= 1'b1;
      end else if (rd_busy) begin
        if (rd_row_r[5]) begin
          for (int j = 0; j < int'(NFRAMES); j++)
            rd_data[j] <= sfpad[rd_row_r[4:0]][6'(wp + 6'(j))];
          rd_busy <= 1'b0;
          rd_done <= 1'b1;
        end else begin
          for (int j = 0; j < 8; j++)
            rd_data[{rd_k, 3'(j)}] <= spad[f_idx[j][2:0]][{rd_row_r[4:0], f_idx[j][5:3]}]
                                      > thr[rd_row_r[4:0]];
          rd_k <= rd_k + 3'd1;
          if (rd_k == 3'd7) begin
            rd_busy <= 1'b0;
            rd_done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(rd_busy && (in_valid || upd)))
    else $error("binarizer: read-out overlaps an update");
endmodule
