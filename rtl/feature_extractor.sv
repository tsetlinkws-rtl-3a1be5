// feature_extractor: the MFSC-SF front end, from microphone to feature map.
//
// Chain (paper's order): I2S master -> pre-emphasis (frame-clock domain) ->
// 256x12b async FIFO -> 256-point R2SDF FFT -> swap unit (|Re|+|Im|, 128
// bins in natural order) -> 32 rectangular Mel filters with ping-pong
// buffers -> overlap unit (MFSC = sum, SF = difference of adjacent
// subframes) -> binarizer (SF fixed threshold, MFSC running-mean threshold).
// Subframes do not overlap (256 samples = 16 ms); the 50% overlap is applied
// after the Mel filters, so one feature frame is produced per subframe once
// two subframes have been seen.
//
// Feature-map hand-over (this design's sequencing): after a frame is stored,
// if auto_infer is set and at least min_frames frames are stored, or when
// infer_req arrives, the 64 binary rows are read out of the binarizer and
// written into the accelerator's feature bank (row r -> word r/2, half r%2),
// then infer_start pulses. If the accelerator is still busy the request is
// dropped and infer_skip pulses. The read-out never overlaps a frame update.
// When fe_enable is low, incoming samples are discarded.
module feature_extractor
  import tkws_pkg::*;
(
  input  logic               mclk,
  input  logic               clk,
  input  logic               rst_n,
  input  logic               adc_sdata,
  output logic               bclk,
  output logic               lrclk,
  input  logic               fe_enable,
  input  logic               auto_infer,
  input  logic [15:0]        sf_thr,
  input  logic [6:0]         min_frames,
  input  logic               infer_req,
  input  logic               acc_busy,
  output logic               fb_we,
  output logic [4:0]         fb_addr,
  output logic               fb_half,
  output logic [NFRAMES-1:0] fb_wdata,
  output logic               infer_start,
  output logic               infer_skip,
  output logic               fifo_overflow,
  output logic [6:0]         n_frames
);
  // ---------------- audio capture (mclk / lrclk domains) ----------------
  logic signed [SAMPLE_W-1:0] sample, pre_y;
  logic                       sample_valid, pre_valid;

  i2s_master u_i2s (
    .mclk, .rst_n, .sdata(adc_sdata), .bclk, .lrclk, .sample, .sample_valid
  );

  pre_emphasis u_pre (
    .clk(lrclk), .rst_n, .x(sample), .y(pre_y), .y_valid(pre_valid)
  );

  logic [SAMPLE_W-1:0] fifo_q;
  logic                fifo_empty, fifo_full, fifo_pop;
  logic [8:0]          fifo_count;

  async_fifo #(.DW(SAMPLE_W), .DEPTH(NFFT)) u_fifo (
    .wclk(lrclk), .wrst_n(rst_n), .w_en(pre_valid), .w_data(pre_y),
    .w_full(fifo_full), .w_overflow(fifo_overflow),
    .rclk(clk), .rrst_n(rst_n), .r_en(fifo_pop), .r_data(fifo_q),
    .r_empty(fifo_empty), .r_count(fifo_count)
  );

  // ---------------- spectral path (system clock) ----------------
  logic               fft_in_valid, fft_in_ready, fft_ov, fft_last;
  logic [7:0]         fft_bin;
  logic signed [14:0] fft_re, fft_im;

  assign fft_in_valid = fe_enable && !fifo_empty;
  assign fifo_pop     = !fifo_empty && (!fe_enable || fft_in_ready);

  fft_r2sdf u_fft (
    .clk, .rst_n, .in_valid(fft_in_valid), .in_ready(fft_in_ready),
    .in_sample(signed'(fifo_q)), .out_valid(fft_ov), .out_bin(fft_bin),
    .out_re(fft_re), .out_im(fft_im), .out_last(fft_last)
  );

  logic             sw_valid, sw_last;
  logic [6:0]       sw_bin;
  logic [MAG_W-1:0] sw_mag;

  swap_unit u_swap (
    .clk, .rst_n, .in_valid(fft_ov), .in_bin(fft_bin), .in_re(fft_re), .in_im(fft_im),
    .out_valid(sw_valid), .out_bin(sw_bin), .out_mag(sw_mag), .out_last(sw_last)
  );

  logic             mel_done, mel_have_prev;
  logic [4:0]       mel_idx;
  logic [MEL_W-1:0] mel_cur, mel_prev;

  mel_filter u_mel (
    .clk, .rst_n, .in_valid(sw_valid), .in_bin(sw_bin), .in_mag(sw_mag),
    .in_last(sw_last), .frame_done(mel_done), .have_prev(mel_have_prev),
    .rd_idx(mel_idx), .rd_cur(mel_cur), .rd_prev(mel_prev)
  );

  logic                  ov_valid, ov_last, ov_busy;
  logic [4:0]            ov_coef;
  logic [MEL_W-1:0]      ov_mfsc;
  logic signed [MEL_W:0] ov_sf;

  overlap_unit u_ovl (
    .clk, .rst_n, .start(mel_done && mel_have_prev), .rd_idx(mel_idx),
    .rd_cur(mel_cur), .rd_prev(mel_prev), .out_valid(ov_valid), .out_coef(ov_coef),
    .out_mfsc(ov_mfsc), .out_sf(ov_sf), .out_last(ov_last), .busy(ov_busy)
  );

  logic               bin_init, bin_stored, rd_start, rd_done;
  logic [5:0]         rd_row;
  logic [NFRAMES-1:0] rd_data;

  binarizer u_bin (
    .clk, .rst_n, .sf_thr, .init_busy(bin_init), .in_valid(ov_valid), .in_coef(ov_coef),
    .in_mfsc(ov_mfsc), .in_sf(ov_sf), .in_last(ov_last), .frame_stored(bin_stored),
    .n_frames, .rd_start, .rd_row, .rd_done, .rd_data
  );

  // ---------------- feature-bank loader ----------------
  typedef enum logic [1:0] {L_IDLE, L_REQ, L_WAIT} ld_e;
  ld_e        ld;
  logic       pending;
  logic [6:0] row;

  assign rd_start = (ld == L_REQ);
  assign rd_row   = row[5:0];
  assign fb_we    = (ld == L_WAIT) && rd_done;
  assign fb_addr  = row[5:1];
  assign fb_half  = row[0];
  assign fb_wdata = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld <= L_IDLE; pending <= 1'b0; row <= '0; infer_start <= 1'b0; infer_skip <= 1'b0;
    end else begin
      infer_start <= 1'b0;
      infer_skip  <= 1'b0;
      if (infer_req || (bin_stored && auto_infer && n_frames >= min_frames))
        pending <= 1'b1;
      unique case (ld)
        L_IDLE: if (pending && !ov_busy && !ov_valid && !bin_init) begin
          pending <= 1'b0;
          if (acc_busy) infer_skip <= 1'b1;
          else begin row <= '0; ld <= L_REQ; end
        end
        L_REQ:  ld <= L_WAIT;
        L_WAIT: if (rd_done) begin
          if (row == 7'(NROWS-1)) begin
            ld          <= L_IDLE;
            infer_start <= 1'b1;
          end else begin
            row <= row + 7'd1;
            ld  <= L_REQ;
          end
        end
        default: ld <= L_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{fifo_full, fifo_count, sample_valid, fft_last};
endmodule
