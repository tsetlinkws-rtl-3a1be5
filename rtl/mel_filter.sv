// mel_filter: rectangular Mel filter bank with ping-pong output buffers.
//
// The 32 filters are rectangles of unity gain, so each filter output is just
// the sum of the magnitudes of the bins it covers; no multiplier is needed.
// Filter m covers bins [MEL_EDGE[m], MEL_EDGE[m+2]) (see tkws_pkg), so the
// even filters tile the spectrum, the odd ones too, and every bin feeds one
// even and one odd filter. As in the paper, two accumulator registers
// compute the even and the odd filters; when a bin is the last of its
// filter the sum is written to the ping-pong buffer of the current frame.
// Sums saturate at 16 bits (this design's choice). Bins must arrive in
// natural order 0..127, one per valid, with in_last on bin 127.
//
// The two 32x16b ping-pong buffers hold the current and the previous frame.
// After in_last, `frame_done` pulses for one clock; from then on rd_cur and
// rd_prev give filter rd_idx of the newest and the previous frame
// (combinational read), and `have_prev` says whether a previous frame exists.
module mel_filter
  import tkws_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [6:0]         in_bin,
  input  logic [MAG_W-1:0]   in_mag,
  input  logic               in_last,
  output logic               frame_done,
  output logic               have_prev,
  input  logic [4:0]         rd_idx,
  output logic [MEL_W-1:0]   rd_cur,
  output logic [MEL_W-1:0]   rd_prev
);
  logic [MEL_W-1:0] pp [2][NMEL];
  logic             wsel;          // buffer being written (= newest after done)
  logic [MEL_W-1:0] acc_e, acc_o, sum_e, sum_o;
  logic [4:0]       m_e, m_o;      // filter the bin belongs to
  logic             has_e, has_o, last_e, last_o;
  logic             seen1;

  function automatic logic [MEL_W-1:0] sat_add(input logic [MEL_W-1:0] a,
                                               input logic [MAG_W-1:0] b);
    logic [MEL_W:0] s;
    s = (MEL_W+1)'(a) + (MEL_W+1)'(b);
    return s[MEL_W] ? {MEL_W{1'b1}} : s[MEL_W-1:0];
  endfunction

  // which even / odd filter a bin falls in, and whether it is its last bin
  always_comb begin
    m_e = '0; m_o = '0; has_e = 1'b0; has_o = 1'b0; last_e = 1'b0; last_o = 1'b0;
    for (int m = 0; m < int'(NMEL); m++) begin
      if (int'(in_bin) >= MEL_EDGE[m] && int'(in_bin) < MEL_EDGE[m+2]) begin
        if (m % 2 == 0) begin
          m_e = 5'(m); has_e = 1'b1; last_e = (int'(in_bin) == MEL_EDGE[m+2] - 1);
        end else begin
          m_o = 5'(m); has_o = 1'b1; last_o = (int'(in_bin) == MEL_EDGE[m+2] - 1);
        end
      end
    end
    sum_e = sat_add(acc_e, in_mag);
    sum_o = sat_add(acc_o, in_mag);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_e <= '0; acc_o <= '0; wsel <= 1'b0; frame_done <= 1'b0;
      seen1 <= 1'b0; have_prev <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int m = 0; m < int'(NMEL); m++) pp[b][m] <= '0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid) begin
        if (has_e) begin
          if (last_e) begin pp[~wsel][m_e] <= sum_e; acc_e <= '0; end
          else acc_e <= sum_e;
        end
        if (has_o) begin
          if (last_o) begin pp[~wsel][m_o] <= sum_o; acc_o <= '0; end
          else acc_o <= sum_o;
        end
        if (in_last) begin
          wsel       <= ~wsel;
          frame_done <= 1'b1;
          seen1      <= 1'b1;
          have_prev  <= seen1;
          acc_e      <= '0;
          acc_o      <= '0;
        end
      end
    end
  end

  // wsel toggles at the end of a frame, so after it the newest frame is in
  // pp[wsel] and the previous one in pp[~wsel]; writes go to pp[~wsel].
  assign rd_cur  = pp[wsel][rd_idx];
  assign rd_prev = pp[~wsel][rd_idx];
endmodule
