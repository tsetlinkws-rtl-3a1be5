// distributor: forms the sliding literal data for the PE columns.
//
// It keeps the two feature rows of the current block in SPad0 (upper row,
// 2*blk) and SPad1 (lower row, 2*blk+1), loaded from one feature-bank word.
// For each unit's decoded TA it selects the row by row_sel and, from the
// column index c, the 58 bits that kernel column c covers while the 64x7
// kernel slides over 64 frames: bit w (window w) = row[w + c]. This is the
// paper's state-driven strategy: only included TAs fetch data, and one row
// read serves all 58 windows.
// Column layout of the 64x16 TA matrix (this design's reading of "positional
// TAs ... concatenated into the matrix"): columns 0..6 are the kernel's
// frames, column 7 a positional literal, columns 8..15 their negations.
// The positional literal of row r is the thermometer bit "window index > r",
// as in convolutional TMs that encode the patch position in thermometer code.
// Purely combinational apart from the two scratch pads.
module distributor
  import tkws_pkg::*;
(
  input  logic                  clk,
  input  logic                  load,
  input  logic [4:0]            load_blk,
  input  logic [2*NFRAMES-1:0]  load_data,
  input  ta_t                   ta  [NUNITS],
  output logic [NWIN-1:0]       lit [NUNITS]
);
  logic [NFRAMES-1:0] spad0, spad1;
  logic [4:0]         blk;

  always_ff @(posedge clk) begin
    if (load) begin
      spad0 <= load_data[NFRAMES-1:0];
      spad1 <= load_data[2*NFRAMES-1:NFRAMES];
      blk   <= load_blk;
    end
  end

  always_comb begin
    for (int u = 0; u < int'(NUNITS); u++) begin
      logic [NFRAMES-1:0] row;
      logic [5:0]         r;
      logic [2:0]         k;
      row = ta[u].row_sel ? spad1 : spad0;
      r   = {blk, ta[u].row_sel};
      k   = ta[u].col[2:0];
      for (int w = 0; w < int'(NWIN); w++) begin
        logic b;
        if (k == 3'd7) b = (6'(w) > r);
        else           b = row[w + int'(k)];
        lit[u][w] = ta[u].col[3] ? ~b : b;
      end
    end
  end
endmodule
