// tkws_pkg: constants and types shared by the keyword-spotting datapath.
//
// Sizes that come from the paper: 256-sample subframes, 128 kept FFT bins,
// 32 Mel coefficients plus 32 spectral-flux coefficients (64 feature rows),
// 64 frames per feature map, a 64x7 convolution kernel (58 windows), a TA
// action matrix of 64 rows x 16 columns, two rows per block (32 blocks),
// 20 merged matrices per batch (40 clauses) shared by 5 decoder/PE columns,
// 3 rounds per class (120 clauses) and 12 classes.
// Sizes that are this design's own choice: clause weight width, class sum
// width, memory depths, and the Mel band edges (see MEL_EDGE).
package tkws_pkg;

  // ---------------- feature extraction ----------------
  localparam int unsigned SAMPLE_W   = 12;   // audio sample width
  localparam int unsigned NFFT       = 256;  // subframe length / FFT size
  localparam int unsigned NBINS      = 128;  // magnitude bins kept
  localparam int unsigned MAG_W      = 15;   // |Re|+|Im| width (Swap SRAM 128x15b)
  localparam int unsigned NMEL       = 32;   // Mel coefficients
  localparam int unsigned MEL_W      = 16;   // Mel / MFSC / SF width
  localparam int unsigned NFRAMES    = 64;   // frames per feature map (and mean batch)
  localparam int unsigned NROWS      = 64;   // feature-map rows: 32 MFSC + 32 SF

  // Rectangular Mel filter m covers bins [MEL_EDGE[m], MEL_EDGE[m+2]).
  // Edges: 34 points equally spaced on the mel scale
  // mel(f) = 2595*log10(1+f/700) between 0 Hz and 8 kHz, converted to bins
  // of 62.5 Hz by bin = floor(f/62.5).
  localparam int MEL_EDGE [0:NMEL+1] = '{
    0, 0, 1, 2, 4, 5, 6, 7, 9, 11, 12, 14, 16, 19, 21, 24, 26,
    29, 33, 36, 40, 44, 48, 53, 58, 64, 70, 76, 83, 91, 99, 108, 117, 128};


  // ---------------- FFT twiddles ----------------
  // Twiddle factors W^k = cos(2*pi*k/256) - j*sin(2*pi*k/256) in signed
  // 12-bit Q2.10 (1.0 = 1024). They are computed at elaboration time with an
  // integer Taylor series, so no table file is needed.
  localparam int unsigned TW_W = 12;
  localparam int unsigned TW_F = 10;

  // sin and cos of pi*k/128 for 0 <= k <= 64, scaled by 2^30
  function automatic longint trig_q30(input int k, input bit want_cos);
    longint x, x2, term, sum;
    x    = (64'sd3373259426 * longint'(k)) / 128;   // pi*2^30 * k/128
    x2   = (x * x) >>> 30;
    term = want_cos ? (64'sd1 <<< 30) : x;
    sum  = term;
    for (int n = 1; n < 14; n++) begin
      if (want_cos) term = -((term * x2) >>> 30) / ((2*n-1) * (2*n));
      else          term = -((term * x2) >>> 30) / ((2*n) * (2*n+1));
      sum += term;
    end
    return sum;
  endfunction

  // round(2^TW_F * cos(2*pi*k/256)), k in 0..127
  function automatic int tw_cos(input int k);
    longint v;
    if (k <= 64) v =  trig_q30(k, 1'b1);
    else         v = -trig_q30(128 - k, 1'b1);
    return int'((v + (64'sd1 <<< (29 - TW_F))) >>> (30 - TW_F));
  endfunction

  // round(2^TW_F * sin(2*pi*k/256)), k in 0..127
  function automatic int tw_sin(input int k);
    longint v;
    if (k <= 64) v = trig_q30(k, 1'b0);
    else         v = trig_q30(128 - k, 1'b0);
    return int'((v + (64'sd1 <<< (29 - TW_F))) >>> (30 - TW_F));
  endfunction

  function automatic logic [7:0] bitrev8(input logic [7:0] v);
    for (int i = 0; i < 8; i++) bitrev8[i] = v[7-i];
  endfunction

  // ---------------- CTM model geometry ----------------
  localparam int unsigned KW         = 7;                 // kernel width (frames)
  localparam int unsigned NWIN       = NFRAMES - KW + 1;  // 58 sliding windows
  localparam int unsigned NCOLS      = 16;                // TA matrix columns
  localparam int unsigned NBLOCKS    = NROWS / 2;         // 32 two-row blocks
  localparam int unsigned NUNITS     = 5;                 // decoder units = PE columns
  localparam int unsigned GRP        = 4;                 // matrices per unit per batch
  localparam int unsigned NMAT       = NUNITS * GRP;      // 20 merged matrices per batch
  localparam int unsigned NCLB       = 2 * NMAT;          // 40 clauses per batch
  localparam int unsigned NROUNDS    = 3;                 // batches per class
  localparam int unsigned NCLAUSE    = NCLB * NROUNDS;    // 120 clauses per class
  localparam int unsigned NCLASS     = 12;

  // ---------------- model memory words ----------------
  localparam int unsigned RC_W       = 3;    // row count per row (<= 7)
  localparam int unsigned COL_W      = 4;    // column index
  localparam int unsigned CCL_W      = COL_W + 1;  // column + clause-in-pair bit
  localparam int unsigned WGT_W      = 8;    // clause weight (signed)
  localparam int unsigned SUM_W      = 16;   // class confidence (signed)

  // SPI write targets (first byte of a frame)
  typedef enum logic [7:0] {
    TGT_CFG = 8'h00,
    TGT_BI  = 8'h01,
    TGT_RC  = 8'h10,   // 8'h10 + unit
    TGT_CCL = 8'h20,   // 8'h20 + unit
    TGT_WGT = 8'h30
  } spi_target_e;

  // one decoded included TA, handed from the decoder to distributor/PE array
  typedef struct packed {
    logic                 valid;
    logic                 row_sel;   // which row of the block
    logic [COL_W-1:0]     col;       // column index in the TA matrix
    logic [1:0]           code;      // which of the unit's 4 matrices
    logic                 clause;    // which clause of the merged pair
  } ta_t;

endpackage
