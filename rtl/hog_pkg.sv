// hog_pkg: widths, types and small functions shared by the HOG+SVM pedestrian detector.
//
// The fixed-point formats follow the precision table of the design (width / fractional bits):
// gradient magnitude 11/3, histogram bin number 4/0, histogram value 18/4, sum of squares before
// the first normalisation 42/8, first inverse square root 24/18, feature after the first
// normalisation 10/9, second inverse square root 22/16, final feature 10/9, SVM coefficient
// 11/10 (signed), SVM bias and prediction 33/19 (signed). Pixels are 8-bit greyscale and the
// stream carries PPC = 4 pixels per clock. Cells are 8x8 pixels, blocks 2x2 cells, the detection
// window 64x128 pixels = 7x15 blocks, 9 orientation bins over 0..180 degrees.
//
// The SVM coefficients of a trained detector are not published, so svm_default_coef() gives a
// deterministic stand-in pattern; a trained set can be loaded from a hex file instead (svm_ep).
package hog_pkg;

  localparam int unsigned PPC        = 4;   // pixels per clock
  localparam int unsigned PIX_W      = 8;   // greyscale pixel
  localparam int unsigned CELL       = 8;   // cell size in pixels
  localparam int unsigned NBINS      = 9;   // orientation bins
  localparam int unsigned WIN_BX     = 7;   // window width in blocks
  localparam int unsigned WIN_BY     = 15;  // window height in blocks
  localparam int unsigned BLK_FEAT   = 4 * NBINS; // 36 features per block

  localparam int unsigned MAG_W      = 11;  // magnitude, 3 fractional bits
  localparam int unsigned MAG_FRAC   = 3;
  localparam int unsigned BIN_W      = 4;   // bin number
  localparam int unsigned HIST_W     = 18;  // histogram value, 4 fractional bits
  localparam int unsigned HIST_FRAC  = 4;
  localparam int unsigned SQ1_W      = 42;  // block sum of squares, 8 fractional bits
  localparam int unsigned SQ1_FRAC   = 8;
  localparam int unsigned ISQ1_W     = 24;  // first inverse sqrt, 18 fractional bits
  localparam int unsigned ISQ1_FRAC  = 18;
  localparam int unsigned FEAT_W     = 10;  // normalised feature, 9 fractional bits
  localparam int unsigned FEAT_FRAC  = 9;
  localparam int unsigned SQ2_W      = 26;  // sum of 36 squared features, 18 fractional bits
  localparam int unsigned SQ2_FRAC   = 18;
  localparam int unsigned ISQ2_W     = 22;  // second inverse sqrt, 16 fractional bits
  localparam int unsigned ISQ2_FRAC  = 16;
  localparam int unsigned COEF_W     = 11;  // SVM coefficient, signed, 10 fractional bits
  localparam int unsigned COEF_FRAC  = 10;
  localparam int unsigned SCORE_W    = 33;  // SVM bias / prediction, signed, 19 fractional bits
  localparam int unsigned SCORE_FRAC = 19;
  localparam int unsigned COORD_W    = 12;  // pixel / cell / block coordinates (up to 4095)

  // Threshold of the L2-Hys clipping, 0.2 in the 10/9 feature format (floor(0.2*512)).
  localparam logic [FEAT_W-1:0] FEAT_CLIP = FEAT_W'(102);

  typedef logic [PIX_W-1:0]        pix_t;
  typedef logic [MAG_W-1:0]        mag_t;
  typedef logic [BIN_W-1:0]        bin_t;
  typedef logic [HIST_W-1:0]       hist_t;
  typedef logic [FEAT_W-1:0]       feat_t;
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic [COORD_W-1:0]      coord_t;

  typedef hist_t [NBINS-1:0]       cell_hist_t;    // one 9-bin histogram
  typedef feat_t [BLK_FEAT-1:0]    block_feat_t;   // one 36-element block feature vector
  typedef feat_t [NBINS-1:0]       cell_feat_t;    // a quarter of it (one cell)

  // One 3x3 neighbourhood: ctx[row][col], row 0 = line above, col 0 = pixel to the left.
  typedef pix_t [2:0][2:0]         ctx3_t;

  // Gradient result of one pixel: magnitude and the lower of the two adjacent bins.
  typedef struct packed {
    mag_t mag;
    bin_t bin;
  } grad_t;

  // Deterministic stand-in SVM coefficient for window block (by, bx), feature index f.
  // Signed, in the 11-bit coefficient range, roughly zero mean.
  function automatic coef_t svm_default_coef(int unsigned by, int unsigned bx, int unsigned f);
    int unsigned h;
    h = (by * 7 + bx) * 36 + f;
    h = (h * 32'd2654435761) ^ (h >> 3);
    h = h ^ (h >> 13);
    return coef_t'($signed(h[10:0]) >>> 2);
  endfunction

endpackage
