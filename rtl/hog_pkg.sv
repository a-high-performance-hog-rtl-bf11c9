// hog_pkg: types, sizes and helper functions shared by the HOG extractor.
//
// The pipeline works on a pixel stream in raster order, one pixel per clock at
// most. Every stage carries a `valid` strobe and a `sof` (start of frame) flag
// that marks the first element of a frame; stages count positions themselves.
// Widths follow the block diagram of the extractor: 12-bit raw pixels, 8-bit
// grayscale, 9-bit signed gradients, a 15-bit magnitude with 6 fractional bits,
// a 16-bit orientation in radians with 13 fractional bits, 9-bit votes,
// 15-bit cell bins and 32-bit single-precision normalised features.
package hog_pkg;

  localparam int unsigned CELL   = 8;   // cell edge in pixels
  localparam int unsigned NBINS  = 9;   // orientation bins over 0..180 degrees
  localparam int unsigned NCELLB = 4;   // cells per block (2 x 2)
  localparam int unsigned NFEAT  = NBINS * NCELLB;  // 36 features per block

  typedef logic        [11:0] raw_t;    // raw Bayer pixel
  typedef logic        [7:0]  gray_t;   // grayscale pixel
  typedef logic signed [8:0]  grad_t;   // Gx / Gy
  typedef logic        [14:0] mag_t;    // |G|, unsigned 9.6
  typedef logic signed [15:0] ang_t;    // orientation, signed 3.13 radians
  typedef logic        [8:0]  vote_t;   // one bin vote of one pixel
  typedef logic        [14:0] cbin_t;   // one bin of a cell histogram

  typedef vote_t [NBINS-1:0] votes_t;   // bin8 .. bin0 of one pixel
  typedef cbin_t [NBINS-1:0] cell_t;    // cell hog, 135 bits
  typedef logic [NFEAT-1:0][31:0] feat_t;  // cell3_bin8 .. cell0_bin0

  // pi with 13 fractional bits (orientation format)
  localparam int PI_Q13 = 25736;

  // Unsigned fixed point value with 24 fractional bits (0 .. 1.0, held in 25
  // bits) to IEEE-754 single precision. The mantissa is truncated.
  function automatic logic [31:0] fix_to_float(input logic [24:0] v);
    logic [7:0]  e;
    logic [24:0] n;
    int          msb;
    msb = -1;
    for (int i = 0; i < 25; i++) if (v[i]) msb = i;
    if (msb < 0) return 32'h0;
    n = v << (24 - msb);
    e = 8'(127 + msb - 24);
    return {1'b0, e, n[23:1]};
  endfunction

endpackage
