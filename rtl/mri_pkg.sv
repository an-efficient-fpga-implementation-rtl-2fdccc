// Shared types and constants of the MRI filtering pipeline.
//
// Pixels are unsigned 8-bit grey levels travelling in raster order (row by row,
// left to right), one pixel per clock at most. Filter coefficients are signed
// fixed-point numbers with COEF_FRAC fractional bits, so that the paper's
// fractional masks (1/16 for the Gaussian blur, 1/8 for sharpening) and its
// integer masks (up to 10 for Scharr) are all exact. The 8-bit pixel and the
// 12-bit, 4-fraction-bit coefficient format are choices of this design; the
// paper only says that the Gateway In block converts to fixed point.
package mri_pkg;

  localparam int PIX_W     = 8;   // grey-level pixel width
  localparam int COEF_W    = 12;  // signed coefficient width
  localparam int COEF_FRAC = 4;   // fractional bits of a coefficient
  // Full-precision 9-tap sum: (PIX_W+1)-bit signed pixel times COEF_W-bit
  // coefficient, plus 4 bits of growth for the nine-term sum.
  localparam int ACC_W     = PIX_W + 1 + COEF_W + 4;

  typedef logic [PIX_W-1:0]          pix_t;
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef logic signed [ACC_W-1:0]   acc_t;

  // 3x3 neighbourhood, index 3*row + col, row 0 is the upper row and col 0 the
  // left column of the neighbourhood.
  typedef logic [8:0][PIX_W-1:0]         win_t;
  typedef logic [8:0][COEF_W-1:0]        coefs_t;

  // Which stage's stream the top sends to its output and to the ROI statistics.
  typedef enum logic [1:0] {
    TAP_BLUR    = 2'd0,  // after the Gaussian blur
    TAP_EDGE    = 2'd1,  // gradient magnitude, saturated to a pixel
    TAP_THRESH  = 2'd2,  // binary image after thresholding
    TAP_SHARPEN = 2'd3   // after edge sharpening (the full chain of Fig. 8)
  } tap_e;

  // Coefficient in the fixed-point format from a numerator over a power-of-two
  // denominator given as its log2: coef(num, 4) = num/16.
  function automatic coef_t coef(int num, int log2_den);
    return coef_t'(num <<< (COEF_FRAC - log2_den));
  endfunction

  // Clamp a signed integer value into the pixel range.
  function automatic pix_t sat_pix(logic signed [ACC_W:0] v);
    if (v < 0)                 return '0;
    else if (v > (1 << PIX_W) - 1) return '1;
    else                       return pix_t'(v);
  endfunction

endpackage
