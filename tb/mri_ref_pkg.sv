// Reference model of the filtering pipeline, for the testbenches.
//
// Images are flat arrays in raster order (index row*w + col). The functions
// follow the written description of each stage, independently of the RTL
// structure: 3x3 correlation with zero padding, the pairwise AND of the
// gradient filter outputs, their sum and absolute value, a strict threshold
// and the conversion of a fixed-point sum back to a clamped pixel.
package mri_ref_pkg;
  import mri_pkg::*;

  typedef longint img_t [];
  typedef longint mask_t [9];

  // Full-precision 3x3 correlation, coefficients in COEF_FRAC fixed point.
  function automatic img_t conv3x3(img_t img, int w, int h, mask_t m);
    img_t o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        longint s = 0;
        for (int k = 0; k < 9; k++) begin
          int rr = r + k / 3 - 1, cc = c + k % 3 - 1;
          if (rr >= 0 && rr < h && cc >= 0 && cc < w) s += m[k] * img[rr * w + cc];
        end
        o[r * w + c] = s;
      end
    return o;
  endfunction

  // Fixed-point value to pixel: drop fraction bits (towards minus infinity)
  // and clamp to 0..255.
  function automatic longint to_pix(longint v);
    longint q = v >>> COEF_FRAC;
    if (q < 0) return 0;
    if (q > 255) return 255;
    return q;
  endfunction

  function automatic img_t map_pix(img_t a);
    img_t o = new[a.size()];
    foreach (a[i]) o[i] = to_pix(a[i]);
    return o;
  endfunction

  // Edge strength: |(F0 & F1) + (F2 & F3)| on two's complement values.
  function automatic img_t gradient(img_t img, int w, int h, mask_t f0, mask_t f1,
                                    mask_t f2, mask_t f3);
    img_t a = conv3x3(img, w, h, f0), b = conv3x3(img, w, h, f1);
    img_t c = conv3x3(img, w, h, f2), d = conv3x3(img, w, h, f3);
    img_t o = new[w * h];
    foreach (o[i]) begin
      longint s = (a[i] & b[i]) + (c[i] & d[i]);
      o[i] = (s < 0) ? -s : s;
    end
    return o;
  endfunction

  function automatic img_t threshold(img_t mag, longint thr);
    img_t o = new[mag.size()];
    foreach (mag[i]) o[i] = (mag[i] > thr) ? 255 : 0;
    return o;
  endfunction

  // Masks of the paper, in COEF_FRAC = 4 fixed point (value * 16).
  localparam mask_t GAUSS   = '{16/16, 32/16, 16/16, 32/16, 64/16, 32/16, 16/16, 32/16, 16/16};
  localparam mask_t SHARPEN = '{-2, -2, -2, 2, 32, 2, -2, -2, -2};
  localparam mask_t SOBEL_X = '{-16, -32, -16, 0, 0, 0, 16, 32, 16};
  localparam mask_t SOBEL_Y = '{-16, 0, 16, -32, 0, 32, -16, 0, 16};
  localparam mask_t PREWITT_X = '{-16, 0, 16, -16, 0, 16, -16, 0, 16};
  localparam mask_t PREWITT_Y = '{-16, -16, -16, 0, 0, 0, 16, 16, 16};
  localparam mask_t SCHARR_X = '{48, 160, 48, 0, 0, 0, -48, -160, -48};
  localparam mask_t SCHARR_Y = '{48, 0, -48, 160, 0, -160, 48, 0, -48};
  localparam mask_t ROBERTS_X = '{16, 0, 0, 0, -16, 0, 0, 0, 0};
  localparam mask_t ROBERTS_Y = '{0, 16, 0, -16, 16, 0, 0, 0, 0};
  localparam mask_t LAPLACE  = '{-16, -16, -16, -16, 128, -16, -16, -16, -16};
  localparam mask_t ZERO     = '{0, 0, 0, 0, 0, 0, 0, 0, 0};

endpackage
