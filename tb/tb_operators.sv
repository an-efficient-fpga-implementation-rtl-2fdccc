// Edge operators of the paper run through the complete design.
//
// The design at its default size (256 x 256) is loaded in turn with the
// operators evaluated in the paper: Roberts (eq. 1, 2x2 masks as printed,
// placed in the upper-left corner of the 3x3 mask), Prewitt (eq. 3), Sobel
// (eq. 4), Scharr (eq. 5) and the Laplacian (eq. 6), which after the Gaussian
// blur stage forms the Laplacian of Gaussian. Because the Expression blocks
// AND their two inputs, loading one mask into both inputs passes it through:
// F0 = F1 = Gx and F2 = F3 = Gy make the edge output |Gx + Gy|, and for the
// Laplacian F2 = F3 = 0. For each operator one frame is taken at the edge tap
// and compared with |Gx + Gy| computed here directly from 3x3 correlations of
// the blurred image (no AND involved). A last frame with Sobel checks the
// thresholded image and one more the sharpened image.
module tb_operators;
  import mri_pkg::*;
  import mri_ref_pkg::*;

  localparam int W = 256;
  localparam int H = 256;
  localparam int OPS = 5;
  localparam int FRAMES = OPS + 2;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, coef_we, stats_valid;
  pix_t in_pix, out_pix;
  tap_e tap_sel;
  logic [ACC_W:0] thr;
  logic [2:0] coef_filter;
  logic [3:0] coef_addr;
  coef_t coef_data;
  logic [7:0] roi_row, roi_col;
  logic [PIX_W+7:0] mean, std_dev;
  logic [2*PIX_W+7:0] variance;

  mri_filter_top dut (.*);

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  img_t img, blur;
  img_t expect_img [FRAMES];
  mask_t gx [OPS], gy [OPS];
  string names [OPS] = '{"Roberts", "Prewitt", "Sobel", "Scharr", "LoG"};
  tap_e frame_tap [FRAMES];
  int frame_fail [FRAMES];
  localparam longint THR = 60 * 16;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_mask(int filt, mask_t m);
    for (int k = 0; k < 9; k++) begin
      @(negedge clk);
      coef_we = 1; coef_filter = 3'(filt); coef_addr = 4'(k); coef_data = coef_t'(m[k]);
    end
    @(negedge clk);
    coef_we = 0;
  endtask

  initial begin
    gx[0] = ROBERTS_X; gy[0] = ROBERTS_Y;
    gx[1] = PREWITT_X; gy[1] = PREWITT_Y;
    gx[2] = SOBEL_X;   gy[2] = SOBEL_Y;
    gx[3] = SCHARR_X;  gy[3] = SCHARR_Y;
    gx[4] = LAPLACE;   gy[4] = ZERO;
    // Test slice: smooth shading, a bright disc, a dark bar and noise.
    img = new[W * H];
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        automatic int v = 40 + r / 4 + c / 8 + $urandom % 16;
        if ((r - 100) * (r - 100) + (c - 150) * (c - 150) < 50 * 50) v += 120;
        if (r > 180 && r < 200 && c > 30) v -= 30;
        img[r * W + c] = (v > 255) ? 255 : v;
      end
    blur = map_pix(conv3x3(img, W, H, GAUSS));
    for (int f = 0; f < FRAMES; f++) begin
      automatic int op = (f < OPS) ? f : 2;
      automatic img_t a = conv3x3(blur, W, H, gx[op]);
      automatic img_t b = conv3x3(blur, W, H, gy[op]);
      automatic img_t mag = new[W * H];
      foreach (mag[i]) mag[i] = (a[i] + b[i] < 0) ? -(a[i] + b[i]) : a[i] + b[i];
      frame_tap[f] = (f < OPS) ? TAP_EDGE : (f == OPS) ? TAP_THRESH : TAP_SHARPEN;
      if (f < OPS) expect_img[f] = map_pix(mag);
      else if (f == OPS) expect_img[f] = threshold(mag, THR);
      else expect_img[f] = map_pix(conv3x3(threshold(mag, THR), W, H, SHARPEN));
      frame_fail[f] = 0;
    end

    in_valid = 0; in_pix = '0; coef_we = 0; coef_filter = 0; coef_addr = 0; coef_data = 0;
    tap_sel = TAP_EDGE; thr = (ACC_W+1)'(THR); roi_row = 8'd80; roi_col = 8'd130;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      automatic int op = (f < OPS) ? f : 2;
      while (of < f) @(negedge clk);
      repeat (4 * (W + 1) + 100) @(negedge clk);
      tap_sel = frame_tap[f];
      write_mask(1, gx[op]); write_mask(2, gx[op]);
      write_mask(3, gy[op]); write_mask(4, gy[op]);
      for (int p = 0; p < W * H; p++) begin
        @(negedge clk);
        in_valid = 1;
        in_pix   = pix_t'(img[p]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  int of = 0, op = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (longint'(out_pix) != expect_img[of][op]) begin
        failures++;
        frame_fail[of]++;
        if (failures < 10) $display("frame %0d pixel (%0d,%0d): got %0d want %0d", of,
                                    op / W, op % W, out_pix, expect_img[of][op]);
      end
      op++;
      if (op == W * H) begin
        if (of < OPS) $display("%-8s edge output: %0d mismatches", names[of], frame_fail[of]);
        else $display("Sobel %s output: %0d mismatches", (of == OPS) ? "threshold" : "sharpened",
                      frame_fail[of]);
        op = 0; of++;
        if (of == FRAMES) begin
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

endmodule
