// End-to-end testbench of mri_filter_top at its default size (256 x 256).
//
// A synthetic MRI-like slice is generated here: a textured background, a
// brighter elliptical "lesion" and noise. It is sent through the whole
// pipeline five times:
//   frame 0  sharpened output (full chain), full rate
//   frame 1  sharpened output again, sent back to back after frame 0 and
//            with random input gaps
//   frame 2  blurred image
//   frame 3  gradient magnitude
//   frame 4  binary threshold image, after reloading the blur mask (identity)
//            and changing the threshold
// The four gradient filters hold Sobel x/y (F0/F1) and Prewitt x/y (F2/F3).
// Every output pixel is compared with a reference computed here stage by
// stage, and so are the ROI statistics (40 x 40 region on the lesion) of
// each frame. The testbench counts how often each mechanism of the design
// occurred (input stalls, end-of-frame flushes, each output tap, both
// threshold outcomes, clamping in the sharpening stage, a negative sum ahead
// of the ABS, coefficient reloads, statistics results) and counts a failure
// for any that never did. It also checks the full-chain latency of the first
// pixel at full rate: 3*IMG_W + 20 clocks.
module tb_mri_filter_top;
  import mri_pkg::*;
  import mri_ref_pkg::*;

  localparam int W = 256;
  localparam int H = 256;
  localparam int FRAMES = 5;
  localparam int ROI_R = 100, ROI_C = 110;

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

  always #10 clk = ~clk;  // 50 MHz, the paper's clock

  int checks = 0, failures = 0;
  img_t img;
  img_t expect_img [FRAMES];
  longint exp_mean [FRAMES], exp_var [FRAMES], exp_std [FRAMES];
  tap_e frame_tap [FRAMES] = '{TAP_SHARPEN, TAP_SHARPEN, TAP_BLUR, TAP_EDGE, TAP_THRESH};
  longint frame_thr [FRAMES] = '{40 * 16, 40 * 16, 40 * 16, 40 * 16, 120 * 16};
  mask_t IDENTITY = '{0, 0, 0, 0, 16, 0, 0, 0, 0};

  // Mechanism counters.
  int n_stall = 0, n_flush = 0, n_white = 0, n_black = 0, n_clamp = 0, n_neg = 0;
  int n_reload = 0, n_stats = 0;
  int n_tap [4] = '{0, 0, 0, 0};

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt(longint x);
    longint r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  // Reference of one frame for a given tap, blur mask and threshold.
  function automatic img_t reference(tap_e tap, mask_t blur_mask, longint t);
    img_t blur = map_pix(conv3x3(img, W, H, blur_mask));
    img_t mag  = gradient(blur, W, H, SOBEL_X, SOBEL_Y, PREWITT_X, PREWITT_Y);
    img_t bin  = threshold(mag, t);
    img_t sharp_full = conv3x3(bin, W, H, SHARPEN);
    if (tap == TAP_BLUR) return blur;
    if (tap == TAP_EDGE) return map_pix(mag);
    foreach (bin[i]) if (bin[i] != 0) n_white++; else n_black++;
    if (tap == TAP_THRESH) return bin;
    foreach (sharp_full[i])
      if ((sharp_full[i] >>> COEF_FRAC) < 0 || (sharp_full[i] >>> COEF_FRAC) > 255) n_clamp++;
    return map_pix(sharp_full);
  endfunction

  task automatic write_mask(int filt, mask_t m);
    for (int k = 0; k < 9; k++) begin
      @(negedge clk);
      coef_we = 1; coef_filter = 3'(filt); coef_addr = 4'(k); coef_data = coef_t'(m[k]);
    end
    @(negedge clk);
    coef_we = 0;
  endtask

  task automatic send_frame(bit gaps);
    for (int p = 0; p < W * H; p++) begin
      @(negedge clk);
      while (gaps && ($urandom % 8 == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_pix   = pix_t'(img[p]);
      while (!in_ready) begin
        n_stall++;
        @(negedge clk);
      end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // Synthetic slice and expected results.
  initial begin
    img = new[W * H];
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        automatic int v = 70 + ((r * 7 + c * 3) % 23) + $urandom % 12;
        automatic int dr = r - 128, dc = c - 130;
        if (dr * dr + dc * dc < 110 * 110) v += 20;                        // brain
        if (dr * dr * 4 + (dc + 5) * (dc + 5) * 9 < 60 * 60 * 4) v += 110;  // lesion
        if (r < 8 || r >= H - 8) v = 0;                                    // dark border
        img[r * W + c] = (v > 255) ? 255 : v;
      end
    for (int f = 0; f < FRAMES; f++) begin
      automatic longint s1 = 0, s2 = 0;
      expect_img[f] = reference(frame_tap[f], (f == 4) ? IDENTITY : GAUSS, frame_thr[f]);
      for (int r = ROI_R; r < ROI_R + 40; r++)
        for (int c = ROI_C; c < ROI_C + 40; c++) begin
          s1 += expect_img[f][r * W + c];
          s2 += expect_img[f][r * W + c] * expect_img[f][r * W + c];
        end
      exp_mean[f] = (s1 * 256) / 1600;
      exp_var[f]  = ((1600 * s2 - s1 * s1) * 256) / (1600 * 1599);
      exp_std[f]  = isqrt(exp_var[f] * 256);
    end
    // Count negative sums ahead of the ABS in the gradient of the blurred slice.
    begin
      automatic img_t blur = map_pix(conv3x3(img, W, H, GAUSS));
      automatic img_t a = conv3x3(blur, W, H, SOBEL_X), b = conv3x3(blur, W, H, SOBEL_Y);
      automatic img_t c = conv3x3(blur, W, H, PREWITT_X), d = conv3x3(blur, W, H, PREWITT_Y);
      foreach (a[i]) if ((a[i] & b[i]) + (c[i] & d[i]) < 0) n_neg++;
    end

    in_valid = 0; in_pix = '0; coef_we = 0; coef_filter = 0; coef_addr = 0; coef_data = 0;
    tap_sel = TAP_SHARPEN; thr = (ACC_W+1)'(frame_thr[0]);
    roi_row = 8'(ROI_R); roi_col = 8'(ROI_C);
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_mask(1, SOBEL_X);
    write_mask(2, SOBEL_Y);
    write_mask(3, PREWITT_X);
    write_mask(4, PREWITT_Y);
    for (int f = 0; f < FRAMES; f++) begin
      // Frame 1 follows frame 0 at once; the others wait for the pipeline to
      // drain, then change the tap, the threshold or the blur mask.
      if (f != 1) begin
        // The output stream ends before the later stages have emptied when an
        // early tap is selected, so also wait for all four stages to flush.
        while (of < f) @(negedge clk);
        repeat (4 * (W + 1) + 100) @(negedge clk);
        tap_sel = frame_tap[f];
        thr = (ACC_W+1)'(frame_thr[f]);
        if (f == 4) begin
          write_mask(0, IDENTITY);
          n_reload++;
        end
      end
      send_frame(f == 1);
    end
  end

  // Monitor.
  int of = 0, op = 0;
  int cyc = 0, first_acc = -1, first_lat = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && of == 0 && in_valid && in_ready && first_acc < 0) first_acc = cyc;
    if (rst_n && dut.u_blur.u_win.flush) n_flush++;
    if (rst_n && out_valid) begin
      checks++;
      if (longint'(out_pix) != expect_img[of][op]) begin
        failures++;
        if (failures < 10) $display("frame %0d pixel (%0d,%0d): got %0d want %0d", of,
                                    op / W, op % W, out_pix, expect_img[of][op]);
      end
      n_tap[frame_tap[of]]++;
      op++;
      if (op == W * H) begin
        op = 0; of++;
      end
    end
    if (rst_n && stats_valid) begin
      checks += 3;
      if (mean !== (PIX_W+8)'(exp_mean[n_stats]) || variance !== (2*PIX_W+8)'(exp_var[n_stats]) ||
          std_dev !== (PIX_W+8)'(exp_std[n_stats])) begin
        failures++;
        $display("frame %0d stats: mean %0d/%0d var %0d/%0d std %0d/%0d", n_stats, mean,
                 exp_mean[n_stats], variance, exp_var[n_stats], std_dev, exp_std[n_stats]);
      end
      $display("frame %0d ROI: mean %.2f variance %.1f std %.2f (grey levels)", n_stats,
               real'(mean) / 256.0, real'(variance) / 256.0, real'(std_dev) / 256.0);
      n_stats++;
      if (n_stats == FRAMES) finish_run();
    end
  end

  // Full-chain latency: first pixel of frame 0 (sent at full rate) in, first
  // pixel out.
  always @(posedge clk)
    if (rst_n && out_valid && of == 0 && op == 0 && first_lat < 0) first_lat = cyc - first_acc;

  task automatic finish_run();
    checks++;
    if (first_lat != 3 * W + 20) begin
      failures++;
      $display("full-chain latency %0d, want %0d", first_lat, 3 * W + 20);
    end
    $display("stalls %0d flush cycles %0d white %0d black %0d clamped %0d negative %0d",
             n_stall, n_flush, n_white, n_black, n_clamp, n_neg);
    $display("taps blur %0d edge %0d thresh %0d sharpen %0d reloads %0d stats %0d",
             n_tap[TAP_BLUR], n_tap[TAP_EDGE], n_tap[TAP_THRESH], n_tap[TAP_SHARPEN],
             n_reload, n_stats);
    checks++;
    if (n_stall == 0 || n_flush == 0 || n_white == 0 || n_black == 0 || n_clamp == 0 ||
        n_neg == 0 || n_reload == 0 || n_stats != FRAMES || n_tap[TAP_BLUR] == 0 ||
        n_tap[TAP_EDGE] == 0 || n_tap[TAP_THRESH] == 0 || n_tap[TAP_SHARPEN] == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

endmodule
