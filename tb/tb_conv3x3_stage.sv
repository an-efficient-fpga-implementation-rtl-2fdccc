// Self-checking testbench of conv3x3_stage.
//
// Three frames of a 9 x 6 random image. Frame 0 uses the reset mask (the
// Gaussian blur of equation (7)); frame 1 the sharpening mask of equation (8),
// loaded through the coefficient port; frame 2 a Laplacian scaled by 4, which
// drives results far below 0 and above 255 so that clamping is exercised.
// Frames 0 and 1 run with random input gaps and output back-pressure; frame 2
// runs at full rate and checks the timing: the first output pixel leaves
// IMG_W+6 clocks after the first input pixel enters, and the frame's last
// pixel leaves IMG_W*IMG_H + IMG_W + 6 clocks after it.
module tb_conv3x3_stage;
  import mri_pkg::*;
  import mri_ref_pkg::*;

  localparam int W = 9;
  localparam int H = 6;
  localparam int FRAMES = 3;
  localparam coefs_t GAUSS_RESET = {coef(1, 4), coef(2, 4), coef(1, 4),
                                    coef(2, 4), coef(4, 4), coef(2, 4),
                                    coef(1, 4), coef(2, 4), coef(1, 4)};

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, coef_we;
  pix_t in_pix, out_pix;
  logic [3:0] coef_addr;
  coef_t coef_data;

  conv3x3_stage #(.IMG_W(W), .IMG_H(H), .RESET_COEFS(GAUSS_RESET)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  img_t img [FRAMES];
  img_t expect_img [FRAMES];
  mask_t masks [FRAMES];
  bit full_rate = 0;
  int n_clamp_lo = 0, n_clamp_hi = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    masks[0] = GAUSS;
    masks[1] = SHARPEN;
    foreach (LAPLACE[k]) masks[2][k] = 4 * LAPLACE[k];
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[W * H];
      foreach (img[f][i]) img[f][i] = longint'($urandom % 256);
      begin
        automatic img_t full = conv3x3(img[f], W, H, masks[f]);
        expect_img[f] = map_pix(full);
        for (int i = 0; i < W * H; i++) begin
          if ((full[i] >>> COEF_FRAC) < 0) n_clamp_lo++;
          if ((full[i] >>> COEF_FRAC) > 255) n_clamp_hi++;
        end
      end
    end
    in_valid = 0; in_pix = '0; coef_we = 0; coef_addr = 0; coef_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      full_rate = (f == FRAMES - 1);
      if (f > 0) begin
        // Wait until the previous frame has left, then load the mask.
        while (of < f) @(negedge clk);
        for (int k = 0; k < 9; k++) begin
          @(negedge clk);
          coef_we = 1; coef_addr = 4'(k); coef_data = coef_t'(masks[f][k]);
        end
        @(negedge clk);
        coef_we = 0;
      end
      for (int p = 0; p < W * H; p++) begin
        @(negedge clk);
        while (!full_rate && ($urandom % 4 == 0)) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_pix   = pix_t'(img[f][p]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  always @(posedge clk) out_ready <= full_rate ? 1'b1 : ($urandom % 3 != 0);

  int of = 0, op = 0;
  int cyc = 0, first_acc = -1, first_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && full_rate && in_valid && in_ready && first_acc < 0) first_acc = cyc;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (longint'(out_pix) != expect_img[of][op]) begin
        failures++;
        if (failures < 10) $display("frame %0d pixel %0d: got %0d want %0d", of, op,
                                    out_pix, expect_img[of][op]);
      end
      if (of == FRAMES - 1 && op == 0) begin
        first_out = cyc;
        checks++;
        if (first_out - first_acc != W + 6) begin
          failures++;
          $display("first-pixel latency %0d, want %0d", first_out - first_acc, W + 6);
        end
      end
      op++;
      if (op == W * H) begin
        op = 0; of++;
        if (of == FRAMES) begin
          checks++;
          if (cyc - first_acc != W * H + W + 5) begin
            failures++;
            $display("frame span %0d, want %0d", cyc - first_acc, W * H + W + 5);
          end
          checks++;
          if (n_clamp_lo == 0 || n_clamp_hi == 0) begin
            failures++;
            $display("clamping not exercised: %0d low, %0d high", n_clamp_lo, n_clamp_hi);
          end
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

endmodule
