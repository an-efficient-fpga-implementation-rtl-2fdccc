// Self-checking testbench of edge_gradient.
//
// Four frames of an 8 x 6 random image: frame 0 with the reset (all-zero)
// masks, frame 1 with Sobel x/y in F0/F1 and Prewitt x/y in F2/F3, frame 2
// with random masks, frame 3 with Scharr and Roberts masks at full rate. Each
// magnitude is compared with |(F0 & F1) + (F2 & F3)| computed here from plain
// 3x3 correlations. The testbench counts how often the sum before the ABS
// was negative, so that both signs are known to have been exercised, and the
// full-rate frame checks the latency: first output IMG_W+7 clocks after the
// first input.
module tb_edge_gradient;
  import mri_pkg::*;
  import mri_ref_pkg::*;

  localparam int W = 8;
  localparam int H = 6;
  localparam int FRAMES = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, coef_we;
  pix_t in_pix;
  logic [ACC_W:0] out_mag;
  logic [1:0] coef_sel;
  logic [3:0] coef_addr;
  coef_t coef_data;

  edge_gradient #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  img_t img [FRAMES];
  img_t expect_img [FRAMES];
  mask_t masks [FRAMES][4];
  bit full_rate = 0;
  int n_neg = 0, n_pos = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) masks[0][s] = ZERO;
    masks[1][0] = SOBEL_X; masks[1][1] = SOBEL_Y;
    masks[1][2] = PREWITT_X; masks[1][3] = PREWITT_Y;
    for (int f = 0; f < 4; f++)
      for (int k = 0; k < 9; k++) masks[2][f][k] = longint'($signed(coef_t'($urandom)));
    masks[3][0] = SCHARR_X; masks[3][1] = SCHARR_Y;
    masks[3][2] = ROBERTS_X; masks[3][3] = ROBERTS_Y;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[W * H];
      foreach (img[f][i]) img[f][i] = longint'($urandom % 256);
      expect_img[f] = gradient(img[f], W, H, masks[f][0], masks[f][1], masks[f][2], masks[f][3]);
      begin
        automatic img_t a = conv3x3(img[f], W, H, masks[f][0]);
        automatic img_t b = conv3x3(img[f], W, H, masks[f][1]);
        automatic img_t c = conv3x3(img[f], W, H, masks[f][2]);
        automatic img_t d = conv3x3(img[f], W, H, masks[f][3]);
        for (int i = 0; i < W * H; i++) begin
          if ((a[i] & b[i]) + (c[i] & d[i]) < 0) n_neg++;
          if ((a[i] & b[i]) + (c[i] & d[i]) > 0) n_pos++;
        end
      end
    end
    in_valid = 0; in_pix = '0; coef_we = 0; coef_sel = 0; coef_addr = 0; coef_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      full_rate = (f == FRAMES - 1);
      if (f > 0) begin
        while (of < f) @(negedge clk);
        for (int s = 0; s < 4; s++)
          for (int k = 0; k < 9; k++) begin
            @(negedge clk);
            coef_we = 1; coef_sel = 2'(s); coef_addr = 4'(k);
            coef_data = coef_t'(masks[f][s][k]);
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
  int cyc = 0, first_acc = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && full_rate && in_valid && in_ready && first_acc < 0) first_acc = cyc;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (longint'(out_mag) != expect_img[of][op]) begin
        failures++;
        if (failures < 10) $display("frame %0d pixel %0d: got %0d want %0d", of, op,
                                    out_mag, expect_img[of][op]);
      end
      if (of == FRAMES - 1 && op == 0) begin
        checks++;
        if (cyc - first_acc != W + 7) begin
          failures++;
          $display("first-pixel latency %0d, want %0d", cyc - first_acc, W + 7);
        end
      end
      op++;
      if (op == W * H) begin
        op = 0; of++;
        if (of == FRAMES) begin
          checks++;
          if (n_neg == 0 || n_pos == 0) begin
            failures++;
            $display("sign of the sum not exercised: %0d negative, %0d positive", n_neg, n_pos);
          end
          $display("negative sums: %0d, positive sums: %0d", n_neg, n_pos);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

endmodule
