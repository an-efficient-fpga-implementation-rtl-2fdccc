// Self-checking testbench of roi_stats.
//
// A 50 x 45 image with the 40 x 40 region of interest at row 3, column 5 is
// streamed four times with random gaps: random pixels, a constant image
// (variance zero), an image of 0 and 255 only (largest variance) and random
// pixels again with the region moved to the lower-right corner. After each
// frame the mean, variance and standard deviation must equal the values
// computed here from the sums over the region:
//   mean = floor(256*S1/N), variance = floor(256*(N*S2 - S1^2)/(N*(N-1))),
//   std  = floor(sqrt(256*variance)), with N = 1600,
// and the results must arrive within 200 clocks of the frame's last pixel.
module tb_roi_stats;
  import mri_pkg::*;

  localparam int W = 50;
  localparam int H = 45;
  localparam int RW_ = 40;
  localparam int RH_ = 40;
  localparam int N = RW_ * RH_;
  localparam int FRAMES = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, stats_valid;
  pix_t in_pix;
  logic [$clog2(H)-1:0] roi_row;
  logic [$clog2(W)-1:0] roi_col;
  logic [PIX_W+7:0] mean, std_dev;
  logic [2*PIX_W+7:0] variance;

  roi_stats #(.IMG_W(W), .IMG_H(H), .ROI_W(RW_), .ROI_H(RH_)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint exp_mean [FRAMES], exp_var [FRAMES], exp_std [FRAMES];
  int cyc = 0, last_pix_cyc = 0, n_stats = 0;

  initial begin
    repeat (100000) @(posedge clk);
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

  initial begin
    in_valid = 0; in_pix = '0; roi_row = 3; roi_col = 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      automatic longint s1 = 0, s2 = 0;
      automatic int r0 = (f == 3) ? H - RH_ : 3;
      automatic int c0 = (f == 3) ? W - RW_ : 5;
      automatic int cval = $urandom % 256;
      @(negedge clk);
      roi_row = r0[$clog2(H)-1:0]; roi_col = c0[$clog2(W)-1:0];
      for (int p = 0; p < W * H; p++) begin
        automatic int r = p / W, c = p % W;
        automatic int v;
        unique case (f)
          1: v = cval;
          2: v = ($urandom % 2) ? 255 : 0;
          default: v = $urandom % 256;
        endcase
        while ($urandom % 5 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1; in_pix = pix_t'(v);
        if (r >= r0 && r < r0 + RH_ && c >= c0 && c < c0 + RW_) begin
          s1 += v; s2 += v * v;
        end
        @(negedge clk);
      end
      in_valid = 0;
      exp_mean[f] = (s1 * 256) / N;
      exp_var[f]  = ((N * s2 - s1 * s1) * 256) / (N * (N - 1));
      exp_std[f]  = isqrt(exp_var[f] * 256);
      // Wait for the results before the next frame (the unit needs them done
      // before the next frame's region ends; here we simply wait).
      while (n_stats <= f) @(negedge clk);
    end
    checks++;
    if (n_stats != FRAMES) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (in_valid) last_pix_cyc = cyc;
    if (rst_n && stats_valid) begin
      checks += 4;
      if (mean !== (PIX_W+8)'(exp_mean[n_stats]) || variance !== (2*PIX_W+8)'(exp_var[n_stats]) ||
          std_dev !== (PIX_W+8)'(exp_std[n_stats])) begin
        failures++;
        $display("frame %0d: mean %0d/%0d var %0d/%0d std %0d/%0d", n_stats, mean,
                 exp_mean[n_stats], variance, exp_var[n_stats], std_dev, exp_std[n_stats]);
      end
      if (cyc - last_pix_cyc > 200) begin
        failures++;
        $display("statistics took %0d clocks", cyc - last_pix_cyc);
      end
      $display("frame %0d: mean %0d var %0d std %0d (Q.8)", n_stats, mean, variance, std_dev);
      n_stats++;
    end
  end

endmodule
