// ROI texture statistics on regions shaped like the tissue cases of the
// original study (three tumour cases, two slices each, a normal and an
// abnormal region per slice: twelve regions).
//
// The MRI slices themselves are not available, so each 40 x 40 region is
// generated here with uniformly distributed grey levels whose mean and
// standard deviation are those reported for that region (on a 0..1 scale,
// multiplied by 255), clipped to 0..255. The rest of the 256 x 256 frame is
// background texture. The whole design runs at its default size with the
// blur mask loaded as the identity and the output tap on the blur stage, so
// the statistics unit sees the slice unchanged. For every frame the unit's
// mean, variance and standard deviation must equal the exact values computed
// here from the generated pixels; the reported figures and the measured ones
// are printed side by side (0..1 scale).
module tb_table2_roi;
  import mri_pkg::*;

  localparam int W = 256;
  localparam int H = 256;
  localparam int CASES = 12;
  localparam int R0 = 100, C0 = 90;

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

  // Reported mean and standard deviation per region, 0..1 scale.
  real rep_mean [CASES] = '{0.318, 0.229, 0.323, 0.225, 0.410, 0.513,
                            0.420, 0.513, 0.391, 0.894, 0.238, 0.617};
  real rep_std  [CASES] = '{0.0555, 0.0661, 0.0449, 0.0719, 0.0636, 0.157,
                            0.0583, 0.126, 0.0562, 0.167, 0.0576, 0.221};
  string rep_name [CASES] = '{"I   normal", "I   abnormal", "I   normal", "I   abnormal",
                              "II  normal", "II  abnormal", "II  normal", "II  abnormal",
                              "III normal", "III abnormal", "III normal", "III abnormal"};

  int checks = 0, failures = 0;
  longint exp_mean [CASES], exp_var [CASES], exp_std [CASES];
  int n_stats = 0;
  pix_t frame [CASES][W * H];

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

  initial begin
    for (int k = 0; k < CASES; k++) begin
      automatic longint s1 = 0, s2 = 0;
      automatic real mu = rep_mean[k] * 255.0;
      automatic real half = rep_std[k] * 255.0 * $sqrt(3.0);
      for (int p = 0; p < W * H; p++) begin
        automatic int r = p / W, c = p % W;
        automatic int v = 60 + $urandom % 40;
        if (r >= R0 && r < R0 + 40 && c >= C0 && c < C0 + 40) begin
          automatic real u = real'($urandom % 65536) / 65535.0;
          v = int'(mu - half + 2.0 * half * u);
          if (v < 0) v = 0;
          if (v > 255) v = 255;
          s1 += v; s2 += v * v;
        end
        frame[k][p] = pix_t'(v);
      end
      exp_mean[k] = (s1 * 256) / 1600;
      exp_var[k]  = ((1600 * s2 - s1 * s1) * 256) / (1600 * 1599);
      exp_std[k]  = isqrt(exp_var[k] * 256);
    end
    in_valid = 0; in_pix = '0; coef_we = 0; coef_filter = 0; coef_addr = 0; coef_data = 0;
    tap_sel = TAP_BLUR; thr = '0; roi_row = 8'(R0); roi_col = 8'(C0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Identity mask in the blur stage.
    for (int k = 0; k < 9; k++) begin
      @(negedge clk);
      coef_we = 1; coef_filter = 3'd0; coef_addr = 4'(k);
      coef_data = (k == 4) ? coef_t'(16) : coef_t'(0);
    end
    @(negedge clk);
    coef_we = 0;
    for (int k = 0; k < CASES; k++)
      for (int p = 0; p < W * H; p++) begin
        @(negedge clk);
        in_valid = 1;
        in_pix   = frame[k][p];
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
  end

  always @(posedge clk) begin
    if (rst_n && stats_valid) begin
      checks += 3;
      if (mean !== (PIX_W+8)'(exp_mean[n_stats]) || variance !== (2*PIX_W+8)'(exp_var[n_stats]) ||
          std_dev !== (PIX_W+8)'(exp_std[n_stats])) begin
        failures++;
        $display("region %0d: mean %0d/%0d var %0d/%0d std %0d/%0d", n_stats, mean,
                 exp_mean[n_stats], variance, exp_var[n_stats], std_dev, exp_std[n_stats]);
      end
      $display("case %s  reported mean %.3f std %.4f | measured mean %.3f variance %.2e std %.4f",
               rep_name[n_stats], rep_mean[n_stats], rep_std[n_stats],
               real'(mean) / 256.0 / 255.0, real'(variance) / 256.0 / 65025.0,
               real'(std_dev) / 256.0 / 255.0);
      n_stats++;
      if (n_stats == CASES) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

endmodule
