// Self-checking testbench of window3x3.
//
// A small image (7 x 5) is streamed three times: twice with random gaps on the
// input and random back-pressure on the output, then once at full rate. Every
// emitted neighbourhood is compared with one cut directly out of the stored
// image with zero padding. The full-rate frame also checks the timing: one
// neighbourhood per clock and a frame of IMG_W*IMG_H + IMG_W + 1 steps, of
// which the last IMG_W+1 hold in_ready low.
module tb_window3x3;
  import mri_pkg::*;

  localparam int W = 7;
  localparam int H = 5;
  localparam int FRAMES = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  pix_t in_pix;
  win_t out_win;

  window3x3 #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pix_t img [FRAMES][H][W];
  bit   full_rate = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic pix_t ref_pix(int f, int r, int c);
    if (r < 0 || r >= H || c < 0 || c >= W) return '0;
    return img[f][r][c];
  endfunction

  // Driver.
  initial begin
    foreach (img[f, r, c]) img[f][r][c] = pix_t'($urandom);
    in_valid = 0; in_pix = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      full_rate = (f == FRAMES - 1);
      for (int p = 0; p < W * H; p++) begin
        // Inputs change on the falling edge; a transfer happens on the next
        // rising edge once in_ready (stable at the falling edge) is high.
        @(negedge clk);
        while (!full_rate && ($urandom % 4 == 0)) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_pix   = img[f][p / W][p % W];
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  // Output back-pressure.
  always @(posedge clk) out_ready <= full_rate ? 1'b1 : ($urandom % 3 != 0);

  // Monitor.
  int of = 0, op = 0;
  int cyc = 0, first_acc = -1, last_out = -1, nready_low = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && full_rate) begin
      if (in_valid && in_ready && first_acc < 0) first_acc = cyc;
      if (first_acc >= 0 && !in_ready && of == FRAMES - 1) nready_low++;
    end
    if (rst_n && out_valid && out_ready) begin
      for (int k = 0; k < 9; k++) begin
        checks++;
        if (out_win[k] !== ref_pix(of, op / W + k / 3 - 1, op % W + k % 3 - 1)) begin
          failures++;
          if (failures < 10)
            $display("frame %0d pixel %0d tap %0d: got %0d want %0d", of, op, k,
                     out_win[k], ref_pix(of, op / W + k / 3 - 1, op % W + k % 3 - 1));
        end
      end
      if (of == FRAMES - 1) last_out = cyc;
      op++;
      if (op == W * H) begin
        op = 0; of++;
        if (of == FRAMES) begin
          // Full-rate frame: the last neighbourhood leaves W*H+W+1 clocks after
          // the first pixel entered (one step per clock plus the output register).
          checks++;
          if (last_out - first_acc != W * H + W + 1) begin
            failures++;
            $display("frame span %0d cycles, want %0d", last_out - first_acc, W * H + W + 1);
          end
          checks++;
          if (nready_low != W + 1) begin
            failures++;
            $display("in_ready low for %0d cycles, want %0d", nready_low, W + 1);
          end
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

endmodule
