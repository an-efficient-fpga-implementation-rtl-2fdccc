// 3x3 neighbourhood generator for a raster-order pixel stream.
//
// The paper convolves the image with 3x3 masks while the image travels as a
// one-dimensional stream of pixels. A 3x3 mask needs the pixels of the row
// above and the row below, so this block keeps the last two rows in two line
// buffers (IMG_W pixels each) and three 3-pixel column registers. For every
// input pixel (r,c) it emits the neighbourhood centred on pixel (r-1,c-1),
// i.e. one row and one pixel behind the input. Neighbours outside the image
// read as zero (zero padding, as MATLAB's conv2/imfilter do by default), so
// the output image has the same IMG_W x IMG_H size as the input.
//
// After the last pixel of a frame the block runs IMG_W+1 flush steps of its
// own, with in_ready low, to push out the last row; it then starts the next
// frame. Frames are delimited only by counting pixels, starting after reset.
//
// Interface: valid/ready on both sides; a transfer happens when valid and
// ready are both high on a rising clock edge. out_win[3*i+j] is the pixel at
// row offset i-1 and column offset j-1 from the centre. Throughput is one
// pixel per clock; a frame takes IMG_W*IMG_H + IMG_W + 1 cycles without stalls.
//
// The line-buffer structure, the zero padding, the flush and the handshake are
// choices of this design: the paper shows the filters fed straight from the
// pixel stream and does not say how the 3x3 neighbourhood is formed.
module window3x3
  import mri_pkg::*;
#(
  parameter int IMG_W = 256,
  parameter int IMG_H = 256
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  pix_t in_pix,
  output logic out_valid,
  input  logic out_ready,
  output win_t out_win
);

  localparam int CW = $clog2(IMG_W);
  localparam int RW = $clog2(IMG_H + 2);

  // Position of the current (virtual) input step; rows IMG_H and IMG_H+1 are
  // the flush steps.
  logic [CW-1:0] c;
  logic [RW-1:0] r;
  // Centre of the next neighbourhood to be emitted, and of the one on output.
  logic [CW-1:0] cc, out_c;
  logic [RW-1:0] cr, out_r;

  pix_t lb1 [IMG_W];  // row above the input row
  pix_t lb2 [IMG_W];  // two rows above the input row
  pix_t wt [3], wm [3], wb [3];  // top, middle, bottom rows; index 2 newest

  logic flush, en, step, emit, last_step;
  pix_t bot;

  assign flush     = (r >= RW'(IMG_H));
  assign en        = !out_valid || out_ready;
  assign step      = en && (flush || in_valid);
  assign in_ready  = en && !flush;
  assign emit      = (r >= RW'(2)) || (r == RW'(1) && c >= CW'(1));
  assign last_step = (r == RW'(IMG_H + 1));
  assign bot       = flush ? '0 : in_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; r <= '0; cc <= '0; cr <= '0;
      out_c <= '0; out_r <= '0; out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= step && emit;
      if (step) begin
        if (last_step) begin
          c <= '0; r <= '0;
        end else if (c == CW'(IMG_W - 1)) begin
          c <= '0; r <= r + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
        if (emit) begin
          out_c <= cc; out_r <= cr;
          if (cc == CW'(IMG_W - 1)) begin
            cc <= '0;
            cr <= (cr == RW'(IMG_H - 1)) ? '0 : cr + 1'b1;
          end else begin
            cc <= cc + 1'b1;
          end
        end
      end
    end
  end

  // Line buffers and neighbourhood registers hold data only; the masking below
  // hides whatever they contain outside the image, so they need no reset.
  always_ff @(posedge clk) begin
    if (step) begin
      lb2[c] <= lb1[c];
      lb1[c] <= bot;
      wt[0] <= wt[1]; wt[1] <= wt[2]; wt[2] <= lb2[c];
      wm[0] <= wm[1]; wm[1] <= wm[2]; wm[2] <= lb1[c];
      wb[0] <= wb[1]; wb[1] <= wb[2]; wb[2] <= bot;
    end
  end

  // Zero padding at the image border.
  logic keep_t, keep_b, keep_l, keep_r;
  assign keep_t = (out_r != '0);
  assign keep_b = (out_r != RW'(IMG_H - 1));
  assign keep_l = (out_c != '0);
  assign keep_r = (out_c != CW'(IMG_W - 1));

  always_comb begin
    for (int j = 0; j < 3; j++) begin
      out_win[j]     = wt[j];
      out_win[3 + j] = wm[j];
      out_win[6 + j] = wb[j];
      if (!keep_t) out_win[j] = '0;
      if (!keep_b) out_win[6 + j] = '0;
    end
    if (!keep_l) begin out_win[0] = '0; out_win[3] = '0; out_win[6] = '0; end
    if (!keep_r) begin out_win[2] = '0; out_win[5] = '0; out_win[8] = '0; end
  end

  // Stream rule: an offered neighbourhood stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_win));

endmodule
