// MRI image filtering and tumour characterisation pipeline.
//
// A grey-scale image enters as a raster-order stream of 8-bit pixels, one per
// clock at most, and passes through the chain of the paper's complete design:
//
//   Gaussian blur (3x3)  ->  edge gradient (four 3x3 filters, two "a & b"
//   Expression blocks, "a + b" AddSub, ABS)  ->  threshold  ->  edge
//   sharpening (3x3)  ->  output
//
// Every 3x3 filter has nine programmable coefficients. The blur and the
// sharpening reset to the paper's masks (equations (7) and (8)); the four
// gradient filters reset to zero and are loaded with the masks of the wanted
// edge operator (Roberts, Prewitt, Sobel, Scharr, Laplacian...). Coefficient
// writes: coef_we with coef_filter (0 blur, 1..4 gradient filters F0..F3,
// 5 sharpening), coef_addr (0..8, 3*row+col of the mask) and coef_data
// (signed, COEF_FRAC fraction bits).
//
// tap_sel picks which stage's stream reaches out_pix: the blurred image, the
// gradient magnitude (integer part, clamped to 255), the binary threshold
// image or the sharpened image. The paper shows the output of each of these
// stages from its hardware; the selector is this design's way of exposing
// them and should be changed only between frames. The same selected stream
// feeds the ROI statistics unit, which reports mean, variance and standard
// deviation of a ROI_H x ROI_W region at roi_row/roi_col once per frame.
//
// Handshake: in_valid/in_ready on the input; the output is a valid-only
// stream (out_valid marks a pixel; it cannot be stalled). Each 3x3 stage
// stops taking input for IMG_W+1 clocks at the end of a frame to flush its
// last row, so a frame takes a little more than IMG_W*IMG_H clocks (about
// 1.3 ms for 256 x 256 at the paper's 50 MHz). With the full chain selected
// and no stalls, pixel (0,0) of a frame is presented on out_pix 3*IMG_W + 20
// clocks after the clock edge that took it in (three line delays of the 3x3
// stages plus their pipeline registers); it is one pixel per clock after that.
// tap_sel and the masks should be changed only once the pipeline is empty,
// 4*(IMG_W+1) + 20 clocks or so after the last output of the previous frame.
module mri_filter_top
  import mri_pkg::*;
#(
  parameter int IMG_W = 256,
  parameter int IMG_H = 256,
  parameter int ROI_W = 40,
  parameter int ROI_H = 40
) (
  input  logic           clk,
  input  logic           rst_n,
  // Pixel stream in (Gateway In).
  input  logic           in_valid,
  output logic           in_ready,
  input  pix_t           in_pix,
  // Pixel stream out (Gateway Out).
  output logic           out_valid,
  output pix_t           out_pix,
  // Configuration.
  input  tap_e           tap_sel,
  input  logic [ACC_W:0] thr,
  input  logic           coef_we,
  input  logic [2:0]     coef_filter,
  input  logic [3:0]     coef_addr,
  input  coef_t          coef_data,
  // Region-of-interest statistics.
  input  logic [$clog2(IMG_H)-1:0] roi_row,
  input  logic [$clog2(IMG_W)-1:0] roi_col,
  output logic                     stats_valid,
  output logic [PIX_W+7:0]         mean,
  output logic [2*PIX_W+7:0]       variance,
  output logic [PIX_W+7:0]         std_dev
);

  // Equation (7): [1 2 1; 2 4 2; 1 2 1] / 16.
  localparam coefs_t GAUSS_MASK = {coef(1, 4), coef(2, 4), coef(1, 4),
                                   coef(2, 4), coef(4, 4), coef(2, 4),
                                   coef(1, 4), coef(2, 4), coef(1, 4)};
  // Equation (8) as printed: [-1 -1 -1; 1 16 1; -1 -1 -1] / 8.
  localparam coefs_t SHARP_MASK = {coef(-1, 3), coef(-1, 3), coef(-1, 3),
                                   coef(1, 3),  coef(16, 3), coef(1, 3),
                                   coef(-1, 3), coef(-1, 3), coef(-1, 3)};

  // Blur -> gradient.
  logic blur_valid, blur_ready;
  pix_t blur_pix;
  // Gradient -> threshold.
  logic           mag_valid, mag_ready;
  logic [ACC_W:0] mag;
  // Threshold -> sharpening.
  logic bin_valid, bin_ready;
  pix_t bin_pix;
  // Sharpening -> output.
  logic sharp_valid;
  pix_t sharp_pix;

  conv3x3_stage #(.IMG_W(IMG_W), .IMG_H(IMG_H), .RESET_COEFS(GAUSS_MASK)) u_blur (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pix,
    .out_valid(blur_valid), .out_ready(blur_ready), .out_pix(blur_pix),
    .coef_we(coef_we && coef_filter == 3'd0), .coef_addr, .coef_data
  );

  edge_gradient #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_grad (
    .clk, .rst_n,
    .in_valid(blur_valid), .in_ready(blur_ready), .in_pix(blur_pix),
    .out_valid(mag_valid), .out_ready(mag_ready), .out_mag(mag),
    .coef_we(coef_we && coef_filter >= 3'd1 && coef_filter <= 3'd4),
    .coef_sel(2'(coef_filter - 3'd1)), .coef_addr, .coef_data
  );

  threshold_unit u_thr (
    .clk, .rst_n, .thr,
    .in_valid(mag_valid), .in_ready(mag_ready), .in_mag(mag),
    .out_valid(bin_valid), .out_ready(bin_ready), .out_pix(bin_pix)
  );

  conv3x3_stage #(.IMG_W(IMG_W), .IMG_H(IMG_H), .RESET_COEFS(SHARP_MASK)) u_sharp (
    .clk, .rst_n,
    .in_valid(bin_valid), .in_ready(bin_ready), .in_pix(bin_pix),
    .out_valid(sharp_valid), .out_ready(1'b1), .out_pix(sharp_pix),
    .coef_we(coef_we && coef_filter == 3'd5), .coef_addr, .coef_data
  );

  // Output tap: a pixel of a stage's stream counts when it is transferred.
  pix_t mag_pix;
  assign mag_pix = sat_pix((ACC_W+1)'(mag >> COEF_FRAC));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else begin
      unique case (tap_sel)
        TAP_BLUR:    begin out_valid <= blur_valid && blur_ready; out_pix <= blur_pix;  end
        TAP_EDGE:    begin out_valid <= mag_valid && mag_ready;   out_pix <= mag_pix;   end
        TAP_THRESH:  begin out_valid <= bin_valid && bin_ready;   out_pix <= bin_pix;   end
        default:     begin out_valid <= sharp_valid;              out_pix <= sharp_pix; end
      endcase
    end
  end

  roi_stats #(.IMG_W(IMG_W), .IMG_H(IMG_H), .ROI_W(ROI_W), .ROI_H(ROI_H)) u_stats (
    .clk, .rst_n,
    .in_valid(out_valid), .in_pix(out_pix),
    .roi_row, .roi_col,
    .stats_valid, .mean, .variance, .std_dev
  );

endmodule
