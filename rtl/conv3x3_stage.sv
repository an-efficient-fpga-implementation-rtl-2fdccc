// One complete 3x3 image filter: neighbourhood generator, nine-tap MAC and
// conversion of the result back to a pixel.
//
// The design uses two of these: the Gaussian blur in front of the edge
// detector (reset mask: equation (7), [1 2 1; 2 4 2; 1 2 1]/16) and the edge
// sharpening after the threshold (reset mask: equation (8), printed as
// [-1 -1 -1; 1 16 1; -1 -1 -1]/8). Both masks are programmable at run time.
//
// The MAC result is turned into a pixel by dropping its COEF_FRAC fraction
// bits (rounding towards minus infinity) and clamping to 0..255. This
// conversion is a choice of this design; the paper does not give the output
// format of its filter blocks.
//
// Interface: valid/ready pixel streams in and out, raster order, IMG_W x IMG_H
// pixels per frame; coefficient write port as in mac9. Timing: the output of
// pixel (r,c) is presented 4 clocks after the clock edge that took in pixel
// (r+1,c+1) (window register, three MAC stages, output register: the first
// pixel of a frame is on out_pix IMG_W+5 clocks after pixel (0,0) went in);
// one pixel per clock, plus IMG_W+1 flush cycles per frame.
module conv3x3_stage
  import mri_pkg::*;
#(
  parameter int     IMG_W       = 256,
  parameter int     IMG_H       = 256,
  parameter coefs_t RESET_COEFS = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  pix_t       in_pix,
  output logic       out_valid,
  input  logic       out_ready,
  output pix_t       out_pix,
  input  logic       coef_we,
  input  logic [3:0] coef_addr,
  input  coef_t      coef_data
);

  logic en;
  logic win_valid, mac_valid;
  win_t win;
  acc_t acc;

  assign en = !out_valid || out_ready;

  window3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_win (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pix,
    .out_valid(win_valid), .out_ready(en), .out_win(win)
  );

  mac9 #(.RESET_COEFS(RESET_COEFS)) u_mac (
    .clk, .rst_n, .en,
    .in_valid(win_valid), .in_win(win),
    .coef_we, .coef_addr, .coef_data,
    .out_valid(mac_valid), .out_acc(acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else if (en) begin
      out_valid <= mac_valid;
      out_pix   <= sat_pix((ACC_W+1)'(acc >>> COEF_FRAC));
    end
  end

  // Stream rule: an offered pixel stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_pix));

endmodule
