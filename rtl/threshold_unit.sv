// Threshold: turns the edge strength into a binary image.
//
// Each magnitude is compared with the run-time threshold thr, given in the
// same unsigned fixed-point format as the magnitude (COEF_FRAC fraction
// bits). A magnitude strictly above thr becomes a white pixel (all ones),
// anything else a black pixel (zero). The paper only says that thresholding
// creates a binary image from a grey-scale one; the strict comparison, the
// 0/255 output levels and the register-programmed threshold are choices of
// this design.
//
// Interface: valid/ready stream in and out. Timing: one register, so the
// binary pixel follows its magnitude by one clock; one pixel per clock.
module threshold_unit
  import mri_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic [ACC_W:0] thr,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [ACC_W:0] in_mag,
  output logic           out_valid,
  input  logic           out_ready,
  output pix_t           out_pix
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      out_pix   <= (in_mag > thr) ? '1 : '0;
    end
  end

  // Stream rule: an offered pixel stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_pix));

endmodule
