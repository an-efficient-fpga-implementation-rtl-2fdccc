// Edge gradient unit: four nine-tap filters on one neighbourhood, merged into
// one non-negative edge strength per pixel.
//
// Structure, as drawn in the paper's edge-detection model: filters F0..F3
// (named DAFIR v9_02, v9_0, v9_01 and v9_03 there) all see the same input
// stream. Expression block 0 combines F0 (port a) with F1 (port b), Expression
// block 1 combines F2 (a) with F3 (b); both are printed as "a & b", which is
// a bitwise AND of the two filter outputs and is implemented as such. An
// AddSub block printed "a + b" with one register of latency adds the two
// Expression results, and an ABS block takes the absolute value.
//
// What the four masks are is left to the user: each filter's nine
// coefficients are written through coef_we/coef_sel/coef_addr/coef_data and
// reset to zero. The shared 3x3 neighbourhood generator in front of the
// filters, the bit widths and the handshake are this design's choices.
//
// Interface: valid/ready pixel stream in, valid/ready magnitude stream out,
// both raster order. out_mag is unsigned, ACC_W+1 bits with COEF_FRAC
// fraction bits. Timing: the magnitude of pixel (r,c) is presented 5 clocks
// after the clock edge that took in pixel (r+1,c+1) (three MAC stages, the
// AddSub register and the ABS register after the window register; the
// Expression blocks are combinational); one pixel per clock.
module edge_gradient
  import mri_pkg::*;
#(
  parameter int IMG_W = 256,
  parameter int IMG_H = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  pix_t           in_pix,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [ACC_W:0] out_mag,
  input  logic           coef_we,
  input  logic [1:0]     coef_sel,
  input  logic [3:0]     coef_addr,
  input  coef_t          coef_data
);

  logic en;
  logic win_valid;
  win_t win;
  logic [3:0] f_valid;
  acc_t f_out [4];
  acc_t expr0, expr1;
  logic signed [ACC_W:0] sum_q;
  logic sum_valid;

  assign en = !out_valid || out_ready;

  window3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_win (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pix,
    .out_valid(win_valid), .out_ready(en), .out_win(win)
  );

  for (genvar f = 0; f < 4; f++) begin : g_fir
    mac9 u_mac (
      .clk, .rst_n, .en,
      .in_valid(win_valid), .in_win(win),
      .coef_we(coef_we && coef_sel == 2'(f)), .coef_addr, .coef_data,
      .out_valid(f_valid[f]), .out_acc(f_out[f])
    );
  end

  // Expression and Expression1: "a & b".
  assign expr0 = f_out[0] & f_out[1];
  assign expr1 = f_out[2] & f_out[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_valid <= 1'b0;
      out_valid <= 1'b0;
      sum_q     <= '0;
      out_mag   <= '0;
    end else if (en) begin
      // AddSub "a + b", one register.
      sum_valid <= f_valid[0];
      sum_q     <= (ACC_W+1)'(expr0) + (ACC_W+1)'(expr1);
      // ABS.
      out_valid <= sum_valid;
      out_mag   <= (sum_q < 0) ? (ACC_W+1)'(-sum_q) : (ACC_W+1)'(sum_q);
    end
  end

  // The four filters share one window and one enable, so they stay in step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               f_valid == '0 || f_valid == '1);

endmodule
