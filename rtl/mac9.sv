// Nine-tap multiply-accumulate filter with programmable coefficients.
//
// This is the filter block of the paper's figures ("9 tap", one per 3x3 mask):
// it forms y = sum_k coef[k] * win[k] over a 3x3 neighbourhood, so one mask of
// equations (1)-(8) is applied per pixel. coef[k] multiplies the neighbour at
// row offset k/3-1 and column offset k%3-1 (correlation, as MATLAB's imfilter
// applies a mask); Roberts' 2x2 masks fit in the upper-left 2x2 corner.
//
// Timing: a three-stage pipeline (products, three row sums, total), advanced
// by en; out_valid/out_acc appear 3 advancing cycles after in_valid/in_win.
// The sum keeps full precision: ACC_W bits, COEF_FRAC of them fractional.
//
// Coefficients live in nine registers, reset to RESET_COEFS and written one
// at a time through coef_we/coef_addr/coef_data; a write takes effect on the
// next clock. The paper names the filter a MAC FIR in the text and shows the
// vendor's distributed-arithmetic FIR core (DAFIR) in its figures; this design
// uses plain parallel multipliers, which give the same results.
module mac9
  import mri_pkg::*;
#(
  parameter coefs_t RESET_COEFS = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       in_valid,
  input  win_t       in_win,
  input  logic       coef_we,
  input  logic [3:0] coef_addr,
  input  coef_t      coef_data,
  output logic       out_valid,
  output acc_t       out_acc
);

  localparam int PROD_W = PIX_W + 1 + COEF_W;
  localparam int ROW_W  = PROD_W + 2;

  coefs_t coefs;
  logic signed [PROD_W-1:0] prod [9];
  logic signed [ROW_W-1:0]  row_sum [3];
  logic [1:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coefs <= RESET_COEFS;
    end else if (coef_we && coef_addr < 4'd9) begin
      coefs[coef_addr] <= coef_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      out_valid <= 1'b0;
    end else if (en) begin
      vld <= {vld[0], in_valid};
      out_valid <= vld[1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < 9; k++)
        prod[k] <= $signed({1'b0, in_win[k]}) * $signed(coefs[k]);
      for (int i = 0; i < 3; i++)
        row_sum[i] <= ROW_W'(prod[3*i]) + ROW_W'(prod[3*i+1]) + ROW_W'(prod[3*i+2]);
      out_acc <= ACC_W'(row_sum[0]) + ACC_W'(row_sum[1]) + ACC_W'(row_sum[2]);
    end
  end

endmodule
