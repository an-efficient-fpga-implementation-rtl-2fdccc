// Region-of-interest statistics: mean, variance and standard deviation of the
// pixels inside a ROI_H x ROI_W rectangle of each frame.
//
// The paper characterises tissue by these three textural statistics over a
// 40 x 40 region (1600 pixels) whose upper-left corner is set at run time.
// This unit watches a raster-order pixel stream (it never stalls it), counts
// rows and columns to find the pixels with roi_row <= row < roi_row+ROI_H and
// roi_col <= col < roi_col+ROI_W, and accumulates their sum S1 and sum of
// squares S2. At the end of each frame it computes, with N = ROI_H*ROI_W,
//
//   mean     = S1 / N
//   variance = (N*S2 - S1^2) / (N*(N-1))     (squared deviations over N-1)
//   std_dev  = sqrt(variance)
//
// using one sequential divider (twice) and a sequential square root, about
// 2*NUM_W + SQ_W clocks in all, and pulses stats_valid. All three results
// carry FRAC = 8 fraction bits in pixel units (mean and std_dev in grey
// levels, variance in grey levels squared); divide by 255 or 255^2 to get the
// 0..1 scale of the paper's table. The paper calls the N-1 sum the standard
// deviation in its formula but reports the standard deviation as the square
// root of the variance in its table; this unit follows the table.
//
// The ROI must lie inside the image and roi_row/roi_col must stay constant
// during a frame. The statistics of a frame must be finished before the ROI
// of the next frame ends, which holds for any ROI that is not at the very
// top of a small image.
module roi_stats
  import mri_pkg::*;
#(
  parameter int IMG_W = 256,
  parameter int IMG_H = 256,
  parameter int ROI_W = 40,
  parameter int ROI_H = 40
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  pix_t in_pix,
  input  logic [$clog2(IMG_H)-1:0] roi_row,
  input  logic [$clog2(IMG_W)-1:0] roi_col,
  output logic stats_valid,
  output logic [PIX_W+7:0]   mean,      // Q8.8
  output logic [2*PIX_W+7:0] variance,  // Q16.8
  output logic [PIX_W+7:0]   std_dev    // Q8.8
);

  localparam int FRAC   = 8;
  localparam int N      = ROI_W * ROI_H;
  localparam int S1_W   = $clog2(N * ((1 << PIX_W) - 1) + 1);
  localparam int S2_W   = $clog2(N * ((1 << PIX_W) - 1) * ((1 << PIX_W) - 1) + 1);
  localparam int NB_W   = $clog2(N + 1);
  localparam int NUM_W  = NB_W + S2_W + FRAC;                 // (N*S2 - S1^2) << FRAC
  localparam int DEN_W  = 2 * NB_W;                           // N*(N-1)
  localparam int VAR_W  = 2 * PIX_W + FRAC;
  localparam int SQ_W   = PIX_W + FRAC;                       // root width
  localparam int CW     = $clog2(IMG_W);
  localparam int RW     = $clog2(IMG_H);

  typedef enum logic [2:0] {S_IDLE, S_MEAN, S_VAR, S_SQRT} state_e;
  state_e state;

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic [S1_W-1:0] s1, s1_f;
  logic [S2_W-1:0] s2, s2_f;
  logic in_roi, last_pix;

  assign in_roi = (row >= roi_row) && ({1'b0, row} < {1'b0, roi_row} + (RW+1)'(ROI_H)) &&
                  (col >= roi_col) && ({1'b0, col} < {1'b0, roi_col} + (CW+1)'(ROI_W));
  assign last_pix = (row == RW'(IMG_H - 1)) && (col == CW'(IMG_W - 1));

  // Accumulation over the frame.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; row <= '0; s1 <= '0; s2 <= '0;
    end else if (in_valid) begin
      if (col == CW'(IMG_W - 1)) begin
        col <= '0;
        row <= last_pix ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
      if (last_pix) begin
        s1 <= '0; s2 <= '0;
      end else if (in_roi) begin
        s1 <= s1 + S1_W'(in_pix);
        s2 <= s2 + S2_W'(in_pix) * S2_W'(in_pix);
      end
    end
  end

  // Final sums of the frame, including its last pixel.
  logic [S1_W-1:0] s1_last;
  logic [S2_W-1:0] s2_last;
  assign s1_last = in_roi ? s1 + S1_W'(in_pix) : s1;
  assign s2_last = in_roi ? s2 + S2_W'(in_pix) * S2_W'(in_pix) : s2;

  // Division and square root.
  logic             div_start, div_busy, div_done;
  logic [NUM_W-1:0] div_num, div_quo;
  logic [DEN_W-1:0] div_den;
  logic             sq_start, sq_busy, sq_done;
  logic [2*SQ_W-1:0] sq_x;
  logic [SQ_W-1:0]  sq_root;
  logic [2*S1_W-1:0] s1_sq;
  logic [NUM_W-1:0]  var_num;

  assign s1_sq   = s1_f * s1_f;
  assign var_num = (NUM_W'(N) * NUM_W'(s2_f) - NUM_W'(s1_sq)) << FRAC;

  seq_div #(.NUM_W(NUM_W), .DEN_W(DEN_W)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  seq_isqrt #(.ROOT_W(SQ_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(sq_x),
    .busy(sq_busy), .done(sq_done), .root(sq_root)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; stats_valid <= 1'b0;
      s1_f <= '0; s2_f <= '0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
      sq_start <= 1'b0; sq_x <= '0;
      mean <= '0; variance <= '0; std_dev <= '0;
    end else begin
      stats_valid <= 1'b0;
      div_start   <= 1'b0;
      sq_start    <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && last_pix) begin
          s1_f      <= s1_last;
          s2_f      <= s2_last;
          div_num   <= NUM_W'(s1_last) << FRAC;
          div_den   <= DEN_W'(N);
          div_start <= 1'b1;
          state     <= S_MEAN;
        end
        S_MEAN: if (div_done) begin
          mean      <= (PIX_W+FRAC)'(div_quo);
          div_num   <= var_num;
          div_den   <= DEN_W'(N * (N - 1));
          div_start <= 1'b1;
          state     <= S_VAR;
        end
        S_VAR: if (div_done) begin
          variance  <= VAR_W'(div_quo);
          sq_x      <= (2*SQ_W)'(div_quo) << FRAC;
          sq_start  <= 1'b1;
          state     <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          std_dev     <= sq_root;
          stats_valid <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The divider and the square root are only started when idle.
  a_div_idle:  assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
  a_sqrt_idle: assert property (@(posedge clk) disable iff (!rst_n) sq_start |-> !sq_busy);

endmodule
