// Sequential integer square root: root = floor(sqrt(x)).
//
// Digit-by-digit (binary) method: each clock brings down the next two bits of
// the radicand and decides one root bit, so a result takes ROOT_W clocks.
// start is taken when idle (busy low); done is a one-clock pulse, root is held
// until the next start. Helper of the ROI statistics unit, which takes the
// standard deviation as the square root of the variance.
module seq_isqrt #(
  parameter int ROOT_W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [2*ROOT_W-1:0] x,
  output logic                busy,
  output logic                done,
  output logic [ROOT_W-1:0]   root
);

  localparam int CNT_W = $clog2(ROOT_W + 1);

  logic [2*ROOT_W-1:0] x_sh;
  logic [ROOT_W:0]     rem;     // remainder, at most 2*root
  logic [ROOT_W+2:0]   rem_in, trial;
  logic [CNT_W-1:0]    cnt;

  assign rem_in = {rem[ROOT_W:0], x_sh[2*ROOT_W-1 -: 2]};
  assign trial  = {1'b0, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      x_sh <= '0; rem <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; cnt <= CNT_W'(ROOT_W);
          x_sh <= x; rem <= '0; root <= '0;
        end
      end else begin
        x_sh <= x_sh << 2;
        if (rem_in >= trial) begin
          rem  <= (ROOT_W+1)'(rem_in - trial);
          root <= {root[ROOT_W-2:0], 1'b1};
        end else begin
          rem  <= (ROOT_W+1)'(rem_in);
          root <= {root[ROOT_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

endmodule
