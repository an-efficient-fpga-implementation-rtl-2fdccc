// Sequential unsigned divider: quotient = num / den, remainder dropped.
//
// Restoring long division, one quotient bit per clock from the most
// significant end: NUM_W clocks from start to done. start is taken when the
// divider is idle (busy low); done is a one-clock pulse with quo valid and
// held until the next start. Division by zero gives an all-ones quotient.
// Helper of the ROI statistics unit; the paper gives only the formulas it
// serves (mean = sum / count, variance = squared deviations / (count - 1)).
module seq_div #(
  parameter int NUM_W = 48,
  parameter int DEN_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quo
);

  localparam int CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] n_sh;      // dividend bits not yet brought down
  logic [DEN_W-1:0] rem;       // partial remainder, always below d
  logic [DEN_W-1:0] d;
  logic [CNT_W-1:0] cnt;
  logic [DEN_W:0]   trial;

  assign trial = {rem[DEN_W-1:0], n_sh[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      n_sh <= '0; rem <= '0; d <= '0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; cnt <= CNT_W'(NUM_W);
          n_sh <= num; d <= den; rem <= '0; quo <= '0;
        end
      end else begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d}) begin
          rem <= DEN_W'(trial - {1'b0, d});
          quo <= {quo[NUM_W-2:0], 1'b1};
        end else begin
          rem <= DEN_W'(trial);
          quo <= {quo[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

endmodule
