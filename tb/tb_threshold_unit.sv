// Self-checking testbench of threshold_unit.
//
// Random magnitudes, some equal to the threshold and some one above or below
// it, go through with random input gaps and output back-pressure while the
// threshold changes now and then. Each output pixel must be 255 exactly when
// its magnitude was strictly above the threshold, and 0 otherwise, and the
// outputs must come out in input order with none lost or added.
module tb_threshold_unit;
  import mri_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [ACC_W:0] thr, in_mag;
  logic in_valid, in_ready, out_valid, out_ready;
  pix_t out_pix;

  threshold_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pix_t exp_q [$];
  int n_white = 0, n_black = 0, n_equal = 0;
  int unsigned kind;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_mag = '0; thr = (ACC_W+1)'(1000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n % 250 == 0) thr = (ACC_W+1)'($urandom % 5000);
      in_valid = ($urandom % 4 != 0);
      kind = $urandom % 4;
      case (kind)
        0: in_mag = thr;
        1: in_mag = thr + 1'b1;
        2: in_mag = (thr == 0) ? thr : thr - 1'b1;
        default: in_mag = (ACC_W+1)'($urandom % 10000);
      endcase
      while (!in_ready) @(negedge clk);
      if (in_valid) begin
        exp_q.push_back((in_mag > thr) ? 8'd255 : 8'd0);
        if (in_mag == thr) n_equal++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_white == 0 || n_black == 0 || n_equal == 0) begin
      failures++;
      $display("left %0d, white %0d, black %0d, equal %0d", exp_q.size(), n_white, n_black, n_equal);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) out_ready <= ($urandom % 3 != 0);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
      end else begin
        if (out_pix !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("got %0d want %0d", out_pix, exp_q[0]);
        end
        if (exp_q[0] == 8'd255) n_white++; else n_black++;
        void'(exp_q.pop_front());
      end
    end
  end

endmodule
