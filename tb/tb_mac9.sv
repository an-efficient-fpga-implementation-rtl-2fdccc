// Self-checking testbench of mac9.
//
// The filter starts with reset coefficients given by parameter, then gets new
// random coefficients through its write port every few hundred samples, while
// random neighbourhoods go in and the pipeline enable is toggled at random.
// Each output is compared with the nine-term sum computed here from the
// coefficients in force when its neighbourhood entered. A first phase with
// the enable always high checks the three-clock latency.
module tb_mac9;
  import mri_pkg::*;

  localparam coefs_t RC = {coef(1, 4), coef(-2, 0), coef(3, 0),
                           coef(10, 0), coef(-10, 0), coef(16, 3),
                           coef(-1, 3), coef(0, 0), coef(127, 0)};

  logic clk = 0, rst_n = 0;
  logic en, in_valid, coef_we, out_valid;
  win_t in_win;
  logic [3:0] coef_addr;
  coef_t coef_data;
  acc_t out_acc;

  mac9 #(.RESET_COEFS(RC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  coefs_t model_coefs;
  acc_t exp_q [$];
  int   exp_t [$];
  int   cyc = 0;
  bit   free_run = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic acc_t model(win_t w, coefs_t c);
    longint s = 0;
    for (int k = 0; k < 9; k++) s += longint'(w[k]) * longint'($signed(c[k]));
    return acc_t'(s);
  endfunction

  initial begin
    en = 0; in_valid = 0; coef_we = 0; coef_addr = 0; coef_data = 0; in_win = '0;
    model_coefs = RC;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n == 200) free_run = 0;
      en       = free_run || ($urandom % 4 != 0);
      in_valid = ($urandom % 5 != 0);
      foreach (in_win[k]) in_win[k] = pix_t'($urandom);
      if (n % 8 == 0 && n > 0) in_win = '1;  // largest pixels
      // Coefficient writes: a burst of nine every 300 samples, random values,
      // plus an out-of-range address that must be ignored.
      coef_we = 0;
      if (n >= 300 && n % 300 < 10) begin
        coef_we   = 1;
        coef_addr = 4'(n % 300);
        coef_data = coef_t'($urandom);
        if (n % 600 < 10 && n % 300 == 2) coef_data = coef_t'(-(1 << (COEF_W - 1)));
      end
      if (en && in_valid) begin
        exp_q.push_back(model(in_win, model_coefs));
        exp_t.push_back(cyc);
      end
      if (coef_we && coef_addr < 9) model_coefs[coef_addr] = coef_data;
    end
    @(negedge clk);
    en = 1; in_valid = 0; coef_we = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results never appeared", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && en && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output %0d", out_acc);
      end else begin
        if (out_acc !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("got %0d want %0d", out_acc, exp_q[0]);
        end
        // Three registers: taken in at edge 1, on out_acc after edge 3, and
        // seen here at edge 4 counted from the clock before edge 1.
        if (free_run) begin
          checks++;
          if (cyc - exp_t[0] != 4) begin
            failures++;
            $display("latency %0d, want 4", cyc - exp_t[0]);
          end
        end
        void'(exp_q.pop_front());
        void'(exp_t.pop_front());
      end
    end
  end

endmodule
