// tb_butterworth: checks the low-pass filter against a real-valued model.
//
// Feeds 1500 samples of a test signal (a slow ECG-like tone, a 50 Hz tone and
// a 200 Hz tone at 1 kHz) with random gaps in in_valid. Every output must
// appear exactly one clock after its input and match the difference equation
// computed in real arithmetic with the same coefficients to within 1e-4 of
// the signal amplitude. It also checks that the 200 Hz tone is attenuated.
module tb_butterworth;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic out_valid;
  fp32_t out_data;
  int checks = 0, failures = 0;

  butterworth dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ca, cb, cc, cd, ce;
  real o [1:4];
  real want, maxerr;
  logic pending;

  // output checker: one clock after every accepted sample
  // expectations of the sample taken at each rising edge, checked at the falling edge
  logic pend_q = 0;
  real want_q;
  always @(posedge clk) begin
    pend_q <= pending;
    want_q <= want;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pend_q) begin
        failures++;
        $display("FAIL out_valid=%b expected %b", out_valid, pend_q);
      end
      if (pend_q && out_valid) begin
        checks++;
        if (fabs(fp_to_real(out_data) - want_q) > maxerr) maxerr = fabs(fp_to_real(out_data) - want_q);
        if (!close(fp_to_real(out_data), want_q, 1.0, 0.0, 1e-4)) begin
          failures++;
          $display("FAIL out=%g want_q=%g", fp_to_real(out_data), want_q);
        end
      end
    end
  end

  initial begin
    real x, t, hi_in, hi_out;
    ca = fp_to_real(BW_A); cb = fp_to_real(BW_B); cc = fp_to_real(BW_C);
    cd = fp_to_real(BW_D); ce = fp_to_real(BW_E);
    for (int i = 1; i <= 4; i++) o[i] = 0.0;
    maxerr = 0.0; pending = 0; hi_out = 0.0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 1500; k++) begin
      // random idle cycles
      while ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      t = real'(k) / 1000.0;
      x = 0.8 * $sin(2.0 * 3.14159265 * 1.3 * t) + 0.2 * $sin(2.0 * 3.14159265 * 50.0 * t)
        + 0.3 * $sin(2.0 * 3.14159265 * 200.0 * t);
      in_data = real_to_fp(x);
      in_valid = 1;
      // reference uses the FP32 value actually driven
      want = ca * fp_to_real(in_data) + cb * o[1] + cc * o[2] + cd * o[3] + ce * o[4];
      o[4] = o[3]; o[3] = o[2]; o[2] = o[1]; o[1] = want;
      pending = 1;
      if (k > 1000) hi_out = hi_out + fabs(want - 0.8 * $sin(2.0 * 3.14159265 * 1.3 * t));
    end
    @(negedge clk); in_valid = 0; pending = 0;
    @(negedge clk);
    // 200 Hz must be strongly attenuated: residual well below its 0.3 amplitude
    checks++;
    if (hi_out / 499.0 > 0.15) begin
      failures++;
      $display("FAIL high-frequency residual %g", hi_out / 499.0);
    end
    $display("max error %g", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
