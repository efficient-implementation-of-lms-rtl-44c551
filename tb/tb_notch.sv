// tb_notch: checks the notch filter against a real-valued model.
//
// Feeds 2500 samples of a 5 Hz tone plus a tone at the notch frequency with
// random gaps in in_valid. The published coefficients place the zeros at
// cos(w0) = 1.31278 / (2 * 0.99405), i.e. w0 = 0.1352 of the sample rate
// (135.2 Hz at 1 kHz), so that is the tone used. Every output must come one
// clock after its input and match the difference equation in real arithmetic
// to within 1e-4 of the amplitude; after settling the tone must be removed.
module tb_notch;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic out_valid;
  fp32_t out_data;
  int checks = 0, failures = 0;

  notch dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real want, maxerr;
  logic pending;

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
    real x, t, i1, i2, o1, o2, xi, resid;
    real ca, cb, cc, cd, ce;
    ca = fp_to_real(NT_A); cb = fp_to_real(NT_B); cc = fp_to_real(NT_C);
    cd = fp_to_real(NT_D); ce = fp_to_real(NT_E);
    i1 = 0; i2 = 0; o1 = 0; o2 = 0; maxerr = 0; pending = 0; resid = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 2500; k++) begin
      while ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      t = real'(k) / 1000.0;
      x = 0.7 * $sin(2.0 * 3.14159265 * 5.0 * t) + 0.5 * $sin(2.0 * 3.14159265 * 135.2106 * t);
      in_data = real_to_fp(x);
      in_valid = 1;
      xi = fp_to_real(in_data);
      want = ca * xi + cb * i1 + cc * i2 + cd * o1 + ce * o2;
      i2 = i1; i1 = xi; o2 = o1; o1 = want;
      pending = 1;
      if (k >= 2000) resid = resid + fabs(want - 0.7 * $sin(2.0 * 3.14159265 * 5.0 * t));
    end
    @(negedge clk); in_valid = 0; pending = 0;
    @(negedge clk);
    checks++;
    if (resid / 500.0 > 0.05) begin
      failures++;
      $display("FAIL notch residual %g", resid / 500.0);
    end
    $display("max error %g, residual %g", maxerr, resid / 500.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
