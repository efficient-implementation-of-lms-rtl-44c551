// tb_baseline_wander: checks the two-stage moving average against a model.
//
// Feeds 1200 samples of a 10 Hz tone riding on a slow drift and offset, with
// random gaps in in_valid, at the default window sizes N1 = N2 = 200. The
// model keeps the last N1 inputs and N2 first-stage means in real arithmetic.
// Each output must come one clock after its input; baseline must equal M2 and
// out_data the input minus M2, to within 1e-4 of the signal level.
module tb_baseline_wander;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int N1 = 200, N2 = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic out_valid;
  fp32_t out_data, baseline;
  int checks = 0, failures = 0;

  baseline_wander #(.N1(N1), .N2(N2)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real want_out, want_base, maxerr;
  logic pending;

  // expectations of the sample taken at each rising edge, checked at the falling edge
  logic pend_q = 0;
  real want_out_q;
  real want_base_q;
  always @(posedge clk) begin
    pend_q <= pending;
    want_out_q <= want_out;
    want_base_q <= want_base;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pend_q) begin
        failures++;
        $display("FAIL out_valid=%b expected %b", out_valid, pend_q);
      end
      if (pend_q && out_valid) begin
        checks += 2;
        if (fabs(fp_to_real(baseline) - want_base_q) > maxerr)
          maxerr = fabs(fp_to_real(baseline) - want_base_q);
        if (!close(fp_to_real(baseline), want_base_q, 1.0, 0.0, 1e-4)) begin
          failures++;
          $display("FAIL baseline=%g want=%g", fp_to_real(baseline), want_base_q);
        end
        if (!close(fp_to_real(out_data), want_out_q, 1.0, 0.0, 1e-4)) begin
          failures++;
          $display("FAIL out=%g want=%g", fp_to_real(out_data), want_out_q);
        end
      end
    end
  end

  initial begin
    real x, t, xi, m2;
    real hist1 [N1];
    real hist2 [N2];
    real m1;
    for (int i = 0; i < N1; i++) hist1[i] = 0.0;
    for (int i = 0; i < N2; i++) hist2[i] = 0.0;
    maxerr = 0; pending = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 1200; k++) begin
      while ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      t = real'(k) / 1000.0;
      x = 0.5 * $sin(2.0 * 3.14159265 * 10.0 * t) + 0.6 * t + 0.25;
      in_data = real_to_fp(x);
      in_valid = 1;
      xi = fp_to_real(in_data);
      for (int i = N1 - 1; i > 0; i--) hist1[i] = hist1[i-1];
      hist1[0] = xi;
      m1 = 0.0;
      for (int i = 0; i < N1; i++) m1 += hist1[i];
      m1 = m1 / N1;
      for (int i = N2 - 1; i > 0; i--) hist2[i] = hist2[i-1];
      hist2[0] = m1;
      m2 = 0.0;
      for (int i = 0; i < N2; i++) m2 += hist2[i];
      m2 = m2 / N2;
      want_base = m2;
      want_out = xi - m2;
      pending = 1;
    end
    @(negedge clk); in_valid = 0; pending = 0;
    @(negedge clk);
    $display("max error %g", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
