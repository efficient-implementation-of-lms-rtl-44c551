// tb_lms_parallel: checks the parallel LMS filter against a real-valued model.
//
// System identification at the default order M = 19: x is random in [-1, 1],
// d = 0.5 x[n] - 0.3 x[n-2] + 0.1 x[n-5]. BETA is raised to 0.02 so that the
// weights settle within the 1000 samples simulated. Each e and y must come one
// clock after its sample (checked with gaps in in_valid) and match the model
// (same recursion in real arithmetic) to within 1e-3; at the end the error
// must have fallen below 1 % of its starting size.
module tb_lms_parallel;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int M = 19;
  localparam real BETA_R = 0.02;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t x_in = '0, d_in = '0;
  logic out_valid;
  fp32_t e_out, y_out;
  int checks = 0, failures = 0;

  lms_parallel #(.M(M), .BETA(32'h3CA3_D70A)) dut (.*);   // BETA = 0.02

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real want_e, want_y;
  logic pending;
  logic pend_q = 0;
  real want_e_q, want_y_q;
  always @(posedge clk) begin
    pend_q <= pending; want_e_q <= want_e; want_y_q <= want_y;
  end
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pend_q) begin
        failures++; $display("FAIL out_valid=%b expected %b", out_valid, pend_q);
      end
      if (pend_q && out_valid) begin
        checks += 2;
        if (!close(fp_to_real(e_out), want_e_q, 1.0, 0.0, 1e-3)) begin
          failures++; $display("FAIL e=%g want=%g", fp_to_real(e_out), want_e_q);
        end
        if (!close(fp_to_real(y_out), want_y_q, 1.0, 0.0, 1e-3)) begin
          failures++; $display("FAIL y=%g want=%g", fp_to_real(y_out), want_y_q);
        end
      end
    end
  end

  initial begin
    real xs [M];
    real w [M];
    real xh [6];
    real beta, dv, y, e, early, late;
    beta = fp_to_real(32'h3CA3_D70A);
    for (int i = 0; i < M; i++) begin xs[i] = 0; w[i] = 0; end
    for (int i = 0; i < 6; i++) xh[i] = 0;
    pending = 0; early = 0; late = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 1000; n++) begin
      while ($urandom_range(0, 4) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      x_in = real_to_fp(real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      for (int i = 5; i > 0; i--) xh[i] = xh[i-1];
      xh[0] = fp_to_real(x_in);
      d_in = real_to_fp(0.5 * xh[0] - 0.3 * xh[2] + 0.1 * xh[5]);
      for (int i = M - 1; i > 0; i--) xs[i] = xs[i-1];
      xs[0] = xh[0];
      dv = fp_to_real(d_in);
      y = 0;
      for (int i = 0; i < M; i++) y += w[i] * xs[i];
      e = dv - y;
      for (int i = 0; i < M; i++) w[i] += beta * e * xs[i];
      want_e = e; want_y = y;
      in_valid = 1; pending = 1;
      if (n < 50) early += fabs(e);
      if (n >= 950) late += fabs(e);
    end
    @(negedge clk); in_valid = 0; pending = 0;
    @(negedge clk);
    checks++;
    if (late > 0.01 * early) begin
      failures++; $display("FAIL no convergence: early %g late %g", early, late);
    end
    $display("early %g late %g", early, late);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
