// tb_lms_series: checks the series LMS filter against a real-valued model.
//
// Same identification problem as tb_lms_parallel (M = 19, BETA raised to
// 0.02, 1000 samples). Samples are offered with random idle gaps; the test
// checks that every result appears exactly 2M+1 = 39 clocks after its sample
// was taken, that back-to-back samples are taken every 2M+1 clocks, that e
// and y match the model to within 1e-3 and that the error converges.
module tb_lms_series;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int M = 19;
  localparam int LAT = 2 * M + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  fp32_t x_in = '0, d_in = '0;
  logic out_valid;
  fp32_t e_out, y_out;
  int checks = 0, failures = 0;

  lms_series #(.M(M), .BETA(32'h3CA3_D70A)) dut (.*);   // BETA = 0.02

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results, with the cycle at which they must appear
  real    q_e [$];
  real    q_y [$];
  longint q_t [$];
  longint last_accept = -1;
  int     back_to_back = 0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks += 3;
      if (q_t.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        if (cycle != q_t[0]) begin
          failures++; $display("FAIL output at %0d, expected %0d", cycle, q_t[0]);
        end
        if (!close(fp_to_real(e_out), q_e[0], 1.0, 0.0, 1e-3)) begin
          failures++; $display("FAIL e=%g want=%g", fp_to_real(e_out), q_e[0]);
        end
        if (!close(fp_to_real(y_out), q_y[0], 1.0, 0.0, 1e-3)) begin
          failures++; $display("FAIL y=%g want=%g", fp_to_real(y_out), q_y[0]);
        end
        void'(q_e.pop_front()); void'(q_y.pop_front()); void'(q_t.pop_front());
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
    early = 0; late = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int n = 0; n < 1000; n++) begin
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        repeat ($urandom_range(1, 50)) @(negedge clk);
      end
      x_in = real_to_fp(real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      for (int i = 5; i > 0; i--) xh[i] = xh[i-1];
      xh[0] = fp_to_real(x_in);
      d_in = real_to_fp(0.5 * xh[0] - 0.3 * xh[2] + 0.1 * xh[5]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      // taken at the next rising edge
      if (last_accept >= 0 && cycle - last_accept < LAT) begin
        failures++; $display("FAIL sample taken %0d clocks after the previous", cycle - last_accept);
      end
      if (last_accept >= 0 && cycle - last_accept == LAT) back_to_back++;
      last_accept = cycle;
      for (int i = M - 1; i > 0; i--) xs[i] = xs[i-1];
      xs[0] = xh[0];
      dv = fp_to_real(d_in);
      y = 0;
      for (int i = 0; i < M; i++) y += w[i] * xs[i];
      e = dv - y;
      for (int i = 0; i < M; i++) w[i] += beta * e * xs[i];
      q_e.push_back(e); q_y.push_back(y); q_t.push_back(cycle + 1 + LAT);   // taken at edge cycle+1
      if (n < 50) early += fabs(e);
      if (n >= 950) late += fabs(e);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks += 3;
    if (q_t.size() != 0) begin failures++; $display("FAIL %0d results missing", q_t.size()); end
    if (back_to_back == 0) begin failures++; $display("FAIL no back-to-back samples seen"); end
    if (late > 0.01 * early) begin
      failures++; $display("FAIL no convergence: early %g late %g", early, late);
    end
    $display("early %g late %g back-to-back %0d", early, late, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
