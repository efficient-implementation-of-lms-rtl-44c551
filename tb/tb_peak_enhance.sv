// tb_peak_enhance: checks differentiate-square-average and the mean m1.
//
// Drives 1000 samples of a spiky test signal (narrow tall pulses on a slow
// tone) with random idle gaps, at P = 40 and N_SAMPLES = 1000. A real-valued
// model keeps the last P squared differences; sdm must equal their mean and m1
// the running sum of sdm/N, each to within 1e-4 of their size, one clock after
// the sample. Then start must clear the state.
module tb_peak_enhance;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int P = 40, N = 1000;

  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic out_valid;
  fp32_t sdm, m1;
  int checks = 0, failures = 0;

  peak_enhance #(.P(P), .N_SAMPLES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real want_sdm, want_m1;
  logic pending = 0;
  logic pend_q = 0;
  real want_sdm_q, want_m1_q;
  always @(posedge clk) begin
    pend_q <= pending; want_sdm_q <= want_sdm; want_m1_q <= want_m1;
  end
  always @(negedge clk) begin
    if (rst_n && !start) begin
      checks++;
      if (out_valid !== pend_q) begin
        failures++; $display("FAIL out_valid=%b expected %b", out_valid, pend_q);
      end
      if (pend_q && out_valid) begin
        checks += 2;
        if (!close(fp_to_real(sdm), want_sdm_q, want_sdm_q, 1e-4, 1e-6)) begin
          failures++; $display("FAIL sdm=%g want=%g", fp_to_real(sdm), want_sdm_q);
        end
        if (!close(fp_to_real(m1), want_m1_q, want_m1_q, 1e-4, 1e-6)) begin
          failures++; $display("FAIL m1=%g want=%g", fp_to_real(m1), want_m1_q);
        end
      end
    end
  end

  initial begin
    real hist [P];
    real prev, x, s;
    for (int i = 0; i < P; i++) hist[i] = 0;
    prev = 0; want_m1 = 0; want_sdm = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < N; k++) begin
      while ($urandom_range(0, 4) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      x = 0.3 * $sin(2.0 * 3.14159265 * real'(k) / 700.0);
      if (k % 137 < 6) x += 2.0 * real'(k % 137) / 6.0;
      in_data = real_to_fp(x);
      x = fp_to_real(in_data);
      for (int i = P - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = (x - prev) * (x - prev);
      prev = x;
      s = 0;
      for (int i = 0; i < P; i++) s += hist[i];
      want_sdm = s / P;
      want_m1 += want_sdm / N;
      in_valid = 1; pending = 1;
    end
    @(negedge clk); in_valid = 0; pending = 0;
    @(negedge clk);
    // start clears sdm and m1
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (sdm !== 32'd0 || m1 !== 32'd0) begin
      failures++; $display("FAIL start did not clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
