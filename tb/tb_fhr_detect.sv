// tb_fhr_detect: end-to-end test of the FHR detection unit.
//
// Two records of N_SAMPLES = 4000 samples each (convergence point 1000) of a
// synthetic extracted FECG: sharp fetal spikes (Gaussian, sigma 3 samples)
// every RR_F samples on top of broader maternal residue (sigma 25) every 750
// samples and a little noise. RR_F is 420 (142.9 bpm) in the first
// record and 480 (125 bpm) in the second. Checks: every reported peak lies
// within 40 samples of a fetal spike (plus the 20-sample delay of the mean
// filter) and never on a maternal-only beat, no fetal spike after the first
// second is missed, the rate is within 1 bpm of 142 and 125 (the maternal
// residue can shift a peak by a few samples), the threshold pass ends
// (th_valid) before the first peak of a record is reported, and the rate arrives within 2 * N_SAMPLES + 100 clocks of the last sample.
module tb_fhr_detect;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int N = 4000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic accepting, sdm_valid, th_valid, peak_valid, fhr_valid;
  fp32_t sdm, m1, th;
  logic [31:0] peak_loc;
  logic [15:0] fhr, rr_count;
  int checks = 0, failures = 0;

  fhr_detect #(.P(40), .N_SAMPLES(N), .MIN_DIST(200), .FS(1000), .CONV_SAMPLES(1000)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rr_f;
  int pk_list [$];
  // the threshold must be final (th_valid) before the first peak of a record
  bit th_ready = 0;
  always @(negedge clk) begin
    if (rst_n && th_valid) th_ready = 1;
    if (rst_n && peak_valid) begin
      if (pk_list.size() == 0) begin
        checks++;
        if (!th_ready) begin failures++; $display("FAIL peak before the threshold pass ended"); end
      end
      pk_list.push_back(int'(peak_loc));
    end
  end

  function automatic real gauss(input int d, input real s);
    return $exp(-0.5 * (real'(d) / s) * (real'(d) / s));
  endfunction

  task automatic run_record(input int rr, input int want_fhr);
    real v;
    int last_cycle, cyc, dlt, hits;
    bit seen [int];
    rr_f = rr;
    pk_list.delete();
    th_ready = 0;
    wait (accepting);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      v = 0.02 * (real'($urandom_range(0, 100)) / 100.0 - 0.5);
      for (int b = 0; b < N / rr + 2; b++) v += 1.0 * gauss(k - (200 + b * rr), 3.0);
      for (int b = 0; b < N / 750 + 2; b++) v += 1.0 * gauss(k - (80 + b * 750), 25.0);
      in_data = real_to_fp(v);
      in_valid = 1;
      if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    cyc = 0;
    while (!fhr_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 2 * N + 100) begin failures++; $display("FAIL rate after %0d clocks", cyc); end
    // peaks against the fetal positions
    hits = 0;
    foreach (pk_list[i]) begin
      int near;
      near = 0;
      for (int b = 0; b < N / rr + 2; b++) begin
        dlt = pk_list[i] - (200 + b * rr + 20);
        if (dlt < 0) dlt = -dlt;
        if (dlt <= 40) begin near = 1; seen[b] = 1; end
      end
      checks++;
      if (!near && pk_list[i] > 0) begin failures++; $display("FAIL peak at %0d is not fetal", pk_list[i]); end
    end
    for (int b = 0; 200 + b * rr < N - 60; b++) begin
      if (200 + b * rr < 1000) continue;
      checks++;
      if (!seen.exists(b)) begin failures++; $display("FAIL fetal beat at %0d missed", 200 + b * rr); end
    end
    checks++;
    if (fhr < want_fhr - 1 || fhr > want_fhr + 1) begin failures++; $display("FAIL fhr=%0d want %0d", fhr, want_fhr); end
    $display("record: %0d peaks, fhr=%0d from %0d intervals, rate after %0d clocks",
             pk_list.size(), fhr, rr_count, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_record(420, 142);
    run_record(480, 125);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
