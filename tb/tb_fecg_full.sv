// tb_fecg_full: full-size test of the FECG extraction and heart-rate system.
//
// The top is used exactly as delivered: parallel LMS-AF, M = 19, step size
// 2*mu = 1.4e-4, N1 = N2 = 200, P = 40, records of 30000 samples at 1 kHz,
// the first 12000 samples of a record left out of the rate, minimum peak
// distance 200 samples.
//
// Stimulus: one 30 s record of synthetic two-lead signal (ecg_synth_pkg,
// fetal RR 375 samples = 160 bpm, maternal RR 750) scaled by AMP = 8.
// The LMS step is proportional to the signal power, so this scale makes the
// weights settle well before the 12000-sample point.
// Pairs are given at up to one per clock with random idle clocks.
//
// Checks:
//  * every FECG sample against a real-valued model of the two preprocessing
//    channels and the LMS recursion (relative 1e-3 of AMP), in order, none
//    missing, and each registered on the third rising edge after the edge
//    that takes its pair;
//  * exactly one rate report, after the record is complete;
//  * the detected R peaks after sample 12000: a peak counts as fetal when it
//    lies within 40 samples of a true fetal beat (plus 25 samples of filter
//    delay); at least 90% of the fetal beats must be found, extra peaks may
//    be at most a tenth of the beat count, and the rate must be within 5% of
//    160 bpm;
//  * the number of RR intervals used equals the number of peak pairs after
//    sample 12000;
//  * mechanisms: idle input clocks, both read passes, peaks before sample
//    12000 left out.
module tb_fecg_full;
  import fecg_pkg::*;
  import fp_ref_pkg::*;
  import ecg_synth_pkg::*;

  localparam int  NS   = 30000;
  localparam int  CONV = 12000;
  localparam int  M    = 19;
  localparam int  N1   = 200, N2 = 200;
  localparam int  RR_F = 375;
  localparam real AMP  = 8.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp32_t abd [NS];
  fp32_t tho [NS];
  real   want_e [NS];

  logic        in_valid = 0;
  fp32_t       abd_in = '0, tho_in = '0;
  logic        in_ready, fv, ro, sv, tv, pv, hv;
  fp32_t       fecg, sdm, th;
  logic [31:0] loc;
  logic [15:0] fhr, rrc;

  fecg_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .abd_in, .tho_in,
    .fecg_valid(fv), .fecg, .record_open(ro), .sdm_valid(sv), .sdm,
    .th, .th_valid(tv), .peak_valid(pv), .peak_loc(loc), .fhr,
    .fhr_valid(hv), .rr_count(rrc));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // --------------------------------------------------------------- model
  task automatic build_model();
    real ba, bb, bc, bd, be, na, nb, nc, nd, ne, beta;
    real bw [2][5];
    real ni [2][3];
    real no [2][3];
    real h1 [2][N1];
    real h2 [2][N2];
    real pre [2];
    real xs [M];
    real w [M];
    real y, x, lp, nt, m1, m2;
    ba = fp_to_real(BW_A); bb = fp_to_real(BW_B); bc = fp_to_real(BW_C);
    bd = fp_to_real(BW_D); be = fp_to_real(BW_E);
    na = fp_to_real(NT_A); nb = fp_to_real(NT_B); nc = fp_to_real(NT_C);
    nd = fp_to_real(NT_D); ne = fp_to_real(NT_E);
    beta = fp_to_real(LMS_BETA);
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 5; i++) bw[c][i] = 0;
      for (int i = 0; i < 3; i++) begin ni[c][i] = 0; no[c][i] = 0; end
      for (int i = 0; i < N1; i++) h1[c][i] = 0;
      for (int i = 0; i < N2; i++) h2[c][i] = 0;
    end
    for (int i = 0; i < M; i++) begin xs[i] = 0; w[i] = 0; end
    for (int k = 0; k < NS; k++) begin
      for (int c = 0; c < 2; c++) begin
        x = fp_to_real(c == 0 ? abd[k] : tho[k]);
        lp = ba * x + bb * bw[c][1] + bc * bw[c][2] + bd * bw[c][3] + be * bw[c][4];
        bw[c][4] = bw[c][3]; bw[c][3] = bw[c][2]; bw[c][2] = bw[c][1]; bw[c][1] = lp;
        nt = na * lp + nb * ni[c][1] + nc * ni[c][2] + nd * no[c][1] + ne * no[c][2];
        ni[c][2] = ni[c][1]; ni[c][1] = lp; no[c][2] = no[c][1]; no[c][1] = nt;
        for (int i = N1 - 1; i > 0; i--) h1[c][i] = h1[c][i-1];
        h1[c][0] = nt;
        m1 = 0; for (int i = 0; i < N1; i++) m1 += h1[c][i]; m1 /= N1;
        for (int i = N2 - 1; i > 0; i--) h2[c][i] = h2[c][i-1];
        h2[c][0] = m1;
        m2 = 0; for (int i = 0; i < N2; i++) m2 += h2[c][i]; m2 /= N2;
        pre[c] = nt - m2;
      end
      for (int i = M - 1; i > 0; i--) xs[i] = xs[i-1];
      xs[0] = pre[0];
      y = 0;
      for (int i = 0; i < M; i++) y += w[i] * xs[i];
      want_e[k] = pre[1] - y;
      for (int i = 0; i < M; i++) w[i] += beta * want_e[k] * xs[i];
    end
  endtask

  // ----------------------------------------------------- checkers
  int idx = 0, gaps = 0, reports = 0, passes = 0;
  longint taken [$];
  logic [15:0] rr_final = '0, fhr_final = '0;
  int peaks [$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) taken.push_back(cycle + 1);
      if (!in_valid && idx < NS) gaps++;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (hv) begin
        reports++; rr_final = rrc; fhr_final = fhr;
        checks++;
        if (idx != NS) begin failures++; $display("FAIL rate reported after %0d samples", idx); end
      end
      if (pv) peaks.push_back(int'(loc));
      if (dut.u_detect.pass_start) passes++;
      if (fv) begin
        checks += 2;
        if (idx >= NS || !close(fp_to_real(fecg), want_e[idx], 1.0, 0.0, 1e-3 * AMP)) begin
          failures++; $display("FAIL fecg[%0d]=%g want %g", idx, fp_to_real(fecg), want_e[idx]);
        end
        if (taken.size() == 0 || cycle - taken[0] != 3) begin
          failures++; $display("FAIL latency %0d", taken.size() ? cycle - taken[0] : -1);
        end
        if (taken.size() != 0) void'(taken.pop_front());
        idx++;
      end
    end
  end

  // Distance from sample k to the nearest maternal beat (plus filter delay).
  function automatic int mat_dist(input int k);
    int best, d;
    best = 1 << 30;
    for (int i = 0; MAT_OFF + i * MAT_RR < NS + MAT_RR; i++) begin
      d = k - (MAT_OFF + i * MAT_RR + 25);
      if (d < 0) d = -d;
      if (d < best) best = d;
    end
    return best;
  endfunction

  task automatic check_peaks();
    bit seen [int];
    int d, early, late, residue, masked, found, total, spurious, missed;
    early = 0; late = 0; residue = 0; masked = 0; found = 0; total = 0; spurious = 0; missed = 0;
    foreach (peaks[i]) begin
      int near;
      if (peaks[i] < CONV) begin early++; continue; end
      late++;
      near = 0;
      for (int b = 0; b < NS / RR_F + 2; b++) begin
        d = peaks[i] - (fetal_at(b, RR_F) + 25);
        if (d < 0) d = -d;
        if (d <= 40) begin near = 1; seen[b] = 1; end
      end
      checks++;
      if (!near && mat_dist(peaks[i]) <= 60) residue++;
      else if (!near) spurious++;
    end
    for (int b = 0; fetal_at(b, RR_F) < NS - 60; b++) begin
      if (fetal_at(b, RR_F) < CONV + 100) continue;
      total++;
      checks++;
      if (seen.exists(b)) found++;
      else if (mat_dist(fetal_at(b, RR_F) + 25) <= 100) masked++;
      else missed++;
    end
    checks += 4;
    if (residue + spurious > total / 10 || found * 10 < total * 9) begin
      failures++; $display("FAIL %0d of %0d fetal beats found, %0d maternal residue and %0d other extra peaks", found, total, residue, spurious);
    end
    if (fhr_final < 60000 / RR_F * 95 / 100 || fhr_final > 60000 / RR_F * 105 / 100) begin failures++; $display("FAIL fhr=%0d", fhr_final); end
    if (int'(rr_final) != late - 1) begin
      failures++; $display("FAIL %0d intervals used, %0d peaks after the convergence point", rr_final, late);
    end
    if (early == 0) begin failures++; $display("FAIL no peak before the convergence point"); end
    $display("%0d peaks (%0d before sample %0d), %0d of %0d fetal beats found, %0d missed (%0d of them next to a maternal beat), %0d extra peaks, %0d intervals, FHR %0d bpm",
             peaks.size(), early, CONV, found, total, missed + masked, masked, residue + spurious, rr_final, fhr_final);
  endtask

  // -------------------------------------------------------------- driver
  initial begin
    for (int k = 0; k < NS; k++) begin
      abd[k] = real_to_fp(abdominal(k, RR_F, AMP));
      tho[k] = real_to_fp(thoracic(k, AMP));
    end
    build_model();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int k = 0; k < NS; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 19) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; abd_in = abd[k]; tho_in = tho[k];
      while (!in_ready) @(negedge clk);
    end
    @(negedge clk); in_valid = 0;
    while (reports == 0) @(negedge clk);
    repeat (200) @(negedge clk);
    checks += 4;
    if (idx != NS) begin failures++; $display("FAIL %0d fecg samples", idx); end
    if (reports != 1) begin failures++; $display("FAIL %0d rate reports", reports); end
    if (gaps == 0) begin failures++; $display("FAIL no idle input clocks"); end
    if (passes < 2) begin failures++; $display("FAIL detection passes: %0d", passes); end
    check_peaks();
    $display("idle clocks %0d, passes %0d", gaps, passes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
