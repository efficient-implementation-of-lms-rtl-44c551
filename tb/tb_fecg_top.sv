// tb_fecg_top: end-to-end test of the whole system in both LMS-AF modes.
//
// Two copies of the top run side by side on the same synthetic record of
// NS = 8000 sample pairs (ecg_synth_pkg, fetal RR 375 samples = 160 bpm,
// maternal RR 750): u_par with the parallel LMS-AF, u_ser with the series one.
// Sizes are reduced for run time (record of 8000 samples, convergence point
// 3000, BETA = 0.02 so that the weights settle in about a second of signal);
// M = 19, N1 = N2 = 200 and P = 40 keep the paper's values.
//
// Checks:
//  * every FECG sample of both copies against a real-valued model of the two
//    preprocessing channels and the LMS recursion (to within 2e-3), in order
//    and with none missing;
//  * FECG latency: 3 clocks in parallel mode (registered on the third rising
//    edge after the one that takes the pair);
//  * the series copy takes a pair no more often than every 2M+4 clocks;
//  * the detected R peaks after the convergence point: a peak counts as fetal
//    when it lies within 40 samples of a true fetal beat (plus 25 samples of
//    filter delay); at least 90% of the fetal beats must be found, extra
//    peaks may be at most a tenth of the beat count, and the rate must be
//    within 5% of 160 bpm;
//  * that each mechanism happened: idle input clocks, series stalls
//    (in_valid while in_ready is low), both read passes of the detection unit,
//    the fetal peak rules (a far maximum confirming the previous peak, and a
//    near maximum resolved against the previous one), and RR intervals
//    before the convergence point being left out.
module tb_fecg_top;
  import fecg_pkg::*;
  import fp_ref_pkg::*;
  import ecg_synth_pkg::*;

  localparam int NS    = 8000;
  localparam int CONV  = 3000;
  localparam int M     = 19;
  localparam int N1    = 200, N2 = 200;
  localparam int RR_F  = 375;
  localparam fp32_t BETA = 32'h3CA3_D70A;   // 0.02

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------------------------------------------------------ stimulus
  fp32_t abd [NS];
  fp32_t tho [NS];
  real   want_e [NS];

  // ------------------------------------------------------------- two DUTs
  typedef struct {
    logic        in_valid;
    fp32_t       abd, tho;
  } drive_t;
  drive_t dp = '{0, '0, '0}, ds = '{0, '0, '0};

  logic        p_ready, p_fv, p_ro, p_sv, p_tv, p_pv, p_hv;
  fp32_t       p_fecg, p_sdm, p_th;
  logic [31:0] p_loc;
  logic [15:0] p_fhr, p_rrc;
  logic        s_ready, s_fv, s_ro, s_sv, s_tv, s_pv, s_hv;
  fp32_t       s_fecg, s_sdm, s_th;
  logic [31:0] s_loc;
  logic [15:0] s_fhr, s_rrc;

  fecg_top #(.LMS_ARCH(LMS_PARALLEL), .M(M), .N1(N1), .N2(N2), .N_SAMPLES(NS),
             .CONV_SAMPLES(CONV), .BETA(BETA)) u_par (
    .clk, .rst_n, .in_valid(dp.in_valid), .in_ready(p_ready), .abd_in(dp.abd), .tho_in(dp.tho),
    .fecg_valid(p_fv), .fecg(p_fecg), .record_open(p_ro), .sdm_valid(p_sv), .sdm(p_sdm),
    .th(p_th), .th_valid(p_tv), .peak_valid(p_pv), .peak_loc(p_loc), .fhr(p_fhr),
    .fhr_valid(p_hv), .rr_count(p_rrc));

  fecg_top #(.LMS_ARCH(LMS_SERIES), .M(M), .N1(N1), .N2(N2), .N_SAMPLES(NS),
             .CONV_SAMPLES(CONV), .BETA(BETA)) u_ser (
    .clk, .rst_n, .in_valid(ds.in_valid), .in_ready(s_ready), .abd_in(ds.abd), .tho_in(ds.tho),
    .fecg_valid(s_fv), .fecg(s_fecg), .record_open(s_ro), .sdm_valid(s_sv), .sdm(s_sdm),
    .th(s_th), .th_valid(s_tv), .peak_valid(s_pv), .peak_loc(s_loc), .fhr(s_fhr),
    .fhr_valid(s_hv), .rr_count(s_rrc));

  initial begin : watchdog
    repeat (600000) @(posedge clk);
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
    beta = fp_to_real(BETA);
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

  // ----------------------------------------------------- FECG checkers
  int p_idx = 0, s_idx = 0;
  longint p_taken [$];
  int gaps = 0, stalls = 0, min_gap_ser = 1000000;
  longint s_last_take = -1;

  // handshakes are sampled at the rising edge that takes the pair (edge
  // number cycle + 1), outputs at the falling edge after the edge that
  // produced them
  always @(posedge clk) begin
    if (rst_n) begin
      if (dp.in_valid && p_ready) p_taken.push_back(cycle + 1);
      if (!dp.in_valid && p_idx < NS) gaps++;
      if (ds.in_valid && !s_ready) stalls++;
      if (ds.in_valid && s_ready) begin
        if (s_last_take >= 0 && cycle - s_last_take < min_gap_ser) min_gap_ser = int'(cycle - s_last_take);
        s_last_take = cycle;
      end
    end
  end

  logic [15:0] p_rr_final = '0, s_rr_final = '0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (p_hv) p_rr_final = p_rrc;
      if (s_hv) s_rr_final = s_rrc;
      if (p_fv) begin
        checks += 2;
        if (p_idx >= NS || !close(fp_to_real(p_fecg), want_e[p_idx], 1.0, 0.0, 2e-3)) begin
          failures++; $display("FAIL parallel fecg[%0d]=%g want %g", p_idx, fp_to_real(p_fecg), want_e[p_idx]);
        end
        if (p_taken.size() == 0 || cycle - p_taken[0] != 3) begin
          failures++; $display("FAIL parallel latency %0d", p_taken.size() ? cycle - p_taken[0] : -1);
        end
        if (p_taken.size() != 0) void'(p_taken.pop_front());
        p_idx++;
      end
      if (s_fv) begin
        checks++;
        if (s_idx >= NS || !close(fp_to_real(s_fecg), want_e[s_idx], 1.0, 0.0, 2e-3)) begin
          failures++; $display("FAIL series fecg[%0d]=%g want %g", s_idx, fp_to_real(s_fecg), want_e[s_idx]);
        end
        s_idx++;
      end
    end
  end

  // ------------------------------------------------------- peak checkers
  int p_peaks [$];
  int s_peaks [$];
  int far_cnt = 0, near_cnt = 0, passes = 0;
  always @(negedge clk) begin
    if (p_pv) p_peaks.push_back(int'(p_loc));
    if (s_pv) s_peaks.push_back(int'(s_loc));
    if (u_par.u_detect.u_fetal.in_valid && !u_par.u_detect.u_fetal.first
        && u_par.u_detect.u_fetal.over_th) begin
      if (u_par.u_detect.u_fetal.far) far_cnt++;
      else near_cnt++;
    end
    if (u_par.u_detect.pass_start) passes++;
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

  task automatic check_peaks(input string tag, input int pk [$], input logic [15:0] rate,
                             input logic [15:0] rrc);
    bit seen [int];
    int d, early, residue, masked, found, total, spurious, missed;
    early = 0; residue = 0; masked = 0; found = 0; total = 0; spurious = 0; missed = 0;
    foreach (pk[i]) begin
      int near;
      if (pk[i] < CONV) begin early++; continue; end
      near = 0;
      for (int b = 0; b < NS / RR_F + 2; b++) begin
        d = pk[i] - (fetal_at(b, RR_F) + 25);
        if (d < 0) d = -d;
        if (d <= 40) begin near = 1; seen[b] = 1; end
      end
      checks++;
      if (!near && mat_dist(pk[i]) <= 60) residue++;
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
    checks++;
    if (residue + spurious > total / 10 || found * 10 < total * 9) begin
      failures++; $display("FAIL %s: %0d of %0d fetal beats found, %0d maternal residue and %0d other extra peaks", tag, found, total, residue, spurious);
    end
    checks++;
    if (rate < 60000 / RR_F * 95 / 100 || rate > 60000 / RR_F * 105 / 100) begin failures++; $display("FAIL %s fhr=%0d", tag, rate); end
    checks++;
    if (early == 0 || int'(rrc) >= pk.size() - 1) begin
      failures++; $display("FAIL %s: no interval before convergence left out", tag);
    end
    $display("%s: %0d peaks (%0d before convergence), %0d of %0d fetal beats found, %0d missed (%0d of them next to a maternal beat), %0d extra peaks, %0d intervals, FHR %0d bpm",
             tag, pk.size(), early, found, total, missed + masked, masked, residue + spurious, rrc, rate);
  endtask

  // -------------------------------------------------------------- drivers
  bit p_done = 0, s_done = 0;
  initial begin
    for (int k = 0; k < NS; k++) begin
      abd[k] = real_to_fp(abdominal(k, RR_F, 1.0));
      tho[k] = real_to_fp(thoracic(k, 1.0));
    end
    build_model();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    fork
      begin : drive_parallel
        for (int k = 0; k < NS; k++) begin
          @(negedge clk);
          if ($urandom_range(0, 9) == 0) begin dp.in_valid = 0; @(negedge clk); end
          dp = '{1, abd[k], tho[k]};
          while (!p_ready) @(negedge clk);
        end
        @(negedge clk); dp.in_valid = 0;
        while (!p_hv) @(negedge clk);
        p_done = 1;
      end
      begin : drive_series
        for (int k = 0; k < NS; k++) begin
          @(negedge clk);
          if ($urandom_range(0, 9) == 0) begin ds.in_valid = 0; repeat ($urandom_range(1, 60)) @(negedge clk); end
          ds = '{1, abd[k], tho[k]};
          while (!s_ready) @(negedge clk);
        end
        @(negedge clk); ds.in_valid = 0;
        while (!s_hv) @(negedge clk);
        s_done = 1;
      end
    join
    repeat (2) @(negedge clk);
    checks += 2;
    if (p_idx != NS || s_idx != NS) begin
      failures++; $display("FAIL fecg samples: %0d parallel, %0d series", p_idx, s_idx);
    end
    if (min_gap_ser < 2 * M + 4) begin
      failures++; $display("FAIL series took pairs %0d clocks apart", min_gap_ser);
    end
    check_peaks("parallel", p_peaks, p_fhr, p_rr_final);
    check_peaks("series", s_peaks, s_fhr, s_rr_final);
    // mechanisms
    checks += 5;
    if (gaps == 0)     begin failures++; $display("FAIL no idle input clocks"); end
    if (stalls == 0)   begin failures++; $display("FAIL no series stall"); end
    if (passes < 2)    begin failures++; $display("FAIL detection passes: %0d", passes); end
    if (far_cnt == 0)  begin failures++; $display("FAIL no far maximum"); end
    if (near_cnt == 0) begin failures++; $display("FAIL no near maximum"); end
    $display("idle clocks %0d, series stalls %0d, passes %0d, far %0d, near %0d, min series gap %0d",
             gaps, stalls, passes, far_cnt, near_cnt, min_gap_ser);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
