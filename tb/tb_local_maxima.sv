// tb_local_maxima: checks the local maxima listing and the threshold.
//
// Feeds a record of N = 1500 samples made of smooth bumps of different
// heights (some below m1) and a ragged bump, with idle gaps. A model running
// the same listing in real arithmetic gives, per sample, whether (pl, pv) is
// presented and its value, and the final th = (m1 + m2)/2. The record is then
// replayed after start: the same pairs must come out again and th must hold
// its value until the end of the second pass.
module tb_local_maxima;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int N = 1500;

  logic clk = 0, rst_n = 0, start = 0;
  logic in_valid = 0;
  fp32_t in_data = '0, m1;
  logic pk_valid, th_valid;
  logic [31:0] pl;
  fp32_t pv, th;
  int checks = 0, failures = 0;

  local_maxima #(.N_SAMPLES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rec [N];
  logic        exp_v;
  logic [31:0] exp_pl;
  real         exp_pv;
  logic        exp_v_q = 0;
  logic [31:0] exp_pl_q;
  real         exp_pv_q;
  int          peaks_seen = 0;
  always @(posedge clk) begin
    exp_v_q <= exp_v; exp_pl_q <= exp_pl; exp_pv_q <= exp_pv;
  end
  always @(negedge clk) begin
    if (rst_n && !start) begin
      checks++;
      if (pk_valid !== exp_v_q) begin
        failures++; $display("FAIL pk_valid=%b expected %b", pk_valid, exp_v_q);
      end else if (pk_valid) begin
        checks++;
        if (pl !== exp_pl_q || fp_to_real(pv) != exp_pv_q) begin
          failures++;
          $display("FAIL pl=%0d pv=%g, expected %0d %g", pl, fp_to_real(pv), exp_pl_q, exp_pv_q);
        end
      end
    end
  end

  task automatic run_pass(output real m2_out);
    real r1, r3, m2, x, m1r;
    int unsigned r2, r4;
    r1 = 0; r3 = 0; m2 = 0; r2 = 0; r4 = 0;
    m1r = fp_to_real(m1);
    for (int k = 0; k < N; k++) begin
      while ($urandom_range(0, 5) == 0) begin
        @(negedge clk); in_valid = 0; exp_v = 0;
      end
      @(negedge clk);
      in_data = rec[k];
      x = fp_to_real(rec[k]);
      exp_v = 0;
      if (x > m1r && x > r1) begin
        r3 = x; r4 = r2;
      end else if (x < m1r) begin
        exp_v = 1; exp_pl = r4; exp_pv = r3;
        m2 = m2 + r3 / N;
      end
      r1 = x; r2++;
      in_valid = 1;
    end
    @(negedge clk); in_valid = 0; exp_v = 0;
    @(negedge clk);
    m2_out = m2;
  endtask

  initial begin
    real v, m2a, m2b, want_th, th_first;
    for (int k = 0; k < N; k++) begin
      int ph;
      ph = k % 300;
      v = 0.01;
      if (ph >= 40 && ph < 80) v += (1.0 + 0.5 * real'((k / 300) % 3)) * $sin(3.14159265 * real'(ph - 40) / 40.0);
      if (ph >= 150 && ph < 170) v += 0.15 * $sin(3.14159265 * real'(ph - 150) / 20.0);
      if (ph >= 220 && ph < 240) v += 0.6 + 0.1 * real'((ph % 4 == 0) ? 1 : 0);  // ragged top
      rec[k] = real_to_fp(v);
    end
    m1 = real_to_fp(0.2);
    exp_v = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    run_pass(m2a);
    want_th = (0.2 + m2a) / 2.0;
    checks += 2;
    if (!th_valid) begin failures++; $display("FAIL th_valid low after pass"); end
    if (!close(fp_to_real(th), want_th, want_th, 1e-4, 0.0)) begin
      failures++; $display("FAIL th=%g want=%g", fp_to_real(th), want_th);
    end
    th_first = fp_to_real(th);
    // second pass: same pairs, th held
    start = 1; @(negedge clk); start = 0;
    checks++;
    if (fp_to_real(th) != th_first || !th_valid) begin
      failures++; $display("FAIL th not held across start");
    end
    run_pass(m2b);
    checks++;
    if (fp_to_real(th) != th_first) begin
      failures++; $display("FAIL th changed on the second pass");
    end
    $display("th=%g m2=%g", fp_to_real(th), m2a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
