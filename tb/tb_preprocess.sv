// tb_preprocess: checks the full preprocessing channel against a model.
//
// Feeds 1500 samples (slow tone, drift, offset and a tone at the notch
// frequency, with idle gaps) through low pass, notch and baseline removal at
// N1 = N2 = 200. A real-valued model of the three difference equations gives
// each output, which must arrive exactly three clocks after its sample and
// match to within 2e-4. busy must be high exactly while a sample is inside.
module tb_preprocess;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  localparam int N1 = 200, N2 = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fp32_t in_data = '0;
  logic out_valid, busy;
  fp32_t out_data;
  int checks = 0, failures = 0;

  preprocess #(.N1(N1), .N2(N2)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expectation pipeline: three clocks
  logic pending = 0;
  real  want;
  logic pv [1:3] = '{0, 0, 0};
  real  pw [1:3];
  always @(posedge clk) begin
    pv[1] <= pending; pw[1] <= want;
    pv[2] <= pv[1];   pw[2] <= pw[1];
    pv[3] <= pv[2];   pw[3] <= pw[2];
  end
  always @(negedge clk) begin
    if (rst_n) begin
      checks += 2;
      if (out_valid !== pv[3]) begin
        failures++; $display("FAIL out_valid=%b expected %b", out_valid, pv[3]);
      end
      if (busy !== (pv[1] || pv[2])) begin
        failures++; $display("FAIL busy=%b", busy);
      end
      if (pv[3] && out_valid) begin
        checks++;
        if (!close(fp_to_real(out_data), pw[3], 1.0, 0.0, 2e-4)) begin
          failures++; $display("FAIL out=%g want=%g", fp_to_real(out_data), pw[3]);
        end
      end
    end
  end

  initial begin
    real bw [0:4];
    real ni [0:2];
    real no [0:2];
    real h1 [N1];
    real h2 [N2];
    real x, t, lp, nt, m1, m2;
    real ba, bb, bc, bd, be, na, nb, nc, nd, ne;
    ba = fp_to_real(BW_A); bb = fp_to_real(BW_B); bc = fp_to_real(BW_C);
    bd = fp_to_real(BW_D); be = fp_to_real(BW_E);
    na = fp_to_real(NT_A); nb = fp_to_real(NT_B); nc = fp_to_real(NT_C);
    nd = fp_to_real(NT_D); ne = fp_to_real(NT_E);
    for (int i = 0; i <= 4; i++) bw[i] = 0;
    for (int i = 0; i <= 2; i++) begin ni[i] = 0; no[i] = 0; end
    for (int i = 0; i < N1; i++) h1[i] = 0;
    for (int i = 0; i < N2; i++) h2[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 1500; k++) begin
      while ($urandom_range(0, 4) == 0) begin
        @(negedge clk); in_valid = 0; pending = 0;
      end
      @(negedge clk);
      t = real'(k) / 1000.0;
      x = 0.6 * $sin(2.0 * 3.14159265 * 2.0 * t) + 0.4 * t + 0.3
        + 0.2 * $sin(2.0 * 3.14159265 * 135.2 * t);
      in_data = real_to_fp(x);
      x = fp_to_real(in_data);
      lp = ba * x + bb * bw[1] + bc * bw[2] + bd * bw[3] + be * bw[4];
      bw[4] = bw[3]; bw[3] = bw[2]; bw[2] = bw[1]; bw[1] = lp;
      nt = na * lp + nb * ni[1] + nc * ni[2] + nd * no[1] + ne * no[2];
      ni[2] = ni[1]; ni[1] = lp; no[2] = no[1]; no[1] = nt;
      for (int i = N1 - 1; i > 0; i--) h1[i] = h1[i-1];
      h1[0] = nt;
      m1 = 0; for (int i = 0; i < N1; i++) m1 += h1[i]; m1 /= N1;
      for (int i = N2 - 1; i > 0; i--) h2[i] = h2[i-1];
      h2[0] = m1;
      m2 = 0; for (int i = 0; i < N2; i++) m2 += h2[i]; m2 /= N2;
      want = nt - m2;
      in_valid = 1; pending = 1;
    end
    @(negedge clk); in_valid = 0; pending = 0;
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
