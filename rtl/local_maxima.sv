// local_maxima: finds the local maxima of sdm above m1 and the threshold th.
//
// Follows the paper's per-sample listing, with in the sdm sample:
//   if (in > m1 and in > R1)  R3 = in, R4 = R2      -- rising above m1
//   else if (in < m1)         pv = R3, pl = R4, m2 = m2 + pv/N
//   R1 = in;  R2 = R2 + 1;    if (R2 == N) th = (m1 + m2) / 2
// R1 holds the previous sample, R2 the location counter, R3/R4 the value and
// location of the last rising sample above m1, i.e. the top of the last peak
// once the signal has fallen below m1. (pl, pv) is presented, with pk_valid, in
// every sample below m1, exactly as listed; m2 accumulates it each time.
// Comparisons are FPU compares; th uses an FPU adder and a multiply by 0.5.
// Six FPU instances.
//
// Interface and timing: start (one clock) clears R1..R4, the counter and m2
// for a new pass over the record; th and th_valid are kept, so a second pass
// can use the threshold found by the first. Outputs are registered, one clock
// after the sample. th_valid rises in the clock after the N-th sample of a
// pass. Locations are unsigned integers counted from 0. Reset values are zero
// (this design's choice).
module local_maxima
  import fecg_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 30000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  fp32_t       in_data,
  input  fp32_t       m1,
  output logic        pk_valid,
  output logic [31:0] pl,
  output fp32_t       pv,
  output fp32_t       th,
  output logic        th_valid
);

  localparam fp32_t INV_N = recip_fp(N_SAMPLES);

  fp32_t       r1, r3, m2;
  logic [31:0] r2, r4;
  fp32_t       cmp_m1, cmp_r1, pv_n, m2_new, m_sum, th_new;
  logic        above, below, rising;

  fpu u_cmp_m1 (.op(FPU_CMP), .a(in_data), .b(m1),     .y(cmp_m1));
  fpu u_cmp_r1 (.op(FPU_CMP), .a(in_data), .b(r1),     .y(cmp_r1));
  fpu u_pv_n   (.op(FPU_MUL), .a(r3),      .b(INV_N),  .y(pv_n));
  fpu u_m2     (.op(FPU_ADD), .a(m2),      .b(pv_n),   .y(m2_new));
  fpu u_msum   (.op(FPU_ADD), .a(m1),      .b(below ? m2_new : m2), .y(m_sum));
  fpu u_half   (.op(FPU_MUL), .a(m_sum),   .b(FP_HALF), .y(th_new));

  always_comb begin
    above  = (cmp_m1[1:0] == CMP_GT);
    below  = (cmp_m1[1:0] == CMP_LT);
    rising = (cmp_r1[1:0] == CMP_GT);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      th <= FP_ZERO;
      th_valid <= 1'b0;
    end else if (in_valid && !start && (r2 + 1 == N_SAMPLES)) begin
      th <= th_new;
      th_valid <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      r1 <= FP_ZERO; r3 <= FP_ZERO; m2 <= FP_ZERO;
      r2 <= '0; r4 <= '0;
      pk_valid <= 1'b0; pl <= '0; pv <= FP_ZERO;
    end else begin
      pk_valid <= 1'b0;
      if (in_valid) begin
        if (above && rising) begin
          r3 <= in_data;
          r4 <= r2;
        end else if (below) begin
          pv <= r3;
          pl <= r4;
          pk_valid <= 1'b1;
          m2 <= m2_new;
        end
        r1 <= in_data;
        r2 <= r2 + 1;
      end
    end
  end

endmodule
