// baseline_wander: baseline wander removal by a two-stage moving average.
//
// The first stage keeps the last N1 samples in a shifting memory and a running
// mean M1: each new sample times 1/N1 is added to M1 and the sample leaving the
// window times 1/N1 is subtracted. The second stage does the same on M1 with a
// memory of N2 values of M1/N2, giving M2, the mean of the last N2 values of
// M1 - the estimate of the baseline. The output is the input minus M2.
// Structure and sizes (N1 = N2 = 200) follow the paper; eight FPU instances
// do the arithmetic.
//
// Interface and timing: a sample taken with in_valid gives out_data (the
// corrected sample) and baseline (M2) one clock later with out_valid (latency
// 1). This design's choices: the new sample enters and the oldest leaves in
// the same clock, so M1 and M2 are exactly the paper's equations (1) and (2);
// the subtraction uses the current input with no delay to centre the window;
// memories and means are cleared by reset.
module baseline_wander
  import fecg_pkg::*;
#(
  parameter int unsigned N1 = 200,
  parameter int unsigned N2 = 200
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t in_data,
  output logic  out_valid,
  output fp32_t out_data,
  output fp32_t baseline
);

  localparam fp32_t INV_N1 = recip_fp(N1);
  localparam fp32_t INV_N2 = recip_fp(N2);

  fp32_t mem1 [N1];      // x[0] .. x[N1-1]
  fp32_t mem2 [N2];      // y[0] .. y[N2-1], each M1/N2
  fp32_t m1, m2;

  fp32_t x_in_s, x_out_s, m1_add, m1_new;
  fp32_t y_in, m2_add, m2_new, corrected;

  // stage 1
  fpu u_s1_in  (.op(FPU_MUL), .a(in_data),      .b(INV_N1),  .y(x_in_s));
  fpu u_s1_out (.op(FPU_MUL), .a(mem1[N1-1]),   .b(INV_N1),  .y(x_out_s));
  fpu u_s1_add (.op(FPU_ADD), .a(m1),           .b(x_in_s),  .y(m1_add));
  fpu u_s1_sub (.op(FPU_SUB), .a(m1_add),       .b(x_out_s), .y(m1_new));
  // stage 2
  fpu u_s2_in  (.op(FPU_MUL), .a(m1_new),       .b(INV_N2),  .y(y_in));
  fpu u_s2_add (.op(FPU_ADD), .a(m2),           .b(y_in),    .y(m2_add));
  fpu u_s2_sub (.op(FPU_SUB), .a(m2_add),       .b(mem2[N2-1]), .y(m2_new));
  // removal
  fpu u_remove (.op(FPU_SUB), .a(in_data),      .b(m2_new),  .y(corrected));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N1); i++) mem1[i] <= FP_ZERO;
      for (int i = 0; i < int'(N2); i++) mem2[i] <= FP_ZERO;
      m1 <= FP_ZERO;
      m2 <= FP_ZERO;
      out_valid <= 1'b0;
      out_data  <= FP_ZERO;
      baseline  <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        mem1[0] <= in_data;
        for (int i = 1; i < int'(N1); i++) mem1[i] <= mem1[i-1];
        mem2[0] <= y_in;
        for (int i = 1; i < int'(N2); i++) mem2[i] <= mem2[i-1];
        m1 <= m1_new;
        m2 <= m2_new;
        out_data <= corrected;
        baseline <= m2_new;
      end
    end
  end

endmodule
