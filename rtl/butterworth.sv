// butterworth: fourth-order low-pass IIR filter (meant as a 45 Hz cut-off at
// 1 kHz; with the five-decimal coefficients as published the gain is 0.96 at
// DC, about 0.71 near 36 Hz and 0.46 at 45 Hz).
//
// Computes O[k] = a*I[k] + b*O[k-1] + c*O[k-2] + d*O[k-3] + e*O[k-4] with the
// paper's coefficients (fecg_pkg::BW_*), all in single-precision floating
// point: five FPU multipliers and a chain of four FPU adders, evaluated
// combinationally from the new input and the four stored outputs.
//
// Interface and timing: a sample is taken when in_valid is high; its output
// appears on out_data with out_valid high one clock later (latency 1, one
// sample per clock, as in the paper). The output history is cleared to zero by
// reset; the valid strobes, the reset and the order of the additions are this
// design's choices.
module butterworth
  import fecg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t in_data,
  output logic  out_valid,
  output fp32_t out_data
);

  fp32_t o_hist [1:4];          // O[k-1] .. O[k-4]
  fp32_t prod   [0:4];
  fp32_t sum    [1:4];

  fpu u_m0 (.op(FPU_MUL), .a(BW_A), .b(in_data),   .y(prod[0]));
  fpu u_m1 (.op(FPU_MUL), .a(BW_B), .b(o_hist[1]), .y(prod[1]));
  fpu u_m2 (.op(FPU_MUL), .a(BW_C), .b(o_hist[2]), .y(prod[2]));
  fpu u_m3 (.op(FPU_MUL), .a(BW_D), .b(o_hist[3]), .y(prod[3]));
  fpu u_m4 (.op(FPU_MUL), .a(BW_E), .b(o_hist[4]), .y(prod[4]));

  fpu u_a1 (.op(FPU_ADD), .a(prod[0]), .b(prod[1]), .y(sum[1]));
  fpu u_a2 (.op(FPU_ADD), .a(sum[1]),  .b(prod[2]), .y(sum[2]));
  fpu u_a3 (.op(FPU_ADD), .a(sum[2]),  .b(prod[3]), .y(sum[3]));
  fpu u_a4 (.op(FPU_ADD), .a(sum[3]),  .b(prod[4]), .y(sum[4]));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 1; i <= 4; i++) o_hist[i] <= FP_ZERO;
      out_data  <= FP_ZERO;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        o_hist[1] <= sum[4];
        for (int i = 2; i <= 4; i++) o_hist[i] <= o_hist[i-1];
        out_data  <= sum[4];
      end
    end
  end

endmodule
