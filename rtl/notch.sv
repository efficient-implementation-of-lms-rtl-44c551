// notch: second-order IIR notch filter for power-line interference.
//
// Computes O[k] = a*I[k] + b*I[k-1] + c*I[k-2] + d*O[k-1] + e*O[k-2] with the
// paper's coefficients (fecg_pkg::NT_*) in single-precision floating point:
// five FPU multipliers and four chained FPU adders, evaluated combinationally
// from the new input, the two previous inputs and the two previous outputs.
// The filter is meant as a 50 Hz notch (Q = 25) at a 1 kHz sample rate, but
// the coefficients as published (a = c = 0.99405, b = -1.31278, d = 1.31272,
// e = -0.98804) place the zero pair at cos(w) = -b/2a = 0.6603, i.e. at
// 0.1352 fs = 135.2 Hz at 1 kHz. They are kept unchanged; a 50 Hz notch would
// need b = -2a cos(2 pi 0.05) and d = -b (approximately) instead.
//
// Interface and timing: as the Butterworth filter, a sample taken with
// in_valid comes out one clock later with out_valid (latency 1). The valid
// strobes, the zero reset of the history and the order of the additions are
// this design's choices.
module notch
  import fecg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t in_data,
  output logic  out_valid,
  output fp32_t out_data
);

  fp32_t i1, i2, o1, o2;         // I[k-1], I[k-2], O[k-1], O[k-2]
  fp32_t prod [0:4];
  fp32_t sum  [1:4];

  fpu u_m0 (.op(FPU_MUL), .a(NT_A), .b(in_data), .y(prod[0]));
  fpu u_m1 (.op(FPU_MUL), .a(NT_B), .b(i1),      .y(prod[1]));
  fpu u_m2 (.op(FPU_MUL), .a(NT_C), .b(i2),      .y(prod[2]));
  fpu u_m3 (.op(FPU_MUL), .a(NT_D), .b(o1),      .y(prod[3]));
  fpu u_m4 (.op(FPU_MUL), .a(NT_E), .b(o2),      .y(prod[4]));

  fpu u_a1 (.op(FPU_ADD), .a(prod[0]), .b(prod[1]), .y(sum[1]));
  fpu u_a2 (.op(FPU_ADD), .a(sum[1]),  .b(prod[2]), .y(sum[2]));
  fpu u_a3 (.op(FPU_ADD), .a(sum[2]),  .b(prod[3]), .y(sum[3]));
  fpu u_a4 (.op(FPU_ADD), .a(sum[3]),  .b(prod[4]), .y(sum[4]));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      i1 <= FP_ZERO; i2 <= FP_ZERO; o1 <= FP_ZERO; o2 <= FP_ZERO;
      out_data  <= FP_ZERO;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        i1 <= in_data; i2 <= i1;
        o1 <= sum[4];  o2 <= o1;
        out_data <= sum[4];
      end
    end
  end

endmodule
