// lms_parallel: LMS adaptive filter, parallel architecture.
//
// Separates the fetal ECG by adaptively cancelling the maternal component: the
// abdominal signal x is the filter input, the thoracic signal d the desired
// signal, and the error e[n] = d[n] - y[n] is the output (the FECG). Per sample:
//   y[n]   = sum_i w[i] * sx[i],  sx[i] = SCALE_X * x[n-i]     (i = 0..M-1)
//   e[n]   = SCALE_D * d[n] - y[n]
//   w[i]  += BETA * e[n] * sx[i]                                (BETA = 2*mu)
// Every product, the adder chain, the error and all M weight updates are
// separate FPU instances working in one clock, 5*M + 3 of them (98 for
// M = 19): M scalers and M multipliers for the products, M adders for y
// (starting from zero), the d scaler, the error subtractor, the BETA
// multiplier, and M multipliers and M adders for the updates.
//
// Interface and timing: with in_valid the new abdominal sample is shifted into
// memory 1 (x[0]) and used at once; e_out and y_out follow one clock later
// with out_valid, and the updated weights are stored on the same edge. A new
// sample can be given every clock (latency 1, as in the paper).
// The paper gives M = 19 and mu = 7e-5; the scaling factors are not given and
// default to 1.0. The weights start at zero after reset (this design's choice).
module lms_parallel
  import fecg_pkg::*;
#(
  parameter int unsigned M       = 19,
  parameter fp32_t       BETA    = LMS_BETA,
  parameter fp32_t       SCALE_X = FP_ONE,
  parameter fp32_t       SCALE_D = FP_ONE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x_in,
  input  fp32_t d_in,
  output logic  out_valid,
  output fp32_t e_out,
  output fp32_t y_out
);

  fp32_t x [M];          // memory 1: x[n-1] .. x[n-M] before the shift
  fp32_t w [M];          // memory 2

  fp32_t x_new [M];
  fp32_t sx    [M];
  fp32_t prod  [M];
  fp32_t acc   [M+1];
  fp32_t upd   [M];
  fp32_t w_new [M];
  fp32_t sd, err, g;

  always_comb begin
    x_new[0] = x_in;
    for (int i = 1; i < int'(M); i++) x_new[i] = x[i-1];
  end
  assign acc[0] = FP_ZERO;

  for (genvar i = 0; i < int'(M); i++) begin : g_tap
    fpu u_scale (.op(FPU_MUL), .a(x_new[i]), .b(SCALE_X), .y(sx[i]));
    fpu u_mul   (.op(FPU_MUL), .a(sx[i]),    .b(w[i]),    .y(prod[i]));
    fpu u_acc   (.op(FPU_ADD), .a(acc[i]),   .b(prod[i]), .y(acc[i+1]));
    fpu u_upd   (.op(FPU_MUL), .a(g),        .b(sx[i]),   .y(upd[i]));
    fpu u_wadd  (.op(FPU_ADD), .a(w[i]),     .b(upd[i]),  .y(w_new[i]));
  end

  fpu u_sd   (.op(FPU_MUL), .a(d_in), .b(SCALE_D), .y(sd));
  fpu u_err  (.op(FPU_SUB), .a(sd),   .b(acc[M]),  .y(err));
  fpu u_beta (.op(FPU_MUL), .a(BETA), .b(err),     .y(g));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) begin
        x[i] <= FP_ZERO;
        w[i] <= FP_ZERO;
      end
      out_valid <= 1'b0;
      e_out     <= FP_ZERO;
      y_out     <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < int'(M); i++) begin
          x[i] <= x_new[i];
          w[i] <= w_new[i];
        end
        e_out <= err;
        y_out <= acc[M];
      end
    end
  end

endmodule
