// peak_enhance: differentiate, square and average the extracted FECG.
//
// Per sample, as in the paper's listing: pval = cval, cval = input,
// sdiff = (cval - pval)^2, the new value sdiff/P enters memory M, and the
// running sum sdm gains it and loses the value leaving the memory, so sdm is
// the mean of the last P squared differences (P = 40). The running mean of sdm
// over the record is accumulated as m1 += sdm/N (N = N_SAMPLES), so m1 is the
// mean of sdm once N samples have passed. Squaring favours the steep fetal R
// waves over the blunter maternal residue. Seven FPU instances.
//
// Interface and timing: start (one clock) clears the state for a new record.
// A sample taken with in_valid gives sdm and the updated m1 one clock later
// with out_valid. The paper writes "M[0] = sdiff/P; sdm = sdm + M[0] - M[P-1];
// shift"; this design subtracts the value P samples old so the window is
// exactly P long. State clears to zero on reset and start (this design's
// choice).
module peak_enhance
  import fecg_pkg::*;
#(
  parameter int unsigned P         = 40,
  parameter int unsigned N_SAMPLES = 30000
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  input  fp32_t in_data,
  output logic  out_valid,
  output fp32_t sdm,
  output fp32_t m1
);

  localparam fp32_t INV_P = recip_fp(P);
  localparam fp32_t INV_N = recip_fp(N_SAMPLES);

  fp32_t cval;
  fp32_t mem [P];       // M[0] .. M[P-1], newest first
  fp32_t diff, sdiff, m0, sdm_add, sdm_new, m1_inc, m1_new;

  fpu u_diff (.op(FPU_SUB), .a(in_data), .b(cval),       .y(diff));
  fpu u_sq   (.op(FPU_MUL), .a(diff),    .b(diff),       .y(sdiff));
  fpu u_invp (.op(FPU_MUL), .a(sdiff),   .b(INV_P),      .y(m0));
  fpu u_add  (.op(FPU_ADD), .a(sdm),     .b(m0),         .y(sdm_add));
  fpu u_sub  (.op(FPU_SUB), .a(sdm_add), .b(mem[P-1]),   .y(sdm_new));
  fpu u_invn (.op(FPU_MUL), .a(sdm_new), .b(INV_N),      .y(m1_inc));
  fpu u_m1   (.op(FPU_ADD), .a(m1),      .b(m1_inc),     .y(m1_new));

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      cval <= FP_ZERO;
      for (int i = 0; i < int'(P); i++) mem[i] <= FP_ZERO;
      sdm <= FP_ZERO;
      m1  <= FP_ZERO;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        cval   <= in_data;
        mem[0] <= m0;
        for (int i = 1; i < int'(P); i++) mem[i] <= mem[i-1];
        sdm <= sdm_new;
        m1  <= m1_new;
      end
    end
  end

endmodule
