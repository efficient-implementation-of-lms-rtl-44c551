// lms_series: LMS adaptive filter, series architecture.
//
// Same filter as lms_parallel (y = sum w[i]*SCALE_X*x[n-i], e = SCALE_D*d - y,
// w[i] += BETA*e*SCALE_X*x[n-i]) but with one multiply-accumulate and one
// weight update per clock, built from 9 FPU instances: two x scalers, the
// x*w multiplier, the y adder, the d scaler, the error subtractor, the BETA
// multiplier, the update multiplier and the weight adder.
//
// Schedule of one sample, counter i = 0 .. 2M (2M+1 clocks, as in the paper):
//   i <  M : y += sx[j]*w[j] for j = M-1-i, and x[j] is copied to x[j+1].
//            Memory 1 has M+1 words; after M clocks y is complete and the
//            vector has moved down one place.
//   i =  M : e = SCALE_D*d - y and g = BETA*e are formed; w[0]'s new value is
//            computed.
//   M <= i < 2M : w[k]'s new value (k = i-M) is computed from x[k+1], which
//            after the move holds the sample that multiplied w[k]; it is
//            written into memory 2 one clock later (i = M+1 .. 2M).
// In the last clock (i = 2M) in_ready is high, so the next abdominal sample
// goes into x[0] and the next thoracic sample into d while the last weight is
// written: one sample per 2M+1 clocks. e_out/y_out and out_valid appear 2M+1
// clocks after the sample was taken.
//
// The paper gives the per-clock steps and the 2M+1 latency; it does not give
// the order in which the elements are visited. Copying x[j] to x[j+1] without
// losing data needs the visit to run from x[M-1] down to x[0], which is what
// this design does. The valid/ready handshake, zero weights after reset and
// scaling factors of 1.0 are this design's choices.
module lms_series
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
  output logic  in_ready,
  input  fp32_t x_in,
  input  fp32_t d_in,
  output logic  out_valid,
  output fp32_t e_out,
  output fp32_t y_out
);

  localparam int unsigned IW = $clog2(2 * M + 1);
  localparam int XW = $clog2(M + 1);            // index of memory 1 (M+1 words)
  localparam int WW = (M > 1) ? $clog2(M) : 1;   // index of memory 2 (M words)

  fp32_t x [M+1];        // memory 1, one extra word
  fp32_t w [M];          // memory 2
  fp32_t y_acc, d_reg, e_reg, g_reg, w_tmp;
  logic [IW-1:0] i_cnt;
  logic [IW-1:0] w_idx;
  logic          w_pend;
  logic          busy;

  // element visited by the accumulate phase, weight index of the update phase
  logic [IW-1:0] j_idx, k_idx;
  logic          acc_phase, upd_phase, last;
  always_comb begin
    acc_phase = busy && (i_cnt < IW'(M));
    upd_phase = busy && (i_cnt >= IW'(M)) && (i_cnt < IW'(2 * M));
    last      = busy && (i_cnt == IW'(2 * M));
    j_idx     = acc_phase ? IW'(M - 1) - i_cnt : '0;
    k_idx     = upd_phase ? i_cnt - IW'(M) : '0;
  end

  fp32_t sx1, xw, y_sum, y_base, sd, err, g_new, g_use, sx2, gx, w_sum;
  fp32_t x_j, w_j, x_k1, w_k;
  always_comb begin
    x_j    = x[XW'(j_idx)];
    w_j    = w[WW'(j_idx)];
    x_k1   = x[XW'(k_idx) + XW'(1)];
    w_k    = w[WW'(k_idx)];
    y_base = (i_cnt == '0) ? FP_ZERO : y_acc;
    g_use  = (i_cnt == IW'(M)) ? g_new : g_reg;
  end

  fpu u_sx1  (.op(FPU_MUL), .a(x_j),    .b(SCALE_X), .y(sx1));
  fpu u_xw   (.op(FPU_MUL), .a(sx1),    .b(w_j),     .y(xw));
  fpu u_yadd (.op(FPU_ADD), .a(y_base), .b(xw),      .y(y_sum));
  fpu u_sd   (.op(FPU_MUL), .a(d_reg),  .b(SCALE_D), .y(sd));
  fpu u_err  (.op(FPU_SUB), .a(sd),     .b(y_acc),   .y(err));
  fpu u_beta (.op(FPU_MUL), .a(BETA),   .b(err),     .y(g_new));
  fpu u_sx2  (.op(FPU_MUL), .a(x_k1),   .b(SCALE_X), .y(sx2));
  fpu u_gx   (.op(FPU_MUL), .a(g_use),  .b(sx2),     .y(gx));
  fpu u_wadd (.op(FPU_ADD), .a(w_k),    .b(gx),      .y(w_sum));

  assign in_ready = !busy || last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i <= int'(M); i++) x[i] <= FP_ZERO;
      for (int i = 0; i < int'(M); i++)  w[i] <= FP_ZERO;
      y_acc <= FP_ZERO; d_reg <= FP_ZERO; e_reg <= FP_ZERO;
      g_reg <= FP_ZERO; w_tmp <= FP_ZERO;
      i_cnt <= '0; w_idx <= '0; w_pend <= 1'b0; busy <= 1'b0;
      out_valid <= 1'b0; e_out <= FP_ZERO; y_out <= FP_ZERO;
    end else begin
      out_valid <= 1'b0;
      // write of the weight computed in the previous clock
      if (w_pend) w[WW'(w_idx)] <= w_tmp;
      w_pend <= 1'b0;

      if (acc_phase) begin
        y_acc      <= y_sum;
        x[XW'(j_idx) + XW'(1)] <= x_j;
      end
      if (busy && i_cnt == IW'(M)) begin
        e_reg <= err;
        g_reg <= g_new;
      end
      if (upd_phase) begin
        w_tmp  <= w_sum;
        w_idx  <= k_idx;
        w_pend <= 1'b1;
      end

      if (busy && !last) i_cnt <= i_cnt + 1'b1;
      if (last) begin
        out_valid <= 1'b1;
        e_out     <= e_reg;
        y_out     <= y_acc;
        busy      <= 1'b0;
      end
      if (in_valid && in_ready) begin
        x[0]  <= x_in;
        d_reg <= d_in;
        busy  <= 1'b1;
        i_cnt <= '0;
      end
    end
  end

endmodule
