// fetal_peak: picks the fetal R peaks out of the local maxima.
//
// The first (pl, pv) pair after start only loads R1 = pl (location) and
// R2 = pv (value). After that, for each pair, as in the paper's listing:
//   if (pv > th)
//     if (pl - R1 > MIN_DIST)  out = R1, R1 = pl, R2 = pv   -- R1 confirmed
//     else if (pv > R2)        out = pl, R1 = pl, R2 = pv   -- larger one wins
//     else                     out = R1
// so of two maxima closer than MIN_DIST = 200 samples (300 bpm at 1 kHz) only
// the larger is kept. out is written whenever pv > th and may repeat a
// location; a change of out marks a new peak. Two FPU compares.
//
// Interface and timing: out and out_valid are registered, one clock after the
// pair. Locations are unsigned sample counts, so pl - R1 is an integer
// subtraction (this design's choice; values stay floating point).
module fetal_peak
  import fecg_pkg::*;
#(
  parameter int unsigned MIN_DIST = 200
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  logic [31:0] pl,
  input  fp32_t       pv,
  input  fp32_t       th,
  output logic        out_valid,
  output logic [31:0] out
);

  logic [31:0] r1;
  fp32_t       r2;
  logic        first;
  fp32_t       cmp_th, cmp_r2;
  logic        over_th, over_r2, far;

  fpu u_cmp_th (.op(FPU_CMP), .a(pv), .b(th), .y(cmp_th));
  fpu u_cmp_r2 (.op(FPU_CMP), .a(pv), .b(r2), .y(cmp_r2));

  always_comb begin
    over_th = (cmp_th[1:0] == CMP_GT);
    over_r2 = (cmp_r2[1:0] == CMP_GT);
    far     = (pl - r1) > 32'(MIN_DIST);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      r1 <= '0; r2 <= FP_ZERO; first <= 1'b1;
      out <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (first) begin
          r1 <= pl; r2 <= pv; first <= 1'b0;
        end else if (over_th) begin
          out_valid <= 1'b1;
          if (far) begin
            out <= r1; r1 <= pl; r2 <= pv;
          end else if (over_r2) begin
            out <= pl; r1 <= pl; r2 <= pv;
          end else begin
            out <= r1;
          end
        end
      end
    end
  end

endmodule
