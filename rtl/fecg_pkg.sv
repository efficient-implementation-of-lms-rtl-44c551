// fecg_pkg: types and constants shared by the fetal-ECG extraction datapath.
//
// All signal values travel as IEEE-754 single-precision words (fp32_t). The
// package holds the operation code of the floating point unit, the filter
// coefficients (the FP32 words nearest to the five-decimal values of the
// Butterworth and notch designs), the LMS step constant beta = 2*mu with
// mu = 7e-5, and constant functions that turn an integer N into the FP32 words
// for N and 1/N, so that every 1/N factor follows the size parameters.
package fecg_pkg;

  typedef logic [31:0] fp32_t;

  // FPU operation select. The 2-bit width is the paper's; the code values are
  // this design's choice.
  typedef enum logic [1:0] {
    FPU_ADD = 2'b00,
    FPU_SUB = 2'b01,
    FPU_MUL = 2'b10,
    FPU_CMP = 2'b11
  } fpu_op_e;

  // Comparison codes in the two low bits of a compare result.
  localparam logic [1:0] CMP_EQ = 2'b00;
  localparam logic [1:0] CMP_GT = 2'b01;   // A > B
  localparam logic [1:0] CMP_LT = 2'b10;   // A < B

  // LMS-AF architecture select.
  typedef enum logic {
    LMS_PARALLEL = 1'b0,
    LMS_SERIES   = 1'b1
  } lms_arch_e;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_HALF = 32'h3F00_0000;

  // 4th-order Butterworth low pass, 45 Hz cut-off at 1 kHz:
  // O[k] = a*I[k] + b*O[k-1] + c*O[k-2] + d*O[k-3] + e*O[k-4]
  localparam fp32_t BW_A = 32'h3B49_D9D3;  //  0.00308
  localparam fp32_t BW_B = 32'h4052_2B95;  //  3.28391
  localparam fp32_t BW_C = 32'hC082_C7CE;  // -4.08689
  localparam fp32_t BW_D = 32'h4011_FEB0;  //  2.28117
  localparam fp32_t BW_E = 32'hBEF6_7A10;  // -0.48140

  // 50 Hz notch, Q = 25:
  // O[k] = a*I[k] + b*I[k-1] + c*I[k-2] + d*O[k-1] + e*O[k-2]
  localparam fp32_t NT_A = 32'h3F7E_7A10;  //  0.99405
  localparam fp32_t NT_B = 32'hBFA8_092D;  // -1.31278
  localparam fp32_t NT_C = 32'h3F7E_7A10;  //  0.99405
  localparam fp32_t NT_D = 32'h3FA8_0735;  //  1.31272
  localparam fp32_t NT_E = 32'hBF7C_F030;  // -0.98804

  // LMS step: beta = 2*mu = 1.4e-4
  localparam fp32_t LMS_BETA = 32'h3912_CCF7;

  // FP32 word of a positive integer n (exact for n < 2**24, truncated above).
  function automatic fp32_t int_to_fp(input int unsigned n);
    int unsigned msb;
    logic [63:0] mant;
    if (n == 0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (n[i]) msb = i;
    mant = 64'(n) << (55 - msb);     // leading one at bit 55
    return {1'b0, 8'(127 + msb), mant[54:32]};
  endfunction

  // FP32 word of 1/n for a positive integer n, rounded to nearest.
  function automatic fp32_t recip_fp(input int unsigned n);
    int unsigned p;
    logic [63:0] q;
    if (n <= 1) return FP_ONE;
    p = 0;
    while ((64'd1 << p) < 64'(n)) p++;     // 2**(p-1) < n <= 2**p
    // 2**p / n lies in [1, 2); take 25 bits of it and round the last away
    q = ((64'd1 << (p + 24)) / 64'(n) + 64'd1) >> 1;
    if (q[24]) return {1'b0, 8'(127 - p + 1), 23'd0};
    return {1'b0, 8'(127 - p), q[22:0]};
  endfunction

endpackage
