// fpu: combinational single-precision floating point unit.
//
// Adds, subtracts, multiplies or compares two IEEE-754 single-precision words
// A and B, selected by the 2-bit code op (fecg_pkg::fpu_op_e). The result y is
// ready in the same cycle; every filter of the system builds its arithmetic
// from instances of this unit.
//
// How it works, as in the paper: both words are split into sign, exponent and
// a 24-bit mantissa with the hidden 1 attached. The adder aligns the operand
// with the smaller exponent by a right shift of its mantissa, then adds the
// mantissas when the signs agree, or subtracts the smaller from the larger and
// takes that operand's sign. The subtractor is the adder with B's sign
// inverted, which gives the same cases the paper lists. The multiplier XORs the
// signs, adds the exponents less the bias and multiplies the mantissas. The
// result is normalised by shifting left until the leading bit is 1, lowering
// the exponent by the shift. Compare orders A and B by sign, then exponent,
// then fraction, exactly in the paper's order, and returns {30'b0, c_out} with
// c_out = 01 for A>B, 00 for A=B and 10 for A<B. Note that this ordering
// treats two negative numbers by magnitude; the system only compares values
// of one sign (sdm, its maxima and thresholds are never negative).
//
// This design's own choices, where the paper is silent: the op code values; a
// carry out of the mantissa sum is normalised by one right shift; all shifts
// and the product truncate (no rounding, no guard bits); an exponent field of
// 0 reads as zero, a zero mantissa or an exponent underflow gives +0, and an
// exponent overflow gives infinity. NaN and infinity inputs are not treated
// specially. The variable shifts are built as five stages of fixed shifts and
// the multiplier's special results by masking, which keeps synthesis of the
// many flattened instances fast.
module fpu
  import fecg_pkg::*;
(
  input  fpu_op_e op,
  input  fp32_t   a,
  input  fp32_t   b,
  output fp32_t   y
);

  // ---------------------------------------------------------------- operands
  logic        sa, sb;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic        za, zb;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ (op == FPU_SUB);       // subtraction: add -B
    ea = a[30:23];
    eb = b[30:23];
    za = (ea == 8'd0);
    zb = (eb == 8'd0);
    ma = za ? 24'd0 : {1'b1, a[22:0]};
    mb = zb ? 24'd0 : {1'b1, b[22:0]};
  end

  // Shifters are written as log2 stages of fixed shifts, so that synthesis
  // sees plain multiplexers.
  function automatic logic [23:0] shr24(input logic [23:0] v, input logic [4:0] s);
    logic [23:0] r;
    r = v;
    if (s[0]) r = {1'b0, r[23:1]};
    if (s[1]) r = {2'b0, r[23:2]};
    if (s[2]) r = {4'b0, r[23:4]};
    if (s[3]) r = {8'b0, r[23:8]};
    if (s[4]) r = {16'b0, r[23:16]};
    return r;
  endfunction

  function automatic logic [24:0] shl25(input logic [24:0] v, input logic [4:0] s);
    logic [24:0] r;
    r = v;
    if (s[0]) r = {r[23:0], 1'b0};
    if (s[1]) r = {r[22:0], 2'b0};
    if (s[2]) r = {r[20:0], 4'b0};
    if (s[3]) r = {r[16:0], 8'b0};
    if (s[4]) r = {r[8:0], 16'b0};
    return r;
  endfunction

  // ------------------------------------------------------------ add / sub
  fp32_t add_y;
  always_comb begin
    logic [7:0]  d;
    logic [23:0] mas, mbs;
    logic [24:0] msum;
    logic        sout;
    logic [9:0]  eout;
    int          lz;

    d = 8'd0;
    mas = ma;
    mbs = mb;
    eout = 10'(ea);
    if (za) begin
      eout = 10'(eb);
    end else if (zb) begin
      eout = 10'(ea);
    end else if (ea == eb) begin
      eout = 10'(ea);
    end else if (ea > eb) begin
      d = ea - eb;
      mbs = (d > 8'd23) ? 24'd0 : shr24(mb, d[4:0]);
      eout = 10'(ea);
    end else begin
      d = eb - ea;
      mas = (d > 8'd23) ? 24'd0 : shr24(ma, d[4:0]);
      eout = 10'(eb);
    end

    if (sa == sb) begin
      msum = {1'b0, mas} + {1'b0, mbs};
      sout = sa;
    end else if (mas > mbs) begin
      msum = {1'b0, mas} - {1'b0, mbs};
      sout = sa;
    end else begin
      msum = {1'b0, mbs} - {1'b0, mas};
      sout = sb;
    end

    // normalise
    lz = 0;
    if (msum == 25'd0) begin
      add_y = FP_ZERO;
    end else if (msum[24]) begin
      msum = msum >> 1;
      eout = eout + 10'd1;
      add_y = (eout >= 10'd255) ? {sout, 8'hFF, 23'd0} : {sout, eout[7:0], msum[22:0]};
    end else begin
      for (int i = 23; i >= 0; i--) if (msum[i] && lz == 0) lz = 24 - i;
      // lz = 1 + number of leading zeros below bit 24
      msum = shl25(msum, 5'(lz - 1));
      if (int'(eout) - (lz - 1) <= 0)
        add_y = FP_ZERO;
      else begin
        eout = eout - 10'(lz - 1);
        add_y = {sout, eout[7:0], msum[22:0]};
      end
    end
  end

  // ------------------------------------------------------------- multiply
  fp32_t mul_y;
  always_comb begin
    logic [47:0] prod;
    logic [22:0] fout;
    logic [10:0] esum;      // signed, ea + eb - 127 (+1)
    logic        sout, zero, ovf;
    sout = a[31] ^ b[31];
    prod = ma * mb;
    esum = 11'(ea) + 11'(eb) - 11'd127;
    fout = prod[47] ? prod[46:24] : prod[45:23];
    esum = esum + 11'(prod[47]);
    // zero and overflow results are formed by masking, not by selecting
    zero = za || zb || $signed(esum) <= 0;
    ovf  = $signed(esum) >= 255;
    mul_y = {sout, esum[7:0] | {8{ovf}}, fout & {23{!ovf}}} & {32{!zero}};
  end

  // -------------------------------------------------------------- compare
  logic [1:0] c_out;
  always_comb begin
    if (a[31] > b[31])            c_out = CMP_LT;
    else if (b[31] > a[31])       c_out = CMP_GT;
    else if (a[30:23] > b[30:23]) c_out = CMP_GT;
    else if (b[30:23] > a[30:23]) c_out = CMP_LT;
    else if (a[22:0] > b[22:0])   c_out = CMP_GT;
    else if (b[22:0] > a[22:0])   c_out = CMP_LT;
    else                          c_out = CMP_EQ;
  end

  always_comb begin
    unique case (op)
      FPU_ADD, FPU_SUB: y = add_y;
      FPU_MUL:          y = mul_y;
      default:          y = {30'd0, c_out};
    endcase
  end

endmodule
