// tb_fpu: self-checking test of the floating point unit.
//
// Drives exact cases (small integers, cancellation to zero, zero operands,
// carries, each compare outcome) whose result bits are known, then random
// operands over a wide exponent range whose results are checked against real
// arithmetic. Add and subtract may lose up to two units in the last place of
// the larger operand (truncated alignment); multiply up to two units of the
// product.
module tb_fpu;
  import fecg_pkg::*;
  import fp_ref_pkg::*;

  fpu_op_e     op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fpu dut (.op(op), .a(a), .b(b), .y(y));

  task automatic expect_bits(input fpu_op_e o, input logic [31:0] x, input logic [31:0] z,
                             input logic [31:0] want);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h want=%h", o, x, z, y, want);
    end
  endtask

  function automatic real rnd_real();
    real m;
    int  e;
    m = 1.0 + real'($urandom_range(0, 32'h7FFFFF)) / 8388608.0;
    e = $urandom_range(0, 40) - 20;
    m = m * (2.0 ** e);
    return ($urandom_range(0, 1) == 1) ? -m : m;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, want, got;
    logic [31:0] fa, fb;
    // exact cases
    expect_bits(FPU_ADD, real_to_fp(1.0),  real_to_fp(2.0),  real_to_fp(3.0));
    expect_bits(FPU_ADD, real_to_fp(1.5),  real_to_fp(1.5),  real_to_fp(3.0));   // carry
    expect_bits(FPU_ADD, real_to_fp(5.0),  real_to_fp(-3.0), real_to_fp(2.0));
    expect_bits(FPU_ADD, real_to_fp(-5.0), real_to_fp(3.0),  real_to_fp(-2.0));
    expect_bits(FPU_ADD, real_to_fp(3.0),  real_to_fp(-3.0), 32'd0);              // cancels
    expect_bits(FPU_ADD, 32'd0,            real_to_fp(-7.25), real_to_fp(-7.25));
    expect_bits(FPU_ADD, real_to_fp(0.75), 32'd0,            real_to_fp(0.75));
    expect_bits(FPU_SUB, real_to_fp(1.0),  real_to_fp(0.25), real_to_fp(0.75));
    expect_bits(FPU_SUB, real_to_fp(1.0),  real_to_fp(-1.0), real_to_fp(2.0));
    expect_bits(FPU_SUB, real_to_fp(-2.0), real_to_fp(-6.0), real_to_fp(4.0));
    expect_bits(FPU_SUB, real_to_fp(100.0), real_to_fp(100.0), 32'd0);
    expect_bits(FPU_MUL, real_to_fp(3.0),  real_to_fp(-4.0), real_to_fp(-12.0));
    expect_bits(FPU_MUL, real_to_fp(1.5),  real_to_fp(1.5),  real_to_fp(2.25));
    expect_bits(FPU_MUL, real_to_fp(-0.5), real_to_fp(-0.125), real_to_fp(0.0625));
    expect_bits(FPU_MUL, 32'd0,            real_to_fp(9.0),  32'd0);
    expect_bits(FPU_CMP, real_to_fp(2.0),  real_to_fp(1.0),  32'h1);
    expect_bits(FPU_CMP, real_to_fp(1.0),  real_to_fp(2.0),  32'h2);
    expect_bits(FPU_CMP, real_to_fp(1.5),  real_to_fp(1.5),  32'h0);
    expect_bits(FPU_CMP, real_to_fp(-1.0), real_to_fp(0.5),  32'h2);
    expect_bits(FPU_CMP, real_to_fp(0.5),  real_to_fp(-8.0), 32'h1);
    expect_bits(FPU_CMP, real_to_fp(1.25), real_to_fp(1.5),  32'h2);
    expect_bits(FPU_CMP, 32'd0,            real_to_fp(1e-3), 32'h2);

    // random operands against real arithmetic
    for (int i = 0; i < 3000; i++) begin
      ra = rnd_real();
      rb = ($urandom_range(0, 3) == 0) ? -ra * (1.0 + real'($urandom_range(0, 1000)) * 1e-6)
                                       : rnd_real();
      fa = real_to_fp(ra);
      fb = real_to_fp(rb);
      ra = fp_to_real(fa);
      rb = fp_to_real(fb);
      for (int o = 0; o < 4; o++) begin
        op = fpu_op_e'(o); a = fa; b = fb;
        #1;
        checks++;
        got = fp_to_real(y);
        case (o)
          0: if (!close(got, ra + rb, (fabs(ra) > fabs(rb)) ? ra : rb, 2.5 / 8388608.0, 0.0))
               begin failures++; $display("FAIL add %g %g -> %g", ra, rb, got); end
          1: if (!close(got, ra - rb, (fabs(ra) > fabs(rb)) ? ra : rb, 2.5 / 8388608.0, 0.0))
               begin failures++; $display("FAIL sub %g %g -> %g", ra, rb, got); end
          2: if (!close(got, ra * rb, ra * rb, 2.5 / 8388608.0, 0.0))
               begin failures++; $display("FAIL mul %g %g -> %g", ra, rb, got); end
          default: begin
            logic [1:0] w;
            // the paper's ordering: magnitude order once the signs agree
            if (fa[31] != fb[31]) w = fa[31] ? 2'b10 : 2'b01;
            else if (fabs(ra) > fabs(rb)) w = 2'b01;
            else if (fabs(ra) < fabs(rb)) w = 2'b10;
            else w = 2'b00;
            if (y !== {30'd0, w}) begin
              failures++; $display("FAIL cmp %g %g -> %h", ra, rb, y);
            end
          end
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
