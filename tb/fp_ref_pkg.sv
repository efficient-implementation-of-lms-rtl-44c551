// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Converts between IEEE-754 single-precision words and SystemVerilog reals by
// repacking the fields into a double (so it does not depend on the unit under
// test), and offers the tolerance checks the testbenches use. fp_to_real reads
// an exponent field of 0 as zero; real_to_fp truncates towards zero like the
// hardware does.
package fp_ref_pkg;

  function automatic real fp_to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_fp(input real r);
    logic [63:0] d;
    int e;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return 32'd0;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // True when got is within rel*scale + abs_tol of want.
  function automatic bit close(input real got, input real want, input real scale,
                               input real rel, input real abs_tol);
    return fabs(got - want) <= rel * fabs(scale) + abs_tol;
  endfunction

endpackage
