// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Converts between 32-bit float bit patterns and the simulator's real numbers, rounds a real to
// single precision, and compares results with a tolerance. The reference values of every
// testbench are computed with these functions, independently of the RTL's float units.
package tb_fp_pkg;

  // Single to double by re-packing the fields (subnormals read as zero).
  function automatic real f2r(logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Double to single, rounded to nearest even (results below the normal range flush to zero).
  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int e;
    logic [23:0] m;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) m = m + 24'd1;
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real absr(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // |got - exp| <= abs_tol + rel_tol * |exp|
  function automatic bit near(logic [31:0] got, real expv, real rel_tol, real abs_tol);
    return absr(f2r(got) - expv) <= abs_tol + rel_tol * absr(expv);
  endfunction

  // Random float with unbiased exponent in [emin, emax] and random sign.
  function automatic logic [31:0] rand_fp(int emin, int emax);
    logic [7:0] e;
    e = 8'(127 + emin + int'($urandom_range(emax - emin)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

endpackage
