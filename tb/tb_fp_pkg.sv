// tb_fp_pkg -- reference helpers for the testbenches.
//
// Converts between the simulator's double-precision `real` and the binary32
// words used by the RTL, independently of the RTL's own conversion code,
// and compares results with a tolerance. to_fp() truncates like the RTL.
package tb_fp_pkg;

  function automatic real from_fp(input logic [31:0] x);
    logic [63:0] b;
    if (x[30:23] == 8'd0) return 0.0;
    b = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  function automatic logic [31:0] to_fp(input real r);
    logic [63:0] b;
    int          e;
    if (r == 0.0) return 32'd0;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 127;
    if (e <= 0) return {b[63], 31'd0};
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    return {b[63], 8'(e), b[51:29]};
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // True when got is within rel*|want| + abs_tol of want.
  function automatic bit near(input real got, input real want, input real rel, input real abs_tol);
    return fabs(got - want) <= rel * fabs(want) + abs_tol;
  endfunction

  // Uniform random real in [lo, hi).
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

endpackage
