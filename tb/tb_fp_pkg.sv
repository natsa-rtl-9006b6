// tb_fp_pkg: conversions between binary32 bit patterns and real numbers for
// the testbenches, written from the format definition and independent of
// the RTL operators. r2f truncates towards zero, f2r reads subnormals as 0.
package tb_fp_pkg;
  function automatic real f2r(input logic [31:0] w);
    int e;
    real v;
    e = int'(w[30:23]);
    if (e == 0) return 0.0;
    v = (1.0 + real'(w[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return w[31] ? -v : v;
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] b;
    int e;
    if (r == 0.0) return 32'd0;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 127;
    if (e <= 0)   return {b[63], 31'd0};
    if (e >= 255) return {b[63], 8'hff, 23'd0};
    return {b[63], 8'(e), b[51:29]};
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction
endpackage
