// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Converts binary32 bit patterns to and from the simulator's double
// precision real type, so that expected fp32 results can be computed without
// the design's own arithmetic. Conversion to fp32 rounds to nearest-even and
// flushes results below the normal range to a signed zero, the same
// conventions the lanes use. fma_ref forms a*b exactly in double (a 48-bit
// product fits in 53 bits) and adds c in double before the final rounding.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fma_ref(input logic [31:0] a, b, c);
    return r2f(f2r(a) * f2r(b) + f2r(c));
  endfunction

  // Random normal fp32 value with exponent in [emin, emax]
  function automatic logic [31:0] rand_f(input int emin, input int emax);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(emin + int'($urandom % 32'(emax - emin + 1)));
    return v;
  endfunction

endpackage
