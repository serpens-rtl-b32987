// tb_fp_pkg -- reference FP32 helpers for the testbenches.
//
// Conversions between FP32 bit patterns and the simulator's double precision
// 'real', done on the bit patterns (not through shortreal) so the result is
// the same on every simulator. f2r is exact; r2f rounds to nearest, ties to
// even, and flushes subnormal results to zero like the RTL. Single-precision
// reference arithmetic is done as r2f(f2r(a) op f2r(b)): for + and * of two
// floats that is the correctly rounded single-precision result.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // a random normal float with exponent field in [emin, emax]
  function automatic logic [31:0] rnd_f32(input int emin, input int emax);
    int unsigned e = emin + ($urandom % (emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
