// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Works from the simulator's double-precision reals: a product or sum of
// two floats is formed exactly (products) or with one rounding to double
// (sums), then rounded once more to single precision, nearest-even, with
// subnormal results flushed to zero.  Double rounding is harmless here
// because a double carries more than 2*24+2 significand bits.  This is
// independent of the RTL floating-point units it checks.
package fp_ref_pkg;

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
    logic [24:0] mr;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m} + 25'((g && (st || m[0])) ? 1 : 0);
    if (mr[24]) begin
      e++;
      mr = mr >> 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // Random float with exponent in [emin, emax] and random sign/fraction.
  function automatic logic [31:0] rand_fp(input int emin, input int emax);
    logic [31:0] r;
    int          e;
    r = $urandom;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    r[30:23] = 8'(e);
    return r;
  endfunction

endpackage
