// tb_fp_util -- reference conversions between real and binary32 for the
// testbenches. r2f rounds a double to the nearest single (ties to even,
// subnormals flushed to zero, like the design); f2r widens a single exactly.
// Products of two singles are exact in double, so r2f(f2r(a)*f2r(b)) is the
// correctly rounded single product.
package tb_fp_util;
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [23:0] man;
    logic        g, s;
    logic [24:0] rnd;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 0) return {d[63], 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b1, d[51:0]};
    man = m[52:29];
    g   = m[28];
    s   = |m[27:0];
    rnd = {1'b0, man} + {24'd0, g & (s | man[0])};
    if (rnd[24]) begin rnd = rnd >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], e[7:0], rnd[22:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // |a-b| within tol relative to max(|b|, floor)
  function automatic bit close(input real a, input real b, input real tol);
    real da, mb;
    da = (a > b) ? a - b : b - a;
    mb = (b < 0) ? -b : b;
    if (mb < 1.0e-3) mb = 1.0e-3;
    return da <= tol * mb;
  endfunction

  // random single with exponent roughly in [2^-e, 2^e]
  function automatic logic [31:0] rand_f(input int erange);
    logic [31:0] v;
    int          ex;
    ex = 127 - erange + int'($urandom_range(2 * erange, 0));
    v  = {1'($urandom), 8'(ex), 23'($urandom)};
    return v;
  endfunction
endpackage
