// fp32_pkg -- single-precision floating-point arithmetic shared by every kernel.
//
// The accelerator trains in full 32-bit floating point, so the convolution,
// pooling and batch-normalization kernels all need IEEE-754 binary32 multiply,
// add, compare, divide and square root. They are written here as pure
// functions so that each kernel instantiates exactly the operators it needs
// and the arithmetic is described once.
//
// Behaviour: round to nearest, ties to even. Subnormal inputs and results are
// flushed to signed zero, overflow saturates to infinity, and NaN is not
// generated or propagated specially (an infinity input gives infinity). These
// simplifications are this design's own; the text only states that 32-bit
// floating point is used. All functions are combinational; the modules that
// call them decide where the pipeline registers go.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;

  // operation select of the scalar unit fp32_alu
  typedef enum logic [2:0] {
    FP_ADD, FP_SUB, FP_MUL, FP_DIV, FP_SQRT
  } fp_op_e;

  // ---------------------------------------------------------------------------
  // Rounding and packing of a normalized magnitude.
  // man: 24-bit mantissa with hidden bit at [23]; g: guard bit; s: sticky bit.
  // exp: biased exponent of man as it stands (may be out of range).
  function automatic fp32_t fp_pack(input logic sgn, input int exp,
                                    input logic [23:0] man, input logic g,
                                    input logic s);
    logic [24:0] rnd;
    int          e;
    e   = exp;
    rnd = {1'b0, man} + {24'd0, (g & (s | man[0]))};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 1;
    end
    if (e <= 0)        return {sgn, 31'd0};               // flush to zero
    else if (e >= 255) return {sgn, 8'hff, 23'd0};        // overflow
    else               return {sgn, e[7:0], rnd[22:0]};
  endfunction

  function automatic logic fp_is_zero(input fp32_t a);
    return (a[30:23] == 8'd0);
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // ---------------------------------------------------------------------------
  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        sgn;
    logic [47:0] p;
    logic [23:0] man;
    logic        g, s;
    int          e;
    sgn = a[31] ^ b[31];
    if (fp_is_zero(a) || fp_is_zero(b)) return {sgn, 31'd0};
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {sgn, 8'hff, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      man = p[47:24];
      g   = p[23];
      s   = |p[22:0];
      e   = e + 1;
    end else begin
      man = p[46:23];
      g   = p[22];
      s   = |p[21:0];
    end
    return fp_pack(sgn, e, man, g, s);
  endfunction

  // ---------------------------------------------------------------------------
  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [50:0] mx, my, r;
    logic        sticky;
    int          d, sh;
    if (fp_is_zero(a)) return fp_is_zero(b) ? {a[31] & b[31], 31'd0} : b;
    if (fp_is_zero(b)) return a;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    // x gets the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 26'd0};
    my = {1'b0, 1'b1, y[22:0], 26'd0};
    if (d >= 51) begin
      sticky = 1'b1;
      my     = '0;
    end else begin
      sticky = |(my & ~({51{1'b1}} << d));
      my     = my >> d;
    end
    if (x[31] == y[31]) r = mx + my;
    else                r = mx - my - {50'd0, sticky};
    if (r == '0 && !sticky) return FP_ZERO;
    // normalize: move the leading one to bit 50 in six shift stages
    sh = 0;
    if (r[50:19] == '0) begin r = r << 32; sh = sh + 32; end
    if (r[50:35] == '0) begin r = r << 16; sh = sh + 16; end
    if (r[50:43] == '0) begin r = r << 8;  sh = sh + 8;  end
    if (r[50:47] == '0) begin r = r << 4;  sh = sh + 4;  end
    if (r[50:49] == '0) begin r = r << 2;  sh = sh + 2;  end
    if (r[50]    == '0) begin r = r << 1;  sh = sh + 1;  end
    // the leading one of mx sat at bit 49
    return fp_pack(x[31], int'(x[30:23]) + 1 - sh, r[50:27], r[26], sticky | (|r[25:0]));
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // a > b (zeros of either sign compare equal)
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    logic az, bz;
    az = fp_is_zero(a);
    bz = fp_is_zero(b);
    if (az && bz) return 1'b0;
    if (az) return b[31];
    if (bz) return !a[31];
    if (a[31] != b[31]) return b[31];
    if (!a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  // ---------------------------------------------------------------------------
  // Division a / b by restoring long division of the mantissas.
  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic        sgn;
    logic [26:0] rem, den;
    logic [25:0] q;
    int          e;
    sgn = a[31] ^ b[31];
    if (fp_is_zero(a)) return {sgn, 31'd0};
    if (fp_is_zero(b) || a[30:23] == 8'hff) return {sgn, 8'hff, 23'd0};
    if (b[30:23] == 8'hff) return {sgn, 31'd0};
    rem = {3'b0, 1'b1, a[22:0]};
    den = {3'b0, 1'b1, b[22:0]};
    e   = int'(a[30:23]) - int'(b[30:23]) + 127;
    q   = '0;
    for (int i = 25; i >= 0; i--) begin
      if (rem >= den) begin
        rem  = rem - den;
        q[i] = 1'b1;
      end
      rem = rem << 1;
    end
    // q = mantissa ratio in [0.5, 2) with the binary point after q[25]
    if (q[25]) return fp_pack(sgn, e, q[25:2], q[1], q[0] | (rem != 0));
    else       return fp_pack(sgn, e - 1, q[24:1], q[0], (rem != 0));
  endfunction

  // Square root of a non-negative value, digit by digit on the mantissa.
  function automatic fp32_t fp_sqrt(input fp32_t a);
    logic [51:0] rad;
    logic [27:0] root;
    logic [29:0] rem, trial;
    int          e;
    if (fp_is_zero(a) || a[31]) return FP_ZERO;
    if (a[30:23] == 8'hff) return a;
    e = int'(a[30:23]) - 127;
    // make the exponent even; the radicand keeps 1 or 2 integer bits
    if (e % 2 != 0) begin
      rad = {1'b0, 1'b1, a[22:0], 27'd0} << 1;
      e   = e - 1;
    end else begin
      rad = {1'b0, 1'b1, a[22:0], 27'd0};
    end
    root = '0;
    rem  = '0;
    for (int i = 25; i >= 0; i--) begin
      rem   = {rem[27:0], rad[2*i+1 -: 2]};
      trial = {root, 2'b01};
      root  = root << 1;
      if (rem >= trial) begin
        rem     = rem - trial;
        root[0] = 1'b1;
      end
    end
    // root holds 26 significant bits: 1.xxx with 25 fraction bits
    return fp_pack(1'b0, e / 2 + 127, root[25:2], root[1], root[0] | (rem != 0));
  endfunction

  // Unsigned integer to float (used for the element count of a BN layer).
  function automatic fp32_t fp_from_uint(input logic [31:0] v);
    logic [31:0] w;
    int          sh;
    if (v == 0) return FP_ZERO;
    w  = v;
    sh = 0;
    if (w[31:16] == '0) begin w = w << 16; sh = sh + 16; end
    if (w[31:24] == '0) begin w = w << 8;  sh = sh + 8;  end
    if (w[31:28] == '0) begin w = w << 4;  sh = sh + 4;  end
    if (w[31:30] == '0) begin w = w << 2;  sh = sh + 2;  end
    if (w[31]    == '0) begin w = w << 1;  sh = sh + 1;  end
    return fp_pack(1'b0, 31 - sh + 127, w[31:8], w[7], |w[6:0]);
  endfunction

endpackage
