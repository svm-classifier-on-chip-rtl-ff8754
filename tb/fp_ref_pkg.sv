// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Converts between fp32 bit patterns and double-precision reals, so that an
// expected result can be computed with the simulator's own real arithmetic and
// then rounded to single precision (nearest, ties to even). Subnormals are
// flushed to zero in both directions, matching the convention of the RTL.
// A product of two singles is exact in double precision, so the single
// rounding here gives the correctly rounded result.
package fp_ref_pkg;

  function automatic real fp2real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real2fp(real r);
    logic [63:0] d;
    logic [52:0] sig;
    logic [24:0] m;
    logic        g, st;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    sig = {1'b1, d[51:0]};
    m   = {1'b0, sig[52:29]};
    g   = sig[28];
    st  = |sig[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) e = e + 1;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // Random normal number with exponent field in [emin, emax].
  function automatic logic [31:0] rand_fp(int emin, int emax);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(emin + int'($urandom % (emax - emin + 1)));
    return r;
  endfunction

  // acc + a*b with single-precision rounding after each operation
  function automatic logic [31:0] mac(logic [31:0] acc, logic [31:0] a, logic [31:0] b);
    return real2fp(fp2real(acc) + fp2real(real2fp(fp2real(a) * fp2real(b))));
  endfunction

  function automatic logic [31:0] sub(logic [31:0] a, logic [31:0] b);
    return real2fp(fp2real(a) - fp2real(b));
  endfunction

  // Smallest single-precision number above a (for thresholds just above a value).
  function automatic logic [31:0] next_up(logic [31:0] a);
    if (a[30:23] == 8'd0) return 32'h0080_0000;
    if (!a[31]) return a + 32'd1;
    if (a == 32'h8080_0000) return 32'h0000_0000;
    return a - 32'd1;
  endfunction

  // Class of a difference against a threshold: +1 when diff >= th, else -1.
  function automatic logic [31:0] decide(logic [31:0] diff, logic [31:0] th);
    return (fp2real(diff) >= fp2real(th)) ? 32'h0000_0001 : 32'hFFFF_FFFF;
  endfunction

endpackage
