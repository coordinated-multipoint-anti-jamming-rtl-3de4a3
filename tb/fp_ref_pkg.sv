// fp_ref_pkg: independent floating-point reference used by the testbenches.
//
// Converts between IEEE-754 single precision bit patterns and the simulator's
// double-precision real type. to_fp32 rounds a double to single precision
// (nearest, ties to even) and flushes results below the normal range to zero,
// the policy of the RTL adders and multipliers. Products and sums of two fp32
// values whose exponents differ by less than 29 are exact in double precision,
// so to_fp32(real'(a)*real'(b)) is the correctly rounded fp32 result.
package fp_ref_pkg;

  function automatic real to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    // build the double directly: exponent rebias 127 -> 1023
    d[63]    = f[31];
    d[62:52] = 11'(f[30:23]) + 11'd896;
    d[51:0]  = {f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_fp32(real r);
    logic [63:0] d;
    logic        s, g, st, up;
    int          e;
    logic [22:0] fr;
    logic [23:0] frr;
    d  = $realtobits(r);
    s  = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    fr = d[51:29];
    g  = d[28];
    st = |d[27:0];
    up = g & (st | fr[0]);
    frr = {1'b0, fr} + 24'(up);
    if (frr[23]) e = e + 1;
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(e), frr[22:0]};
  endfunction

  // Random normal fp32 with unbiased exponent in [-span, span].
  function automatic logic [31:0] rand_fp32(int span);
    int unsigned e;
    e = 127 - span + ($urandom % (2 * span + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
