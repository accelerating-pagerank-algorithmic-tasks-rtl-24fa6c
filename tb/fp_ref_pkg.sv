// fp_ref_pkg: reference conversions between the simulator's double-precision real and
// IEEE-754 single precision, used by the testbenches to work out expected values
// independently of the design's floating-point unit.
//
// to_fp32 rounds a double to single precision, nearest-even, flushing results below the
// normal range to a signed zero (the same convention as the design). Because a double has
// more than twice the significand bits of a single, rounding the exact double result of a
// single-precision +, -, * or / once more to single gives the correctly rounded answer.
package fp_ref_pkg;

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    if (d[62:52] == 0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;  // fraction overflowed into the exponent
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return $bitstoreal({f[31], 63'd0});
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Random normal fp32 with exponent in [lo, hi] (biased).
  function automatic logic [31:0] rand_fp32(input int lo, input int hi);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(lo + int'($urandom % (hi - lo + 1)));
    return v;
  endfunction

endpackage
