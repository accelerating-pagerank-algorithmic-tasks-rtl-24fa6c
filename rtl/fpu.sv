// fpu: single-precision floating-point unit of one site.
//
// Computes y = a + b, a - b, a * b or a / b on IEEE-754 binary32 operands, selected by op.
// In a site, a is the value stored in the site and b the value carried by the incoming
// message. The unit is purely combinational; the site registers its result, so an
// arithmetic instruction takes one clock cycle.
//
// That each site holds a floating-point unit, and that it adds, subtracts, multiplies and
// divides, follows the published instruction set. How the unit is built is this design's
// own choice, the simplest complete one:
//   * round to nearest, ties to even;
//   * subnormal inputs are read as zero and results below the normal range are flushed to
//     a signed zero;
//   * overflow gives infinity; a NaN input, inf - inf, 0 * inf, 0 / 0 and inf / inf give
//     the quiet NaN 0x7fc00000; x / 0 gives a signed infinity;
//   * the divider is a plain integer division of the extended significands.
// Interface: a, b (fp32), op (fpu_op_e) in; y (fp32) out.
module fpu
  import msg_pkg::*;
(
  input  fp32_t   a,
  input  fp32_t   b,
  input  fpu_op_e op,
  output fp32_t   y
);

  localparam fp32_t QNAN = 32'h7fc0_0000;

  // Round a normalized significand and pack. m[26] is the hidden one, m[25:3] the
  // fraction, m[2:0] guard, round and sticky bits; e is the biased exponent.
  function automatic fp32_t round_pack(input logic s, input logic signed [11:0] e,
                                       input logic [26:0] m);
    logic [24:0] r;
    logic signed [11:0] ex;
    logic round_up;
    round_up = m[2] & (m[3] | m[1] | m[0]);
    r  = {1'b0, m[26:3]} + {24'd0, round_up};
    ex = e;
    if (r[24]) begin
      r  = r >> 1;
      ex = ex + 12'sd1;
    end
    if (ex >= 12'sd255)     return {s, 8'hff, 23'd0};
    else if (ex <= 12'sd0)  return {s, 31'd0};
    else                    return {s, ex[7:0], r[22:0]};
  endfunction

  function automatic fp32_t f_addsub(input fp32_t x, input fp32_t z, input logic sub);
    logic        sx, sz, sb, sl;
    logic [7:0]  ex, ez, eb, el;
    logic [26:0] mb, ml, mshift;
    logic [27:0] sum;
    logic [8:0]  d;
    logic        sticky;
    int          lz;
    logic signed [11:0] e;
    logic [26:0] mn;
    sx = x[31];
    sz = z[31] ^ sub;
    ex = x[30:23];
    ez = z[30:23];
    // NaN and infinity
    if ((ex == 8'hff && x[22:0] != 0) || (ez == 8'hff && z[22:0] != 0)) return QNAN;
    if (ex == 8'hff && ez == 8'hff) return (sx == sz) ? {sx, 8'hff, 23'd0} : QNAN;
    if (ex == 8'hff) return {sx, 8'hff, 23'd0};
    if (ez == 8'hff) return {sz, 8'hff, 23'd0};
    // zeros (subnormals count as zero)
    if (ex == 0 && ez == 0) return {sx & sz, 31'd0};
    if (ex == 0) return {sz, z[30:0]};
    if (ez == 0) return x;
    // order so that l holds the larger magnitude
    if ({ex, x[22:0]} >= {ez, z[22:0]}) begin
      sl = sx; el = ex; ml = {1'b1, x[22:0], 3'b000};
      sb = sz; eb = ez; mb = {1'b1, z[22:0], 3'b000};
    end else begin
      sl = sz; el = ez; ml = {1'b1, z[22:0], 3'b000};
      sb = sx; eb = ex; mb = {1'b1, x[22:0], 3'b000};
    end
    d = {1'b0, el} - {1'b0, eb};
    if (d >= 9'd27) begin
      mshift = 27'd1;  // only the sticky bit survives
    end else begin
      mshift = mb >> d;
      sticky = 1'b0;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && mb[i]) sticky = 1'b1;
      mshift[0] = mshift[0] | sticky;
    end
    if (sl == sb) begin
      sum = {1'b0, ml} + {1'b0, mshift};
      e   = $signed({4'd0, el});
      if (sum[27]) begin
        mn = {sum[27:2], sum[1] | sum[0]};
        e  = e + 12'sd1;
      end else begin
        mn = sum[26:0];
      end
    end else begin
      sum = {1'b0, ml} - {1'b0, mshift};
      if (sum == 0) return 32'd0;  // exact cancellation gives +0
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      mn = sum[26:0] << lz;
      e  = $signed({4'd0, el}) - 12'(lz);
    end
    return round_pack(sl, e, mn);
  endfunction

  function automatic fp32_t f_mul(input fp32_t x, input fp32_t z);
    logic        s;
    logic [7:0]  ex, ez;
    logic [47:0] p;
    logic [26:0] mn;
    logic signed [11:0] e;
    s  = x[31] ^ z[31];
    ex = x[30:23];
    ez = z[30:23];
    if ((ex == 8'hff && x[22:0] != 0) || (ez == 8'hff && z[22:0] != 0)) return QNAN;
    if (ex == 8'hff || ez == 8'hff) begin
      if (ex == 0 || ez == 0) return QNAN;  // 0 * inf
      return {s, 8'hff, 23'd0};
    end
    if (ex == 0 || ez == 0) return {s, 31'd0};
    p = {1'b1, x[22:0]} * {1'b1, z[22:0]};
    e = $signed({4'd0, ex}) + $signed({4'd0, ez}) - 12'sd127;
    if (p[47]) begin
      mn = {p[47:22], |p[21:0]};
      e  = e + 12'sd1;
    end else begin
      mn = {p[46:21], |p[20:0]};
    end
    return round_pack(s, e, mn);
  endfunction

  function automatic fp32_t f_div(input fp32_t x, input fp32_t z);
    logic        s;
    logic [7:0]  ex, ez;
    logic [50:0] num;
    logic [27:0] q;
    logic [23:0] rem;
    logic [26:0] mn;
    logic signed [11:0] e;
    s  = x[31] ^ z[31];
    ex = x[30:23];
    ez = z[30:23];
    if ((ex == 8'hff && x[22:0] != 0) || (ez == 8'hff && z[22:0] != 0)) return QNAN;
    if (ex == 8'hff) return (ez == 8'hff) ? QNAN : {s, 8'hff, 23'd0};
    if (ez == 8'hff) return {s, 31'd0};
    if (ez == 0)     return (ex == 0) ? QNAN : {s, 8'hff, 23'd0};
    if (ex == 0)     return {s, 31'd0};
    // quotient of the significands, scaled by 2^27: lies in (2^26, 2^28)
    num = {1'b1, x[22:0], 27'd0};
    q   = 28'(num / {27'd0, 1'b1, z[22:0]});
    rem = 24'(num % {27'd0, 1'b1, z[22:0]});
    e   = $signed({4'd0, ex}) - $signed({4'd0, ez}) + 12'sd127;
    if (q[27]) begin
      mn = {q[27:2], q[1] | q[0] | (rem != 0)};
    end else begin
      mn = {q[26:1], q[0] | (rem != 0)};
      e  = e - 12'sd1;
    end
    return round_pack(s, e, mn);
  endfunction

  always_comb begin
    unique case (op)
      FPU_ADD: y = f_addsub(a, b, 1'b0);
      FPU_SUB: y = f_addsub(a, b, 1'b1);
      FPU_MUL: y = f_mul(a, b);
      FPU_DIV: y = f_div(a, b);
      default: y = QNAN;
    endcase
  end

endmodule
