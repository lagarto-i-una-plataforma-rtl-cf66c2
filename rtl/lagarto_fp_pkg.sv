// IEEE 754 single-precision arithmetic used by the floating-point units.
//
// All functions round to nearest, ties to even. Subnormal inputs are read as
// zero and results that would be subnormal are flushed to a signed zero. Any
// NaN result is the default quiet NaN 0x7FC00000 (the IEEE 754-2008 NaN
// encoding that MIPS Release 6 uses). Exception flags are not produced.
//
// Every operation reduces to an exact or sticky-corrected integer m and a
// binary exponent x with value = m * 2^x, which round_pack() normalises and
// rounds. This keeps each operation short: align and add, multiply the
// significands, divide with a 40-bit quotient, or take a 32-bit integer
// square root.
package lagarto_fp_pkg;

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  function automatic logic is_nan(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 0);
  endfunction
  function automatic logic is_inf(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] == 0);
  endfunction
  function automatic logic is_zero(input logic [31:0] a);  // includes subnormals
    return a[30:23] == 8'h00;
  endfunction

  // Normalise and round sign * m * 2^x to single precision.
  function automatic logic [31:0] round_pack(input logic s, input logic [63:0] m, input int x);
    int p, e;
    logic [63:0] mn;
    logic [23:0] man;   // 1 carry bit + 23 fraction bits
    logic g, st;
    if (m == 0) return {s, 31'd0};
    p = 0;
    for (int i = 0; i < 64; i++) if (m[i]) p = i;
    mn = m << (63 - p);
    e = x + p;                          // unbiased exponent of the leading one
    man = {1'b0, mn[62:40]};
    g = mn[39];
    st = |mn[38:0];
    if (g && (st || man[0])) man = man + 24'd1;
    if (man[23]) e = e + 1;             // fraction overflowed to 2.0
    if (e + 127 >= 255) return {s, 8'hFF, 23'd0};
    if (e + 127 <= 0)   return {s, 31'd0};
    return {s, 8'(e + 127), man[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [63:0] ma, mb, t, sum;
    int ea, eb, d;
    logic sa, sb, st;
    sa = a[31]; sb = b[31];
    if (is_nan(a) || is_nan(b)) return QNAN;
    if (is_inf(a) && is_inf(b)) return (sa == sb) ? a : QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {sa & sb, 31'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    ea = int'(a[30:23]); eb = int'(b[30:23]);
    ma = {1'b0, 1'b1, a[22:0], 39'd0};
    mb = {1'b0, 1'b1, b[22:0], 39'd0};
    if (eb > ea || (eb == ea && mb > ma)) begin   // make a the larger magnitude
      t = ma; ma = mb; mb = t;
      d = ea; ea = eb; eb = d;
      st = sa; sa = sb; sb = st;
    end
    d = ea - eb;
    if (d > 63) d = 63;
    st = (d == 0) ? 1'b0 : |(mb & ((64'd1 << d) - 64'd1));
    mb = (mb >> d) | {63'd0, st};
    sum = (sa == sb) ? ma + mb : ma - mb;
    if (sum == 0) return 32'h0000_0000;
    return round_pack(sa, sum, ea - 127 - 62);
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic s;
    logic [47:0] p;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return QNAN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return QNAN;
    if (is_inf(a) || is_inf(b)) return {s, 8'hFF, 23'd0};
    if (is_zero(a) || is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    return round_pack(s, {16'd0, p}, int'(a[30:23]) + int'(b[30:23]) - 254 - 46);
  endfunction

  function automatic logic [31:0] fdiv(input logic [31:0] a, input logic [31:0] b);
    logic s;
    logic [63:0] n, q, r;
    s = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return QNAN;
    if ((is_inf(a) && is_inf(b)) || (is_zero(a) && is_zero(b))) return QNAN;
    if (is_inf(a) || is_zero(b)) return {s, 8'hFF, 23'd0};
    if (is_zero(a) || is_inf(b)) return {s, 31'd0};
    n = {1'b1, a[22:0], 40'd0};
    q = n / {40'd0, 1'b1, b[22:0]};
    r = n % {40'd0, 1'b1, b[22:0]};
    q[0] = q[0] | (r != 0);                // quotient has >= 40 bits, bit 0 is sticky
    return round_pack(s, q, int'(a[30:23]) - int'(b[30:23]) - 40);
  endfunction

  // Fused multiply-add: c + a*b (neg=0) or c - a*b (neg=1), rounded once.
  // The exact 48-bit product and the addend are both placed with their
  // leading one at bit 61 of a 64-bit frame; the smaller is shifted right
  // with a sticky bit, as in fadd. Since the product has at most 48
  // significant bits, at least 14 zero guard bits stay below it, which keeps
  // the sticky correction exact for any cancellation.
  function automatic logic [31:0] ffma(input logic [31:0] a, input logic [31:0] b,
                                       input logic [31:0] c, input logic neg);
    logic sp, sc, st;
    logic [47:0] p;
    logic [63:0] mp, mc, t, sum;
    int xp, xc, d, lz;
    sp = a[31] ^ b[31] ^ neg; sc = c[31];
    if (is_nan(a) || is_nan(b) || is_nan(c)) return QNAN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return QNAN;
    if (is_inf(a) || is_inf(b)) begin
      if (is_inf(c) && sc != sp) return QNAN;
      return {sp, 8'hFF, 23'd0};
    end
    if (is_inf(c)) return c;
    if (is_zero(a) || is_zero(b)) return is_zero(c) ? {sp & sc, 31'd0} : c;
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    lz = p[47] ? 0 : 1;
    mp = {16'd0, p} << (14 + lz);                     // leading one at bit 61
    xp = int'(a[30:23]) + int'(b[30:23]) - 254 - 46 - 14 - lz;
    if (is_zero(c)) return round_pack(sp, mp, xp);
    mc = {40'd0, 1'b1, c[22:0]} << 38;
    xc = int'(c[30:23]) - 127 - 23 - 38;
    if (xc > xp || (xc == xp && mc > mp)) begin      // make p the larger magnitude
      t = mp; mp = mc; mc = t;
      d = xp; xp = xc; xc = d;
      st = sp; sp = sc; sc = st;
    end
    d = xp - xc;
    if (d > 63) d = 63;
    st = (d == 0) ? 1'b0 : |(mc & ((64'd1 << d) - 64'd1));
    mc = (mc >> d) | {63'd0, st};
    sum = (sp == sc) ? mp + mc : mp - mc;
    if (sum == 0) return 32'h0000_0000;
    return round_pack(sp, sum, xp);
  endfunction

  // Integer square root of a 64-bit value (restoring, one result bit per step).
  function automatic logic [31:0] isqrt64(input logic [63:0] v, output logic inexact);
    logic [63:0] rem, root, trial;
    rem = 0; root = 0;
    for (int i = 31; i >= 0; i--) begin
      rem = (rem << 2) | 64'((v >> (2 * i)) & 64'd3);
      trial = (root << 2) | 64'd1;
      root = root << 1;
      if (rem >= trial) begin
        rem = rem - trial;
        root = root | 64'd1;
      end
    end
    inexact = (rem != 0);
    return root[31:0];
  endfunction

  function automatic logic [31:0] fsqrt(input logic [31:0] a);
    logic [63:0] m;
    logic [31:0] r;
    logic inex;
    int t;
    if (is_nan(a)) return QNAN;
    if (is_zero(a)) return {a[31], 31'd0};
    if (a[31]) return QNAN;
    if (is_inf(a)) return a;
    // value = sig * 2^t with sig the 24-bit significand
    t = int'(a[30:23]) - 127 - 23;
    m = {40'd0, 1'b1, a[22:0]};
    if (t % 2 != 0) begin
      m = m << 1;
      t = t - 1;
    end
    m = m << 38;                           // sqrt then has 31 or 32 bits
    r = isqrt64(m, inex);
    return round_pack(1'b0, {32'd0, r[31:1], r[0] | inex}, (t - 38) / 2);
  endfunction

  // Signed 32-bit integer to single precision.
  function automatic logic [31:0] cvt_s_w(input logic [31:0] w);
    logic [31:0] mag;
    if (w == 0) return 32'd0;
    mag = w[31] ? -w : w;
    return round_pack(w[31], {32'd0, mag}, 0);
  endfunction

  // Single precision to signed 32-bit integer; trunc=1 rounds toward zero,
  // otherwise to nearest even. NaN and out-of-range values saturate.
  function automatic logic [31:0] cvt_w_s(input logic [31:0] a, input logic trunc);
    int e;
    logic [63:0] m, ip, frac, half;
    logic [31:0] r;
    if (is_nan(a)) return 32'h7FFF_FFFF;
    if (is_zero(a)) return 32'd0;
    e = int'(a[30:23]) - 127;
    if (e >= 31) return a[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
    m = {40'd0, 1'b1, a[22:0]} << 32;      // value = m * 2^(e-55)
    if (e < -2) begin
      ip = 0; frac = 1; half = 2;           // below one quarter: rounds to zero
    end else begin
      ip   = m >> (55 - e);
      frac = m & ((64'd1 << (55 - e)) - 64'd1);
      half = 64'd1 << (54 - e);
    end
    if (!trunc && (frac > half || (frac == half && ip[0]))) ip = ip + 1;
    r = ip[31:0];
    return a[31] ? -r : r;
  endfunction

endpackage
