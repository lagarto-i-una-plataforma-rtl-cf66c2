// Testbench reference for IEEE 754 single precision, computed through the
// simulator's double-precision reals: a single-precision operand converts to
// a double exactly, +, -, *, / and sqrt of two such doubles rounded once to
// single give the correctly rounded single result, and to_bits() performs
// that rounding (nearest, ties to even). Subnormals are treated as zero to
// match the design's flush-to-zero behaviour.
package fp_ref_pkg;

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_bits(input real r);
    logic [63:0] d;
    logic [52:0] sig;
    logic [24:0] m;
    int e;
    logic g, st;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023;
    sig = {1'b1, d[51:0]};
    m = {1'b0, sig[52:29]};
    g = sig[28];
    st = |sig[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) e = e + 1;
    if (e + 127 >= 255) return {d[63], 8'hFF, 23'd0};
    if (e + 127 <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e + 127), m[22:0]};
  endfunction

  // a random normal single-precision number with exponent in [lo, hi]
  function automatic logic [31:0] rand_float(input int lo, input int hi);
    int e;
    e = lo + int'($urandom % (hi - lo + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
