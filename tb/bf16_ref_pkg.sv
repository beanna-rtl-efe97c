// Reference bfloat16 arithmetic for the testbenches, computed with the
// simulator's double-precision reals rather than with the RTL's bit-level
// algorithm. a*b+c is exact in a double whenever the exponents of product
// and addend are within about 37 of each other; the testbenches keep their
// operands in such ranges. The result is rounded to bfloat16 once, round to
// nearest even, with the same subnormal flushing as the RTL.
package bf16_ref_pkg;

  function automatic real bf2r(logic [15:0] x);
    if (x[14:7] == 8'd0) return x[15] ? -0.0 : 0.0;
    return $bitstoreal({x[15], 11'(int'(x[14:7]) - 127 + 1023), x[6:0], 45'd0});
  endfunction

  function automatic logic [15:0] r2bf(real r);
    logic [63:0] bits;
    logic        s;
    int          e;
    logic [7:0]  m;
    logic        g, st;
    bits = $realtobits(r);
    s    = bits[63];
    if (bits[62:0] == 63'd0) return {s, 15'd0};
    e  = int'(bits[62:52]) - 1023 + 127;
    m  = {1'b0, bits[51:45]};
    g  = bits[44];
    st = (bits[43:0] != 44'd0);
    if (g && (st || m[0])) m = m + 8'd1;
    if (m[7]) begin
      e = e + 1;
      m = 8'd0;
    end
    if (e <= 0)   return {s, 15'd0};
    if (e >= 255) return {s, 8'hFF, 7'd0};
    return {s, e[7:0], m[6:0]};
  endfunction

  function automatic logic [15:0] fma(logic [15:0] a, logic [15:0] b, logic [15:0] c);
    real p, q;
    logic pz, cz;
    pz = (a[14:7] == 0) || (b[14:7] == 0);
    cz = (c[14:7] == 0);
    if (pz && cz) return {(a[15] ^ b[15]) & c[15], 15'd0};
    if (pz) return c;
    p = bf2r(a) * bf2r(b);
    if (cz) return r2bf(p);
    q = p + bf2r(c);
    return r2bf(q);
  endfunction

  // Random normal bf16 with biased exponent in [lo, hi].
  function automatic logic [15:0] rnd_bf(int lo, int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

endpackage
