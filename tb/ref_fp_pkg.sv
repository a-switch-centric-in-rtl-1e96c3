// ref_fp_pkg: reference BF16 arithmetic for the testbenches, computed with double-precision
// reals (independent of the integer implementation in the RTL). Results are exact values
// rounded once to BF16, nearest-even, with subnormals flushed to zero.
package ref_fp_pkg;

  function automatic real bf2r(logic [15:0] b);
    logic [63:0] d;
    if (b[14:7] == 0) return 0.0;
    d = {b[15], 11'(int'(b[14:7]) - 127 + 1023), b[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] r2bf(real r);
    logic [63:0] d;
    int          e;
    logic [8:0]  m;
    logic        g, st;
    if (r == 0.0) return 16'h0000;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:45]};
    g  = d[44];
    st = (d[43:0] != 0);
    if (g && (st || m[0])) m = m + 1'b1;
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (e <= 0) return {d[63], 15'd0};
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    return {d[63], 8'(e), m[6:0]};
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return r2bf(bf2r(a) + bf2r(b));
  endfunction

  function automatic logic [15:0] ref_mul(logic signed [7:0] q, logic [15:0] s);
    return r2bf(real'(q) * bf2r(s));
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic logic [15:0] ref_scale(logic [15:0] amax);
    return r2bf(absr(bf2r(amax)) / 127.0);
  endfunction

  function automatic logic signed [7:0] ref_quant(logic [15:0] x, logic [15:0] amax);
    real v;
    int  q;
    if (bf2r(amax) == 0.0) return 8'sd0;
    v = absr(bf2r(x)) * 127.0 / absr(bf2r(amax));
    q = int'($floor(v + 0.5));
    if (q > 127) q = 127;
    return (bf2r(x) < 0.0) ? 8'(-q) : 8'(q);
  endfunction

  // random finite BF16 with exponent in [elo, ehi]
  function automatic logic [15:0] rand_bf(int elo, int ehi);
    logic [15:0] b;
    b[15]   = $urandom % 2;
    b[14:7] = 8'(elo + int'($urandom % (ehi - elo + 1)));
    b[6:0]  = 7'($urandom);
    return b;
  endfunction

endpackage
