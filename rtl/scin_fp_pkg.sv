// scin_fp_pkg: BF16 arithmetic used by the accelerator's dequantize-reduce-requantize datapath.
//
// Values are BF16 (1 sign, 8 exponent, 7 fraction bits). All functions round to nearest,
// ties to even, except the INT8 quantizer which rounds half away from zero. Subnormal inputs
// and results are flushed to zero; infinities and NaNs are not given special treatment (the
// All-Reduce operands are finite activations). Everything is exact integer arithmetic, so a
// result is a pure function of its operands and the reduction order.
//   bf16_add      a + b
//   bf16_mul_i8   q * s, q a signed INT8 value, s a BF16 scale (dequantization)
//   bf16_scale    amax / 127, the block scale of symmetric INT8 quantization
//   bf16_quant    round(x * 127 / amax), clamped to [-127, 127]
// Using BF16 for activations and scales (two bytes per scale) fits the paper's sizes: 128 B of
// scales per 4 KB wave at a block size of 64. The choice of BF16 over FP16 is this design's.
package scin_fp_pkg;

  function automatic logic [15:0] bf16_add(logic [15:0] a, logic [15:0] b);
    logic        sa, sb, s1, s2;
    logic [7:0]  ea, eb, e1, e2;
    logic [7:0]  ma, mb, m1, m2;
    logic [7:0]  d;
    logic [24:0] w1, w2, res;
    logic [39:0] sh;
    logic        sticky;
    int          pos;
    logic [24:0] rn;
    logic [8:0]  m;
    int          e;
    logic        rnd;
    sa = a[15]; sb = b[15];
    ea = a[14:7]; eb = b[14:7];
    ma = (ea == 0) ? 8'd0 : {1'b1, a[6:0]};
    mb = (eb == 0) ? 8'd0 : {1'b1, b[6:0]};
    if (ea == 0) ea = 8'd0;
    if (eb == 0) eb = 8'd0;
    if ({ea, ma} >= {eb, mb}) begin
      s1 = sa; e1 = ea; m1 = ma; s2 = sb; e2 = eb; m2 = mb;
    end else begin
      s1 = sb; e1 = eb; m1 = mb; s2 = sa; e2 = ea; m2 = ma;
    end
    d  = e1 - e2;
    w1 = {1'b0, m1, 16'b0};
    if (d >= 8'd24) begin
      w2 = '0; sticky = (m2 != 0);
    end else begin
      sh = {1'b0, m2, 16'b0, 15'b0} >> d;
      w2 = sh[39:15]; sticky = (sh[14:0] != 0);
    end
    w2 = w2 | {24'b0, sticky};
    res = (s1 == s2) ? (w1 + w2) : (w1 - w2);
    if (res == 0) return 16'h0000;
    pos = 0;
    for (int i = 0; i < 25; i++) if (res[i]) pos = i;
    rn  = res << (24 - pos);
    e   = int'(e1) + pos - 23;
    m   = {1'b0, rn[24:17]};
    rnd = rn[16] && ((rn[15:0] != 0) || rn[17]);
    m   = m + {8'd0, rnd};
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {s1, 15'd0};
    if (e >= 255) return {s1, 8'hFF, 7'd0};
    return {s1, e[7:0], m[6:0]};
  endfunction

  function automatic logic [15:0] bf16_mul_i8(logic signed [7:0] q, logic [15:0] s);
    logic        sg;
    logic [7:0]  aq, ms;
    logic [15:0] p, pn;
    int          pos, e;
    logic [8:0]  m;
    logic        rnd;
    sg = q[7] ^ s[15];
    aq = q[7] ? 8'(-q) : 8'(q);
    ms = (s[14:7] == 0) ? 8'd0 : {1'b1, s[6:0]};
    p  = aq * ms;
    if (p == 0) return 16'h0000;
    pos = 0;
    for (int i = 0; i < 16; i++) if (p[i]) pos = i;
    pn  = p << (15 - pos);
    e   = int'(s[14:7]) + pos - 7;
    m   = {1'b0, pn[15:8]};
    rnd = pn[7] && ((pn[6:0] != 0) || pn[8]);
    m   = m + {8'd0, rnd};
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {sg, 15'd0};
    if (e >= 255) return {sg, 8'hFF, 7'd0};
    return {sg, e[7:0], m[6:0]};
  endfunction

  // |a| as an unsigned magnitude key: BF16 magnitudes order like their low 15 bits
  function automatic logic [14:0] bf16_mag(logic [15:0] a);
    return (a[14:7] == 0) ? 15'd0 : a[14:0];
  endfunction

  // scale = amax / 127 (amax given as a magnitude key)
  function automatic logic [15:0] bf16_scale(logic [14:0] amax);
    logic [7:0]  ma;
    logic [31:0] num, qt, rm;
    logic [8:0]  m;
    int          e;
    logic        rnd;
    if (amax[14:7] == 0) return 16'h0000;
    ma  = {1'b1, amax[6:0]};
    num = {ma, 24'd0};
    qt  = num / 32'd127;           // leading one at bit 24, or bit 25 when ma >= 254
    rm  = num % 32'd127;
    e   = int'(amax[14:7]) - 7;
    if (qt[25]) begin
      e   = e + 1;
      m   = {1'b0, qt[25:18]};
      rnd = qt[17] && ((qt[16:0] != 0) || (rm != 0) || qt[18]);
    end else begin
      m   = {1'b0, qt[24:17]};
      rnd = qt[16] && ((qt[15:0] != 0) || (rm != 0) || qt[17]);
    end
    m   = m + {8'd0, rnd};
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (e <= 0) return 16'h0000;
    return {1'b0, e[7:0], m[6:0]};
  endfunction

  // q = round_half_away(x * 127 / amax); |x| <= amax is guaranteed by the caller
  function automatic logic signed [7:0] bf16_quant(logic [15:0] x, logic [14:0] amax);
    logic [7:0]  mx, ma;
    logic [7:0]  k;
    logic [26:0] num, den, qt;
    if (x[14:7] == 0 || amax[14:7] == 0) return 8'sd0;
    if (amax[14:7] < x[14:7]) return x[15] ? -8'sd127 : 8'sd127;
    mx = {1'b1, x[6:0]};
    ma = {1'b1, amax[6:0]};
    k  = amax[14:7] - x[14:7];
    if (k > 8'd16) return 8'sd0;
    num = 27'(mx) * 27'd254 + (27'(ma) << k);
    den = 27'(ma) << (k + 8'd1);
    qt  = num / den;
    if (qt > 27'd127) qt = 27'd127;
    return x[15] ? -$signed({1'b0, qt[6:0]}) : $signed({1'b0, qt[6:0]});
  endfunction

endpackage
