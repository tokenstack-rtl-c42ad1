// ts_ref_pkg -- reference arithmetic for the testbenches.
//
// Models the FP16 rules of the design (subnormals read as zero, results
// rounded toward zero, overflow to infinity) with real-valued arithmetic: a
// product or sum of two FP16 numbers is exact in double precision, and
// real_to_fp16 truncates it. This is independent of the bit-level RTL
// functions it is compared with. Also holds the K8V4 reference quantizer.
//
// The paper specifies FP16 arithmetic but not its rounding; the flush-to-zero,
// round-toward-zero rule mirrored here is this design's own.
package ts_ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    v = 1.0 + real'(h[9:0]) / 1024.0;
    if (e >= 15) for (int i = 15; i < e; i++) v = v * 2.0;
    else         for (int i = e; i < 15; i++) v = v / 2.0;
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a;
    int   e, m;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e + 15 >= 31) return {s, 15'h7C00};
    if (e + 15 <= 0)  return {s, 15'd0};
    m = $rtoi(a * 1024.0);
    return {s, 5'(e + 15), 10'(m - 1024)};
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] r;
    if (a[14:10] == 0 || b[14:10] == 0) return {a[15] ^ b[15], 15'd0};
    r = real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
    if (r[14:0] == 0) r[15] = a[15] ^ b[15];
    return r;
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    real x;
    x = fp16_to_real(a) + fp16_to_real(b);
    if (x == 0.0) return 16'h0000;
    return real_to_fp16(x);
  endfunction

  // random normal FP16 with exponent in [elo, ehi]
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(elo + int'($urandom % (ehi - elo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  // K8V4 reference: step = 2^(E - 21) for Keys, 2^(E - 17) for Values
  function automatic real q_step(input int ge, input bit is_v);
    real s;
    int  k;
    s = 1.0;
    k = ge - (is_v ? 17 : 21);
    if (k >= 0) for (int i = 0; i < k; i++) s = s * 2.0;
    else        for (int i = 0; i < -k; i++) s = s / 2.0;
    return s;
  endfunction

  function automatic int ref_quant(input logic [15:0] x, input int ge, input bit is_v);
    real v;
    int  q;
    v = fp16_to_real(x) / q_step(ge, is_v);
    q = $rtoi(v);               // truncates toward zero
    return q;
  endfunction

  function automatic logic [15:0] ref_dequant(input int q, input int ge, input bit is_v);
    return real_to_fp16(real'(q) * q_step(ge, is_v));
  endfunction

endpackage
