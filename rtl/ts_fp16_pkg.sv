// ts_fp16_pkg -- IEEE binary16 arithmetic used by the PIM units and the
// quantization unit of the TokenStack stack.
//
// The compute-layer PIM units are built from an FP16 multiplier and an FP16
// adder (the paper names "FP16 MULT" and "FP16 ADD" blocks). The paper does not
// give their rounding or special-value rules; this package makes a simple,
// cheap choice and applies it everywhere:
//   * subnormal inputs are read as zero, results below the normal range are
//     flushed to a signed zero;
//   * results are rounded toward zero (exact result, then truncated);
//   * an input with exponent 31 is read as infinity-sized (its mantissa is
//     kept), results above the normal range become +/-infinity (0x7C00);
//   * NaN is not produced or propagated.
// fp16_add computes the exact sum in a 42-bit fixed-point frame before it
// truncates, so the result equals the exact sum rounded toward zero.
package ts_fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [4:0]  ea, eb;
    logic [10:0] ma, mb;
    logic [21:0] p;
    int          e;
    logic [9:0]  f;
    s  = a[15] ^ b[15];
    ea = a[14:10];
    eb = b[14:10];
    if (ea == 5'd0 || eb == 5'd0) return {s, 15'd0};
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    p  = ma * mb;
    e  = int'(ea) + int'(eb) - 15;
    if (p[21]) begin
      f = p[20:11];
      e = e + 1;
    end else begin
      f = p[19:10];
    end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'd0};
    return {s, e[4:0], f};
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    logic [41:0] va, vb, mag;
    logic        sa, sb, s;
    int          p, e;
    logic [41:0] m;
    sa = a[15];
    sb = b[15];
    va = (a[14:10] == 5'd0) ? 42'd0 : (42'({1'b1, a[9:0]}) << (a[14:10] - 5'd1));
    vb = (b[14:10] == 5'd0) ? 42'd0 : (42'({1'b1, b[9:0]}) << (b[14:10] - 5'd1));
    if (sa == sb) begin
      mag = va + vb;
      s   = sa;
    end else if (va >= vb) begin
      mag = va - vb;
      s   = sa;
    end else begin
      mag = vb - va;
      s   = sb;
    end
    if (mag == 42'd0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 42; i++) if (mag[i]) p = i;
    e = p - 9;
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'd0};
    if (p >= 10) m = mag >> (p - 10);
    else         m = mag << (10 - p);
    return {s, e[4:0], m[9:0]};
  endfunction

endpackage
