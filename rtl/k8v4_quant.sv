// k8v4_quant -- inline K8V4 quantization / dequantization unit of the base die.
//
// On demotion the unit converts FP16 Keys to INT8 and FP16 Values to INT4; on
// promotion it turns them back into FP16 before they reach any PIM unit. The
// paper gives the formats (K8V4: Keys 2x, Values 4x smaller) and says the unit
// is built from parallel group-wise lanes sized to the TSV bandwidth; it does
// not give the scale rule, so this design uses the cheapest group-wise rule:
// each group of QGROUP elements (of one token) shares a power-of-two scale
// taken from the largest FP16 exponent E in the group. With m the 11-bit
// significand and e the exponent of an element:
//   Key   : q = sign * (m >> (E - e + 4))   |q| <= 127, step 2^(E-21)
//   Value : q = sign * (m >> (E - e + 8))   |q| <= 7,   step 2^(E-17)
// Shifts truncate toward zero; elements with e = 0 quantize to 0. The
// dequantizer returns q * step exactly as FP16 (results below the normal range
// flush to zero). Storing E costs one byte per group on top of the INT8/INT4
// codes.
//
// Interface: LANES independent lanes in each direction, purely combinational
// (the paper's engine is pipelined behind the TSV transfer; here it adds no
// cycle). Each lane has its own group exponent input; is_v selects the
// Value (INT4, codes in bits [3:0], sign-extended on input) format.
module k8v4_quant
  import ts_fp16_pkg::*;
#(
  parameter int LANES = 16
) (
  // quantize
  input  fp16_t       qz_in   [LANES],
  input  logic [4:0]  qz_gexp [LANES],
  input  logic        qz_is_v,
  output logic [7:0]  qz_out  [LANES],
  // dequantize
  input  logic [7:0]  dq_in   [LANES],
  input  logic [4:0]  dq_gexp [LANES],
  input  logic        dq_is_v,
  output fp16_t       dq_out  [LANES]
);

  function automatic logic [7:0] quant1(input fp16_t x, input logic [4:0] ge, input logic is_v);
    logic [10:0] m;
    int          sh;
    logic [10:0] mag;
    if (x[14:10] == 5'd0 || ge < x[14:10]) return 8'd0;
    m   = {1'b1, x[9:0]};
    sh  = int'(ge) - int'(x[14:10]) + (is_v ? 8 : 4);
    mag = (sh > 11) ? 11'd0 : (m >> sh);
    return x[15] ? (8'd0 - mag[7:0]) : mag[7:0];
  endfunction

  function automatic fp16_t dequant1(input logic [7:0] c, input logic [4:0] ge, input logic is_v);
    logic [7:0]  code, mag;
    logic        s;
    int          p, e;
    logic [10:0] m;
    code = is_v ? {{4{c[3]}}, c[3:0]} : c;
    s    = code[7];
    mag  = s ? (8'd0 - code) : code;
    if (mag == 8'd0) return FP16_ZERO;
    p = 0;
    for (int i = 0; i < 8; i++) if (mag[i]) p = i;
    e = p + int'(ge) - (is_v ? 2 : 6);
    if (e <= 0)  return {s, 15'd0};
    if (e >= 31) return {s, 15'h7C00};
    m = 11'(mag) << (10 - p);
    return {s, e[4:0], m[9:0]};
  endfunction

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      qz_out[i] = quant1(qz_in[i], qz_gexp[i], qz_is_v);
      dq_out[i] = dequant1(dq_in[i], dq_gexp[i], dq_is_v);
    end
  end

endmodule
