// tb_k8v4_quant -- self-checking test of the K8V4 quantization unit.
//
// For random 16-element groups (Keys and Values, wide exponent spread) it
// takes the group's largest exponent, quantizes, and compares every code with
// a real-valued reference (x / step truncated, step = 2^(E-21) for Keys and
// 2^(E-17) for Values); it checks the code range (|q| <= 127 or 7), that
// dequantization returns q * step exactly, and that the round-trip error stays
// below one step.
//
// K8V4 widths follow the paper; the group rule checked is this design's own.
module tb_k8v4_quant;
  import ts_ref_pkg::*;
  localparam int LANES = 16;

  logic [15:0] qz_in [LANES];
  logic [4:0]  qz_gexp [LANES], dq_gexp [LANES];
  logic        qz_is_v, dq_is_v;
  logic [7:0]  qz_out [LANES], dq_in [LANES];
  logic [15:0] dq_out [LANES];

  k8v4_quant #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      int ge, q, qref;
      bit is_v;
      real x, y, st;
      is_v = it[0];
      ge = 0;
      for (int i = 0; i < LANES; i++) begin
        qz_in[i] = rand_fp16(3, 22);
        if (i == 3 && it % 5 == 0) qz_in[i] = 16'h0000;
        if (int'(qz_in[i][14:10]) > ge) ge = int'(qz_in[i][14:10]);
      end
      for (int i = 0; i < LANES; i++) begin qz_gexp[i] = 5'(ge); dq_gexp[i] = 5'(ge); end
      qz_is_v = is_v;
      dq_is_v = is_v;
      #1;
      for (int i = 0; i < LANES; i++) dq_in[i] = is_v ? {4'd0, qz_out[i][3:0]} : qz_out[i];
      #1;
      st = q_step(ge, is_v);
      for (int i = 0; i < LANES; i++) begin
        q    = is_v ? int'($signed(qz_out[i][3:0])) : int'($signed(qz_out[i]));
        qref = ref_quant(qz_in[i], ge, is_v);
        checks++;
        if (q != qref || q > (is_v ? 7 : 127) || q < (is_v ? -7 : -127)) begin
          failures++;
          $display("FAIL quant x=%h E=%0d v=%0d got %0d expected %0d", qz_in[i], ge, is_v, q, qref);
        end
        checks++;
        if (dq_out[i] !== ref_dequant(qref, ge, is_v)) begin
          failures++;
          $display("FAIL dequant q=%0d E=%0d got %h expected %h", qref, ge, dq_out[i], ref_dequant(qref, ge, is_v));
        end
        x = fp16_to_real(qz_in[i]);
        y = fp16_to_real(dq_out[i]);
        checks++;
        if ((x - y) >= st || (y - x) >= st) begin
          failures++;
          $display("FAIL error bound x=%f y=%f step=%f", x, y, st);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
