// tb_attention_coordinator -- self-checking test of the attention coordinator
// driving four PIM banks (B = 4, d = 8).
//
// Writes a 10-token context into the banks with the paper's layout, then runs
// a full decode-step attention through the coordinator: q broadcast, SCORE
// (checks all 10 scores in concatenation order and the ceil(L/B)*d compute
// time before the first score), then CONTEXT with an a vector (checks all 8
// outputs). References are real-valued and independent of the RTL.
module tb_attention_coordinator;
  import ts_pkg::*;
  import ts_ref_pkg::*;
  localparam int D = 8, NB = 4, LM = 32, L = 10;
  localparam int TW = $clog2(LM + 1), DW = $clog2(D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 1, active;
  host_op_e    cmd_op = OP_NOP;
  logic [15:0] cmd_idx = 0, cmd_data = 0;
  host_rsp_t   rsp;
  logic q_we, op_start, op_ctx, a_valid, a_take;
  logic [DW-1:0] q_idx;
  logic [15:0] q_data, a_data;
  logic [TW-1:0] op_len, res_idx;
  logic [NB-1:0] bank_busy, bank_a_ready;
  logic [15:0] bank_res [NB];
  logic [15:0] bank_rd [NB];
  logic wr_en = 0, wr_is_v = 0;
  logic [TW-1:0] wr_row = 0;
  logic [DW-1:0] wr_col = 0;
  logic [15:0] wr_data = 0;
  int   wr_bank = 0;

  attention_coordinator #(.D(D), .B(NB), .L_MAX(LM)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_idx, .cmd_data,
    .rsp_valid, .rsp_ready, .rsp, .active, .q_we, .q_idx, .q_data, .op_start, .op_ctx,
    .op_len, .a_valid, .a_take, .a_data, .res_idx, .bank_busy, .bank_a_ready, .bank_res);

  for (genvar g = 0; g < NB; g++) begin : g_b
    pim_bank #(.D(D), .B(NB), .L_MAX(LM), .BANK_ID(g)) u_b (
      .clk, .rst_n, .wr_en(wr_en && wr_bank == g), .wr_is_v, .wr_row, .wr_col, .wr_data,
      .rd_en(1'b0), .rd_is_v(1'b0), .rd_row('0), .rd_col('0), .rd_data(bank_rd[g]),
      .q_we, .q_idx, .q_data, .op_start, .op_ctx, .op_len, .busy(bank_busy[g]),
      .a_valid, .a_data, .a_ready(bank_a_ready[g]), .a_take, .res_idx, .res_data(bank_res[g]));
  end

  int checks = 0, failures = 0;
  logic [15:0] K [L][D], V [L][D], q [D], a [L];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input host_op_e op, input int idx, input logic [15:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_idx = 16'(idx); cmd_data = data;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic expect_rsp(input rsp_kind_e kind, input int idx, input logic [15:0] val, output int wait_cyc);
    wait_cyc = 0;
    #1;
    while (!rsp_valid) begin @(posedge clk); #1; wait_cyc++; end
    checks++;
    if (rsp.kind != kind || int'(rsp.idx) != idx || rsp.data[15:0] !== val) begin
      failures++;
      $display("FAIL rsp kind %0d idx %0d data %h, expected kind %0d idx %0d data %h",
               rsp.kind, rsp.idx, rsp.data[15:0], kind, idx, val);
    end
    @(posedge clk);
  endtask

  initial begin
    logic [15:0] acc;
    int w, first_wait;
    for (int n = 0; n < L; n++) for (int j = 0; j < D; j++) begin
      K[n][j] = rand_fp16(12, 16);
      V[n][j] = rand_fp16(12, 16);
    end
    for (int j = 0; j < D; j++) q[j] = rand_fp16(12, 16);
    for (int n = 0; n < L; n++) a[n] = rand_fp16(10, 14);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < L; n++) for (int j = 0; j < D; j++) begin
      wr_en <= 1; wr_is_v <= 0; wr_bank <= n % NB; wr_row <= TW'(n / NB); wr_col <= DW'(j); wr_data <= K[n][j];
      @(posedge clk);
      wr_is_v <= 1; wr_bank <= j % NB; wr_row <= TW'(n); wr_col <= DW'(j / NB); wr_data <= V[n][j];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int j = 0; j < D; j++) send(OP_Q_WRITE, j, q[j]);
    send(OP_SCORE, L, 16'h0);
    for (int n = 0; n < L; n++) begin
      acc = 16'h0000;
      for (int k = 0; k < D; k++) acc = ref_add(acc, ref_mul(q[k], K[n][k]));
      expect_rsp(RSP_SCORE, n, acc, w);
      if (n == 0) first_wait = w;
    end
    // ceil(10/4) = 3 rows of 8 MACs, plus start and finish cycles
    checks++;
    if (first_wait < 3 * D || first_wait > 3 * D + 3) begin
      failures++; $display("FAIL score latency %0d", first_wait);
    end
    send(OP_CONTEXT, L, 16'h0);
    for (int n = 0; n < L; n++) send(OP_A_DATA, 0, a[n]);
    for (int j = 0; j < D; j++) begin
      acc = 16'h0000;
      for (int n = 0; n < L; n++) acc = ref_add(acc, ref_mul(a[n], V[n][j]));
      expect_rsp(RSP_OUT, j, acc, w);
    end
    #1;
    checks++;
    if (active) begin failures++; $display("FAIL coordinator still active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
