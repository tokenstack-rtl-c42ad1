// tb_pim_bank -- self-checking test of one PIM bank (bank 1 of B = 4, d = 8).
//
// Loads Keys and Values of a 13-token context with the paper's layout (the
// bank gets tokens 1, 5, 9 and dimensions 1, 5), broadcasts q, runs SCORE and
// compares the three scores and the cycle count (rows * d) with a real-valued
// reference; then streams a_0..a_12 for CONTEXT and checks both outputs and
// the cycle count (L * owned columns). Also checks the element read port.
module tb_pim_bank;
  import ts_ref_pkg::*;
  localparam int D = 8, B = 4, LM = 32, ID = 1, L = 13;
  localparam int TW = $clog2(LM + 1), DW = $clog2(D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, wr_is_v = 0, rd_en = 0, rd_is_v = 0, q_we = 0, op_start = 0, op_ctx = 0, a_valid = 0;
  logic [TW-1:0] wr_row = 0, rd_row = 0, op_len = 0, res_idx = 0;
  logic [DW-1:0] wr_col = 0, rd_col = 0, q_idx = 0;
  logic [15:0] wr_data = 0, q_data = 0, a_data = 0, rd_data, res_data;
  logic busy, a_ready, a_take;
  assign a_take = a_valid && a_ready;

  pim_bank #(.D(D), .B(B), .L_MAX(LM), .BANK_ID(ID)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] K [L][D];
  logic [15:0] V [L][D];
  logic [15:0] q [D];
  logic [15:0] a [L];

  task automatic check(input string what, input logic [15:0] got, input logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [15:0] acc;
    for (int n = 0; n < L; n++) for (int j = 0; j < D; j++) begin
      K[n][j] = rand_fp16(12, 17);
      V[n][j] = rand_fp16(12, 17);
    end
    for (int j = 0; j < D; j++) q[j] = rand_fp16(12, 17);
    for (int n = 0; n < L; n++) a[n] = rand_fp16(10, 15);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load the tokens and dimensions this bank owns
    for (int n = 0; n < L; n++) for (int j = 0; j < D; j++) begin
      if (n % B == ID) begin
        wr_en <= 1; wr_is_v <= 0; wr_row <= TW'(n / B); wr_col <= DW'(j); wr_data <= K[n][j];
        @(posedge clk);
      end
      if (j % B == ID) begin
        wr_en <= 1; wr_is_v <= 1; wr_row <= TW'(n); wr_col <= DW'(j / B); wr_data <= V[n][j];
        @(posedge clk);
      end
    end
    wr_en <= 0;
    for (int j = 0; j < D; j++) begin
      q_we <= 1; q_idx <= DW'(j); q_data <= q[j];
      @(posedge clk);
    end
    q_we <= 0;
    // read-back through the read port
    rd_en <= 1; rd_is_v <= 0; rd_row <= 2; rd_col <= 3;
    @(posedge clk);
    #1 check("read K[9][3]", rd_data, K[9][3]);
    rd_is_v <= 1; rd_row <= 7; rd_col <= 1;
    @(posedge clk);
    #1 check("read V[7][5]", rd_data, V[7][5]);
    rd_en <= 0;
    // SCORE
    op_start <= 1; op_ctx <= 0; op_len <= TW'(L);
    @(posedge clk);
    op_start <= 0;
    cyc = 0;
    #1;
    while (busy) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 3 * D) begin failures++; $display("FAIL score cycles %0d expected %0d", cyc, 3 * D); end
    for (int r = 0; r < 3; r++) begin
      acc = 16'h0000;
      for (int k = 0; k < D; k++) acc = ref_add(acc, ref_mul(q[k], K[r * B + ID][k]));
      res_idx = TW'(r);
      #1 check($sformatf("score row %0d", r), res_data, acc);
    end
    // CONTEXT
    @(posedge clk);
    op_start <= 1; op_ctx <= 1; op_len <= TW'(L);
    @(posedge clk);
    op_start <= 0;
    cyc = 0;
    for (int n = 0; n < L; n++) begin
      a_valid <= 1; a_data <= a[n];
      @(posedge clk); cyc++;
      while (!a_ready) begin @(posedge clk); cyc++; end
      #1;
    end
    a_valid <= 0;
    // a_ready is sampled before the clock edge that consumes a_n
    checks++;
    if (cyc != 2 * L + L - 1 && cyc != 2 * L) begin failures++; $display("FAIL context cycles %0d", cyc); end
    @(posedge clk); #1;
    checks++;
    if (busy) begin failures++; $display("FAIL context still busy"); end
    for (int c = 0; c < 2; c++) begin
      acc = 16'h0000;
      for (int n = 0; n < L; n++) acc = ref_add(acc, ref_mul(a[n], V[n][c * B + ID]));
      res_idx = TW'(c);
      #1 check($sformatf("context col %0d", c), res_data, acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
