// tb_migration_dma -- self-checking test of the stack-local migration DMA.
//
// Small configuration: d = 32, B = 4 banks, 64-token window, 4-token pages,
// 4 pages per block, 2 capacity banks, groups of 16. The compute-layer banks
// are modelled here as plain arrays addressed exactly as the PIM banks are
// (bank, K/V, row, column) with a one-cycle read; the capacity layers are the
// behavioural model. The test
//   1. fills a slot with random FP16 Keys and Values and demotes it; checks
//      that every bank access of the DMA follows the layout (K: bank n mod B,
//      row n div B; V: bank j mod B, column j div B) and stays in the slot,
//      that page p lands in capacity bank p mod B_CAP with PAGE_WORDS words
//      per page, and the cycle count without back-pressure;
//   2. clears the banks and promotes the block into another slot; checks that
//      every element is written once and equals the K8V4 round trip of the
//      original value (reference quantizer, group exponent from the data);
//   3. repeats both with random capacity back-pressure and checks again.
//
// Bank and page mappings checked are the paper's; the word format and cycle
// counts are this design's own.
module tb_migration_dma;
  import ts_fp16_pkg::*;
  import ts_pkg::*;
  import ts_ref_pkg::*;
  localparam int D = 32, B = 4, LM = 64, TP = 4, BP = 4, BC = 2, QG = 16;
  localparam int TBLK = TP * BP, GPT = D / QG;
  localparam int TW = $clog2(LM + 1), DW = $clog2(D), BW = $clog2(B);
  localparam int PW = (2 * TP * GPT + 7) / 8 + TP * D / 8 + TP * D / 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic job_valid = 0, job_ready, done_valid, busy, promoting;
  dma_job_t job = '0, done_job;
  logic bk_wr_en, bk_wr_is_v, bk_rd_en, bk_rd_is_v;
  logic [BW-1:0] bk_wr_bank, bk_rd_bank;
  logic [TW-1:0] bk_wr_row, bk_rd_row;
  logic [DW-1:0] bk_wr_col, bk_rd_col;
  fp16_t bk_wr_data, bk_rd_data;
  logic cap_req_valid, cap_req_ready, cap_rsp_valid;
  cap_req_t cap_req;
  logic [63:0] cap_rsp_data;

  migration_dma #(.D(D), .B(B), .L_MAX(LM), .T_PAGE(TP), .BLOCK_PAGES(BP), .B_CAP(BC),
                  .QGROUP(QG)) dut (.*);
  cap_layer_model #(.NBANK(BC), .WORDS(4096), .LAT(3), .STALL_PCT(0)) u_cap (
    .clk, .rst_n, .req_valid(cap_req_valid), .req_ready(cap_req_ready), .req(cap_req),
    .rsp_valid(cap_rsp_valid), .rsp_data(cap_rsp_data));

  int checks = 0, failures = 0;
  // bank arrays: [is_v][bank][row][col]
  fp16_t bank [2][B][LM][D];
  int    wcount [LM][2][D];          // promotion writes per element
  fp16_t orig [TBLK][2][D];          // original block contents [t][kv][j]
  int    lo_n, hi_n;                 // token range the DMA may touch
  int    cap_wr_per_bank [BC];

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void decode(input logic is_v, input int bk, input int row, input int col,
                                 output int n, output int j);
    if (is_v) begin n = row; j = col * B + bk; end
    else      begin n = row * B + bk; j = col; end
  endfunction

  // bank model and access checker
  int bad_rd = 0, bad_wr = 0;
  always @(posedge clk) begin
    int n, j;
    if (bk_rd_en) begin
      bk_rd_data <= bank[bk_rd_is_v][bk_rd_bank][bk_rd_row][bk_rd_col];
      decode(bk_rd_is_v, int'(bk_rd_bank), int'(bk_rd_row), int'(bk_rd_col), n, j);
      if (n < lo_n || n >= hi_n || j >= D) bad_rd++;
    end
    if (bk_wr_en) begin
      bank[bk_wr_is_v][bk_wr_bank][bk_wr_row][bk_wr_col] <= bk_wr_data;
      decode(bk_wr_is_v, int'(bk_wr_bank), int'(bk_wr_row), int'(bk_wr_col), n, j);
      if (n < lo_n || n >= hi_n || j >= D) bad_wr++;
      else wcount[n][bk_wr_is_v][j]++;
    end
    if (cap_req_valid && cap_req_ready && cap_req.we) cap_wr_per_bank[cap_req.bank]++;
  end

  task automatic put(input int n, input int kv, input int j, input fp16_t v);
    if (kv == 1) bank[1][j % B][n][j / B] = v;
    else         bank[0][n % B][n / B][j] = v;
  endtask
  function automatic fp16_t get(input int n, input int kv, input int j);
    return (kv == 1) ? bank[1][j % B][n][j / B] : bank[0][n % B][n / B][j];
  endfunction

  task automatic run_job(input dma_op_e op, input int blk, input int slot, output int cycles);
    @(negedge clk);
    job_valid = 1;
    job = '{op: op, block: 10'(blk), slot: 16'(slot), cat: CAT_CODE, offset: 16'd0};
    #1;
    while (!job_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    job_valid = 0;
    cycles = 1;
    while (!done_valid) begin @(posedge clk); #1; cycles++; end
    checks++;
    if (done_job != job) begin failures++; $display("FAIL done job mismatch"); end
  endtask

  task automatic one_pass(input int blk, input int s1, input int s2, input bit timed);
    int cyc, exp_cyc;
    // fill slot s1
    for (int t = 0; t < TBLK; t++) for (int kv = 0; kv < 2; kv++) for (int j = 0; j < D; j++) begin
      orig[t][kv][j] = rand_fp16(5, 20);
      if (($urandom % 16) == 0) orig[t][kv][j] = 16'h0000;
      put(s1 * TBLK + t, kv, j, orig[t][kv][j]);
    end
    for (int b = 0; b < BC; b++) cap_wr_per_bank[b] = 0;
    lo_n = s1 * TBLK; hi_n = lo_n + TBLK; bad_rd = 0; bad_wr = 0;
    run_job(DMA_DEMOTE, blk, s1, cyc);
    checks++;
    if (bad_rd != 0 || bad_wr != 0) begin
      failures++; $display("FAIL demotion: %0d reads / %0d writes outside layout", bad_rd, bad_wr);
    end
    for (int b = 0; b < BC; b++) begin
      checks++;
      if (cap_wr_per_bank[b] != (BP / BC) * PW) begin
        failures++; $display("FAIL capacity bank %0d got %0d words", b, cap_wr_per_bank[b]);
      end
    end
    exp_cyc = BP * ((2 * TP * D + 1) + 2 * PW);
    $display("demotion: %0d cycles (element-serial bound %0d)", cyc, exp_cyc);
    if (timed) begin
      checks++;
      if (cyc < exp_cyc - 4 || cyc > exp_cyc + 4) begin
        failures++; $display("FAIL demotion took %0d cycles, expected about %0d", cyc, exp_cyc);
      end
    end
    // wipe everything, then promote into s2
    for (int n = 0; n < LM; n++) for (int kv = 0; kv < 2; kv++) for (int j = 0; j < D; j++) begin
      put(n, kv, j, 16'h7BFF);
      wcount[n][kv][j] = 0;
    end
    lo_n = s2 * TBLK; hi_n = lo_n + TBLK; bad_rd = 0; bad_wr = 0;
    run_job(DMA_PROMOTE, blk, s2, cyc);
    exp_cyc = BP * (PW + 3 + 2 * TP * D + 1);
    $display("promotion: %0d cycles (element-serial bound %0d)", cyc, exp_cyc);
    if (timed) begin
      checks++;
      if (cyc < exp_cyc - 4 || cyc > exp_cyc + 4) begin
        failures++; $display("FAIL promotion took %0d cycles, expected about %0d", cyc, exp_cyc);
      end
    end
    checks++;
    if (bad_rd != 0 || bad_wr != 0) begin
      failures++; $display("FAIL promotion: %0d reads / %0d writes outside layout", bad_rd, bad_wr);
    end
    for (int t = 0; t < TBLK; t++) for (int kv = 0; kv < 2; kv++)
      for (int g = 0; g < GPT; g++) begin
        int ge;
        ge = 0;
        for (int i = 0; i < QG; i++)
          if (int'(orig[t][kv][g*QG+i][14:10]) > ge) ge = int'(orig[t][kv][g*QG+i][14:10]);
        for (int i = 0; i < QG; i++) begin
          int j;
          fp16_t e, got;
          j   = g * QG + i;
          e   = ref_dequant(ref_quant(orig[t][kv][j], ge, kv == 1), ge, kv == 1);
          got = get(s2 * TBLK + t, kv, j);
          checks++;
          if (got !== e || wcount[s2 * TBLK + t][kv][j] != 1) begin
            failures++;
            if (failures < 10)
              $display("FAIL t=%0d %s j=%0d orig %h got %h expected %h writes %0d", t,
                       kv ? "V" : "K", j, orig[t][kv][j], got, e, wcount[s2 * TBLK + t][kv][j]);
          end
        end
      end
  endtask

  initial begin
    for (int n = 0; n < LM; n++) for (int kv = 0; kv < 2; kv++) for (int j = 0; j < D; j++)
      put(n, kv, j, 16'h0000);
    bk_rd_data = '0;
    lo_n = 0; hi_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    one_pass(5, 1, 2, 1);
    u_cap.stall_pct = 35;
    one_pass(9, 3, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
