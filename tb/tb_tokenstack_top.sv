// tb_tokenstack_top -- end-to-end test of one TokenStack stack.
//
// Reduced configuration: d = 32, B = 4 PIM banks, a 64-token window, 4-token
// pages, 2 pages per block (8 slots), 2 capacity banks, groups of 16. The
// testbench plays the host GPU and the runtime; the capacity dies are the
// behavioural model with random back-pressure, and the host response channel
// is randomly stalled. It keeps a reference copy of every K and V element in
// the compute window and checks, in order:
//   * score (s = qK^T) and context (o = aV) phases against a bit-exact FP16
//     reference, before and after blocks move;
//   * host demotion of a block, then a touch that misses, then its promotion
//     into another slot: the promoted tokens must equal the K8V4 round trip
//     of the originals (checked through a later score/context phase);
//   * a KV write issued during a promotion waits for it (stall);
//   * GPU capacity reads and writes interleaved with DMA traffic;
//   * a promotion queued behind a waiting demotion goes first;
//   * remote touches from three cards make a block pass the replica gate
//     once;
//   * allocating above the high-water mark makes the eviction engine demote
//     until the low-water mark.
// Each mechanism is counted; a mechanism that never happened is a failure.
//
// Mechanisms follow the paper; the reduced sizes, thresholds and sequence are
// the testbench's own.
module tb_tokenstack_top;
  import ts_fp16_pkg::*;
  import ts_pkg::*;
  import ts_ref_pkg::*;
  localparam int D = 32, B = 4, LM = 64, TP = 4, BP = 2, BC = 2, QG = 16, NB = 256;
  localparam int TBLK = TP * BP, NS = LM / TBLK;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  host_cmd_t cmd = '0;
  host_rsp_t rsp;
  logic cap_req_valid, cap_req_ready, cap_rsp_valid;
  cap_req_t cap_req;
  logic [63:0] cap_rsp_data;
  logic [15:0] occupancy;
  logic [31:0] n_promotions, n_demotions, n_evictions, n_replicas, n_kv_stalls, n_fg_first,
               n_touch_miss, gpu_grants, dma_grants;

  tokenstack_top #(.D(D), .B(B), .L_MAX(LM), .T_PAGE(TP), .BLOCK_PAGES(BP), .B_CAP(BC),
                   .QGROUP(QG), .NBLOCKS(NB), .T_SHIFT(2)) dut (.*);
  cap_layer_model #(.NBANK(BC), .WORDS(16384), .LAT(4), .STALL_PCT(20)) u_cap (
    .clk, .rst_n, .req_valid(cap_req_valid), .req_ready(cap_req_ready), .req(cap_req),
    .rsp_valid(cap_rsp_valid), .rsp_data(cap_rsp_data));

  int checks = 0, failures = 0;
  fp16_t Kr [LM][D], Vr [LM][D], q [D];
  host_rsp_t rq [rsp_kind_e][$];
  int n_score_ops = 0, n_ctx_ops = 0, n_contended = 0, n_rsp_stall = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rsp_ready = ($urandom % 5) != 0;
  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && rsp_ready) rq[rsp.kind].push_back(rsp);
    if (rsp_valid && !rsp_ready) n_rsp_stall++;
    if (dut.u_arb.cap_req_valid && !dut.u_arb.gq_empty && !dut.u_arb.dq_empty) n_contended++;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic send(input host_cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    cmd_valid = 0;
  endtask

  function automatic host_cmd_t mk(input host_op_e op);
    host_cmd_t c;
    c = '0; c.op = op;
    return c;
  endfunction

  task automatic wait_rsp(input rsp_kind_e k, output host_rsp_t r);
    int t;
    t = 0;
    while (rq[k].size() == 0 && t < 50000) begin @(posedge clk); t++; end
    if (rq[k].size() == 0) begin
      failures++; $display("FAIL no response of kind %s", k.name()); r = '0;
    end else r = rq[k].pop_front();
  endtask

  task automatic kv_write(input int n, input int j, input bit v, input fp16_t x);
    host_cmd_t c;
    c = mk(OP_KV_WRITE); c.slot = 16'(n); c.idx = 16'(j); c.is_v = v; c.data = 64'(x);
    send(c);
    if (v) Vr[n][j] = x; else Kr[n][j] = x;
  endtask

  task automatic cfg(input logic [15:0] sel, input int idx, input logic [63:0] data);
    host_cmd_t c;
    c = mk(OP_CFG); c.slot = sel; c.idx = 16'(idx); c.data = data;
    send(c);
  endtask

  task automatic alloc(input int blk, input int slot, input cat_e ct, input int off);
    host_cmd_t c;
    c = mk(OP_ALLOC); c.block = 10'(blk); c.slot = 16'(slot); c.cat = ct; c.offset = 16'(off);
    send(c);
  endtask

  task automatic migrate(input host_op_e op, input int blk, input int slot);
    host_cmd_t c;
    c = mk(op); c.block = 10'(blk); c.slot = 16'(slot); c.cat = CAT_TEXT;
    send(c);
  endtask

  task automatic touch(input int blk, input bit remote, input int card, output host_rsp_t r);
    host_cmd_t c;
    c = mk(OP_TOUCH); c.block = 10'(blk); c.is_v = remote; c.card = 3'(card);
    send(c);
    wait_rsp(RSP_TOUCH, r);
  endtask

  task automatic score_phase(input int L);
    host_rsp_t r;
    host_cmd_t c;
    for (int j = 0; j < D; j++) begin
      q[j] = rand_fp16(10, 16);
      c = mk(OP_Q_WRITE); c.idx = 16'(j); c.data = 64'(q[j]); send(c);
    end
    c = mk(OP_SCORE); c.idx = 16'(L); send(c);
    for (int n = 0; n < L; n++) begin
      fp16_t acc;
      wait_rsp(RSP_SCORE, r);
      acc = 16'h0000;
      for (int j = 0; j < D; j++) acc = ref_add(acc, ref_mul(q[j], Kr[r.idx][j]));
      check($sformatf("score token %0d", r.idx), r.data, 64'(acc));
    end
    n_score_ops++;
  endtask

  task automatic context_phase(input int L);
    host_rsp_t r;
    host_cmd_t c;
    fp16_t a [LM];
    c = mk(OP_CONTEXT); c.idx = 16'(L); send(c);
    for (int n = 0; n < L; n++) begin
      a[n] = rand_fp16(8, 14);
      c = mk(OP_A_DATA); c.data = 64'(a[n]); send(c);
    end
    for (int k = 0; k < D; k++) begin
      fp16_t acc;
      wait_rsp(RSP_OUT, r);
      acc = 16'h0000;
      for (int n = 0; n < L; n++) acc = ref_add(acc, ref_mul(a[n], Vr[n][r.idx]));
      check($sformatf("output dim %0d", r.idx), r.data, 64'(acc));
    end
    n_ctx_ops++;
  endtask

  // expected compute-layer contents after a block moves from slot s1 to s2
  task automatic model_move(input int s1, input int s2);
    for (int t = 0; t < TBLK; t++)
      for (int g = 0; g < D / QG; g++) begin
        int ek, ev;
        ek = 0; ev = 0;
        for (int i = 0; i < QG; i++) begin
          if (int'(Kr[s1*TBLK+t][g*QG+i][14:10]) > ek) ek = int'(Kr[s1*TBLK+t][g*QG+i][14:10]);
          if (int'(Vr[s1*TBLK+t][g*QG+i][14:10]) > ev) ev = int'(Vr[s1*TBLK+t][g*QG+i][14:10]);
        end
        for (int i = 0; i < QG; i++) begin
          Kr[s2*TBLK+t][g*QG+i] = ref_dequant(ref_quant(Kr[s1*TBLK+t][g*QG+i], ek, 0), ek, 0);
          Vr[s2*TBLK+t][g*QG+i] = ref_dequant(ref_quant(Vr[s1*TBLK+t][g*QG+i], ev, 1), ev, 1);
        end
      end
  endtask

  initial begin
    host_rsp_t r;
    host_cmd_t c;
    logic [63:0] gw [16];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- configuration: reuse tables, lifespans, replica thresholds ----
    for (int w = 0; w < 4; w++) begin
      for (int b = 0; b < 8; b++) cfg(CFG_F_TABLE, w * 64 + b, 64'((b + 1) * (8000 >> w)));
      cfg(CFG_LIFESPAN, w, 64'(4 + w));
    end
    cfg(CFG_REPLICA, 0, {16'd0, 16'd100, 16'd1, 16'd2});

    // ---- fill the whole window, declare three resident blocks ----
    for (int n = 0; n < LM; n++)
      for (int j = 0; j < D; j++) begin
        kv_write(n, j, 0, rand_fp16(8, 16));
        kv_write(n, j, 1, rand_fp16(8, 16));
      end
    alloc(100, 0, CAT_API, 0);
    alloc(101, 1, CAT_TEXT, 300);
    alloc(102, 2, CAT_CODE, 20);

    // ---- attention over the first 24 tokens ----
    score_phase(24);
    context_phase(24);

    // ---- GPU capacity writes, then demotion with GPU reads alongside ----
    for (int i = 0; i < 16; i++) begin
      gw[i] = {$urandom, $urandom};
      c = mk(OP_GPU_WR); c.bank = 5'(i % 2); c.addr = CAP_AW'(12000 + i); c.data = gw[i];
      send(c);
    end
    begin
      logic [31:0] g0;
      g0 = dma_grants;
      migrate(OP_DEMOTE, 101, 0);
      while (dma_grants < g0 + 8) @(posedge clk);   // DMA is writing pages now
    end
    for (int i = 0; i < 16; i++) begin
      c = mk(OP_GPU_RD); c.bank = 5'(i % 2); c.addr = CAP_AW'(12000 + i);
      send(c);
    end
    for (int i = 0; i < 16; i++) begin
      wait_rsp(RSP_GPU, r);
      check($sformatf("gpu read %0d", i), r.data, gw[i]);
    end
    wait_rsp(RSP_DONE, r);
    check("demotion done block", 64'(r.idx), 64'd101);
    touch(101, 0, 0, r);
    check("touch of demoted block misses", r.data, 64'd0);
    check("occupancy after demotion", 64'(occupancy), 64'd2);

    // ---- promotion into slot 5 with a KV write that has to wait ----
    migrate(OP_PROMOTE, 101, 5);
    repeat (10) @(posedge clk);
    kv_write(60, 3, 0, rand_fp16(8, 16));
    wait_rsp(RSP_DONE, r);
    check("promotion done block", 64'(r.idx), 64'd101);
    model_move(1, 5);
    touch(101, 0, 0, r);
    check("touch of promoted block hits", r.data, 64'd1);
    check("promoted block slot", 64'(r.idx), 64'd5);
    score_phase(LM);
    context_phase(LM);

    // ---- foreground promotion overtakes a waiting demotion ----
    alloc(103, 3, CAT_THINK, 5);
    alloc(104, 4, CAT_THINK, 6);
    migrate(OP_DEMOTE, 103, 0);
    migrate(OP_DEMOTE, 104, 0);
    migrate(OP_PROMOTE, 200, 6);          // never written: promotes zeros
    // 103 was already running; the promotion of 200 must overtake 104
    wait_rsp(RSP_DONE, r); check("first done", 64'(r.idx), 64'd103);
    wait_rsp(RSP_DONE, r); check("foreground done before background", 64'(r.idx), 64'd200);
    wait_rsp(RSP_DONE, r); check("last done", 64'(r.idx), 64'd104);
    for (int t = 0; t < TBLK; t++)
      for (int j = 0; j < D; j++) begin Kr[6*TBLK+t][j] = 16'h0000; Vr[6*TBLK+t][j] = 16'h0000; end
    score_phase(LM);

    // ---- replica gate: remote hits from three cards ----
    alloc(105, 7, CAT_CODE, 10);
    touch(105, 1, 1, r);
    touch(105, 1, 2, r);
    touch(105, 1, 3, r);
    wait_rsp(RSP_REPL, r);
    check("replica block", 64'(r.idx), 64'd105);
    touch(105, 1, 4, r);
    repeat (20) @(posedge clk);
    check("replica requested once", 64'(rq[RSP_REPL].size()), 64'd0);

    // ---- eviction between the water marks ----
    // resident now: slots 0, 2, 5, 6, 7 (5 blocks)
    cfg(CFG_WATER, 0, {32'd0, 16'd6, 16'd4});
    alloc(106, 3, CAT_API, 0);
    alloc(107, 4, CAT_TEXT, 900);
    for (int i = 0; i < 3; i++) wait_rsp(RSP_DONE, r);
    repeat (100) @(posedge clk);
    check("evictions", 64'(n_evictions), 64'd3);
    check("occupancy after eviction", 64'(occupancy), 64'd4);

    // ---- mechanism coverage ----
    $display("promotions %0d demotions %0d evictions %0d replicas %0d kv_stalls %0d fg_first %0d",
             n_promotions, n_demotions, n_evictions, n_replicas, n_kv_stalls, n_fg_first);
    $display("touch_miss %0d gpu_grants %0d dma_grants %0d contended %0d rsp_stalls %0d score %0d context %0d",
             n_touch_miss, gpu_grants, dma_grants, n_contended, n_rsp_stall, n_score_ops, n_ctx_ops);
    check("promotion count", 64'(n_promotions), 64'd2);
    check("demotion count", 64'(n_demotions), 64'd6);
    check("replica count", 64'(n_replicas), 64'd1);
    checks++; if (n_kv_stalls == 0)  begin failures++; $display("FAIL no KV write stall"); end
    checks++; if (n_fg_first == 0)   begin failures++; $display("FAIL foreground never went first"); end
    checks++; if (n_touch_miss == 0) begin failures++; $display("FAIL no touch miss"); end
    checks++; if (gpu_grants == 0 || dma_grants == 0) begin failures++; $display("FAIL no grants"); end
    checks++; if (n_contended == 0)  begin failures++; $display("FAIL GPU and DMA never contended"); end
    checks++; if (n_rsp_stall == 0)  begin failures++; $display("FAIL response channel never stalled"); end
    checks++; if (n_score_ops == 0 || n_ctx_ops == 0) begin failures++; $display("FAIL no attention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
