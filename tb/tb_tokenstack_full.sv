// tb_tokenstack_full -- one complete operation of the stack at its default
// size: d = 128, 256 PIM banks, an 8192-token window, 16-token pages, 4 pages
// per block, 32 capacity banks, groups of 32.
//
// The host writes the Keys and Values of one 64-token block into slot 0,
// declares it resident, runs a score phase and a context phase over it and
// checks them against a bit-exact FP16 reference. It then demotes the block
// (K8V4 into the capacity layers), checks that a touch misses, promotes it
// into slot 1 (tokens 64..127) and runs score and context phases over all
// 128 tokens, where the promoted half must equal the K8V4 round trip of the
// originals. A GPU capacity write/read pair runs alongside.
//
// The sizes are the design's defaults, taken from the paper where it gives
// them; the command sequence is the testbench's own.
module tb_tokenstack_full;
  import ts_fp16_pkg::*;
  import ts_pkg::*;
  import ts_ref_pkg::*;
  localparam int D = D_HEAD, TBLK = T_PAGE * BLOCK_PAGES;

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

  tokenstack_top dut (.*);
  cap_layer_model #(.NBANK(B_CAP), .WORDS(4096), .LAT(4), .STALL_PCT(10)) u_cap (
    .clk, .rst_n, .req_valid(cap_req_valid), .req_ready(cap_req_ready), .req(cap_req),
    .rsp_valid(cap_rsp_valid), .rsp_data(cap_rsp_data));

  int checks = 0, failures = 0;
  fp16_t Kr [2*TBLK][D], Vr [2*TBLK][D], q [D];
  host_rsp_t rq [rsp_kind_e][$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rsp_ready = ($urandom % 5) != 0;
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) rq[rsp.kind].push_back(rsp);

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
    while (rq[k].size() == 0 && t < 100000) begin @(posedge clk); t++; end
    if (rq[k].size() == 0) begin
      failures++; $display("FAIL no response of kind %s", k.name()); r = '0;
    end else r = rq[k].pop_front();
  endtask

  task automatic score_phase(input int L);
    host_rsp_t r;
    host_cmd_t c;
    for (int j = 0; j < D; j++) begin
      q[j] = rand_fp16(10, 15);
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
  endtask

  task automatic context_phase(input int L);
    host_rsp_t r;
    host_cmd_t c;
    fp16_t a [2*TBLK];
    c = mk(OP_CONTEXT); c.idx = 16'(L); send(c);
    for (int n = 0; n < L; n++) begin
      a[n] = rand_fp16(8, 13);
      c = mk(OP_A_DATA); c.data = 64'(a[n]); send(c);
    end
    for (int k = 0; k < D; k++) begin
      fp16_t acc;
      wait_rsp(RSP_OUT, r);
      acc = 16'h0000;
      for (int n = 0; n < L; n++) acc = ref_add(acc, ref_mul(a[n], Vr[n][r.idx]));
      check($sformatf("output dim %0d", r.idx), r.data, 64'(acc));
    end
  endtask

  initial begin
    host_rsp_t r;
    host_cmd_t c;
    logic [63:0] gw;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < TBLK; n++)
      for (int j = 0; j < D; j++)
        for (int v = 0; v < 2; v++) begin
          fp16_t x;
          x = rand_fp16(8, 16);
          if (v == 1) Vr[n][j] = x; else Kr[n][j] = x;
          c = mk(OP_KV_WRITE); c.slot = 16'(n); c.idx = 16'(j); c.is_v = v[0]; c.data = 64'(x);
          send(c);
        end
    c = mk(OP_ALLOC); c.block = 10'd7; c.slot = 16'd0; c.cat = CAT_CODE; send(c);
    score_phase(TBLK);
    context_phase(TBLK);

    c = mk(OP_DEMOTE); c.block = 10'd7; send(c);
    gw = {$urandom, $urandom};
    c = mk(OP_GPU_WR); c.bank = 5'd3; c.addr = CAP_AW'(4000); c.data = gw; send(c);
    c = mk(OP_GPU_RD); c.bank = 5'd3; c.addr = CAP_AW'(4000); send(c);
    wait_rsp(RSP_GPU, r);
    check("gpu read", r.data, gw);
    wait_rsp(RSP_DONE, r);
    check("demotion done", 64'(r.idx), 64'd7);
    c = mk(OP_TOUCH); c.block = 10'd7; send(c);
    wait_rsp(RSP_TOUCH, r);
    check("touch after demotion misses", r.data, 64'd0);

    c = mk(OP_PROMOTE); c.block = 10'd7; c.slot = 16'd1; c.cat = CAT_CODE; send(c);
    wait_rsp(RSP_DONE, r);
    check("promotion done", 64'(r.idx), 64'd7);
    for (int t = 0; t < TBLK; t++)
      for (int g = 0; g < D / QGROUP; g++) begin
        int ek, ev;
        ek = 0; ev = 0;
        for (int i = 0; i < QGROUP; i++) begin
          if (int'(Kr[t][g*QGROUP+i][14:10]) > ek) ek = int'(Kr[t][g*QGROUP+i][14:10]);
          if (int'(Vr[t][g*QGROUP+i][14:10]) > ev) ev = int'(Vr[t][g*QGROUP+i][14:10]);
        end
        for (int i = 0; i < QGROUP; i++) begin
          Kr[TBLK+t][g*QGROUP+i] = ref_dequant(ref_quant(Kr[t][g*QGROUP+i], ek, 0), ek, 0);
          Vr[TBLK+t][g*QGROUP+i] = ref_dequant(ref_quant(Vr[t][g*QGROUP+i], ev, 1), ev, 1);
        end
      end
    score_phase(2 * TBLK);
    context_phase(2 * TBLK);
    check("promotions", 64'(n_promotions), 64'd1);
    check("demotions", 64'(n_demotions), 64'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
