// tokenstack_top -- one TokenStack HBM-PIM stack: base-die logic plus the
// PIM banks of the compute layers.
//
// The stack is split vertically into dense capacity layers (weights,
// activations, cold KV) and PIM-enabled compute layers (hot KV next to
// bank-level attention engines). The CMOS base die sits between the host link
// and the DRAM layers and keeps all KV movement inside the stack:
//   * attention_coordinator broadcasts q / a to the B PIM banks and gathers
//     scores and outputs by concatenation (token-major Keys, dim-head Values);
//   * kv_directory translates logical block ids to compute slots or capacity
//     frames and keeps the per-block metadata;
//   * migration_dma promotes and demotes blocks page by page through the
//     shared page buffer and the K8V4 quantization unit;
//   * mc_arbiter keeps GPU-originated and DMA requests to the capacity layers
//     in separate queues;
//   * eviction_engine demotes low-value blocks between the water marks;
//   * replica_gate flags blocks worth a replica on another card.
// Migrations are tagged: promotions wait in a foreground queue that always
// goes first, demotions (host- or eviction-initiated) in a background queue
// that only runs when no promotion waits.
//
// Ports: a host command channel and a response channel (the logical traffic
// of the UCIe die-to-die link, whose PHY is not modelled) and the
// capacity-layer word port (the TSV path to the dense DRAM dies, which are
// outside this RTL). Responses have priority score/output gather > GPU read
// data > command replies > migration-done events > replica requests. The
// statistics outputs count how often each mechanism acted.
// Host rules: a promotion's target slot must be free and outside the window
// of a running attention operation; KV_WRITE waits while a promotion is
// scattering into the banks.
//
// From the paper: the three base-die functions, the two layer types, the
// foreground/background migration classes and the bank and page mappings.
// This design's own: the command set, the response priority, queue depths and
// the rule that KV writes wait for promotions.
module tokenstack_top
  import ts_fp16_pkg::*;
  import ts_pkg::*;
#(
  parameter int D           = ts_pkg::D_HEAD,
  parameter int B           = ts_pkg::B_PIM,
  parameter int L_MAX       = ts_pkg::L_MAX,
  parameter int T_PAGE      = ts_pkg::T_PAGE,
  parameter int BLOCK_PAGES = ts_pkg::BLOCK_PAGES,
  parameter int B_CAP       = ts_pkg::B_CAP,
  parameter int QGROUP      = ts_pkg::QGROUP,
  parameter int NBLOCKS     = ts_pkg::NUM_BLOCKS,
  parameter int T_SHIFT     = 8,
  localparam int NSLOT      = L_MAX / (T_PAGE * BLOCK_PAGES),
  localparam int TW         = $clog2(L_MAX + 1),
  localparam int DW         = (D > 1) ? $clog2(D) : 1,
  localparam int BW         = (B > 1) ? $clog2(B) : 1,
  localparam int FW         = $clog2(ts_pkg::F_BINS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host link
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  host_cmd_t   cmd,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output host_rsp_t   rsp,
  // capacity layers
  output logic        cap_req_valid,
  input  logic        cap_req_ready,
  output cap_req_t    cap_req,
  input  logic        cap_rsp_valid,
  input  logic [63:0] cap_rsp_data,
  // statistics
  output logic [15:0] occupancy,
  output logic [31:0] n_promotions,
  output logic [31:0] n_demotions,
  output logic [31:0] n_evictions,
  output logic [31:0] n_replicas,
  output logic [31:0] n_kv_stalls,
  output logic [31:0] n_fg_first,
  output logic [31:0] n_touch_miss,
  output logic [31:0] gpu_grants,
  output logic [31:0] dma_grants
);

  // ---- time and configuration ---------------------------------------------
  logic [31:0] now;
  logic [15:0] theta_hi, theta_lo, tau_off, tau_cards, tau_hits;
  logic        is_cfg;
  assign is_cfg = cmd_valid && cmd.op == OP_CFG;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= '0;
      theta_hi  <= 16'(NSLOT);
      theta_lo  <= 16'(NSLOT);
      tau_off   <= 16'd0;
      tau_cards <= 16'hFFFF;
      tau_hits  <= 16'hFFFF;
    end else begin
      now <= now + 1;
      if (is_cfg && cmd.slot == CFG_WATER) begin
        theta_hi <= cmd.data[31:16];
        theta_lo <= cmd.data[15:0];
      end
      if (is_cfg && cmd.slot == CFG_REPLICA) begin
        tau_off   <= cmd.data[47:32];
        tau_cards <= cmd.data[31:16];
        tau_hits  <= cmd.data[15:0];
      end
    end
  end

  // ---- compute-layer PIM banks --------------------------------------------------
  logic          bk_wr_en, bk_wr_is_v, bk_rd_en, bk_rd_is_v;
  logic [BW-1:0] bk_wr_bank, bk_rd_bank, bk_rd_bank_q;
  logic [TW-1:0] bk_wr_row, bk_rd_row;
  logic [DW-1:0] bk_wr_col, bk_rd_col;
  fp16_t         bk_wr_data;
  fp16_t         bank_rd [B];
  fp16_t         bank_res [B];
  logic [B-1:0]  bank_busy, bank_a_ready;

  logic          co_q_we, co_op_start, co_op_ctx, co_a_valid, co_a_take;
  logic [DW-1:0] co_q_idx;
  fp16_t         co_q_data, co_a_data;
  logic [TW-1:0] co_op_len, co_res_idx;

  for (genvar g = 0; g < B; g++) begin : g_bank
    pim_bank #(.D(D), .B(B), .L_MAX(L_MAX), .BANK_ID(g)) u_bank (
      .clk, .rst_n,
      .wr_en(bk_wr_en && bk_wr_bank == BW'(g)), .wr_is_v(bk_wr_is_v), .wr_row(bk_wr_row),
      .wr_col(bk_wr_col), .wr_data(bk_wr_data),
      .rd_en(bk_rd_en && bk_rd_bank == BW'(g)), .rd_is_v(bk_rd_is_v), .rd_row(bk_rd_row),
      .rd_col(bk_rd_col), .rd_data(bank_rd[g]),
      .q_we(co_q_we), .q_idx(co_q_idx), .q_data(co_q_data),
      .op_start(co_op_start), .op_ctx(co_op_ctx), .op_len(co_op_len), .busy(bank_busy[g]),
      .a_valid(co_a_valid), .a_data(co_a_data), .a_ready(bank_a_ready[g]), .a_take(co_a_take),
      .res_idx(co_res_idx), .res_data(bank_res[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bk_rd_bank_q <= '0;
    else if (bk_rd_en) bk_rd_bank_q <= bk_rd_bank;
  end

  // ---- attention coordinator ---------------------------------------------------------
  logic      is_attn, co_cmd_ready, co_rsp_valid, co_rsp_ready, co_active;
  host_rsp_t co_rsp;
  assign is_attn = cmd.op inside {OP_Q_WRITE, OP_SCORE, OP_CONTEXT, OP_A_DATA};

  attention_coordinator #(.D(D), .B(B), .L_MAX(L_MAX)) u_coord (
    .clk, .rst_n,
    .cmd_valid(cmd_valid && is_attn), .cmd_ready(co_cmd_ready), .cmd_op(cmd.op),
    .cmd_idx(cmd.idx), .cmd_data(cmd.data[15:0]),
    .rsp_valid(co_rsp_valid), .rsp_ready(co_rsp_ready), .rsp(co_rsp), .active(co_active),
    .q_we(co_q_we), .q_idx(co_q_idx), .q_data(co_q_data),
    .op_start(co_op_start), .op_ctx(co_op_ctx), .op_len(co_op_len),
    .a_valid(co_a_valid), .a_take(co_a_take), .a_data(co_a_data), .res_idx(co_res_idx),
    .bank_busy(bank_busy), .bank_a_ready(bank_a_ready), .bank_res(bank_res)
  );

  // ---- directory ------------------------------------------------------------------------
  meta_t       meta [NSLOT];
  logic        lk_resident, to_hit;
  logic [15:0] lk_slot, to_slot;
  logic        al_en, to_en, pd_en, fr_en, rp_en;
  logic [15:0] al_slot, pd_slot, fr_slot, rp_slot;
  logic [9:0]  al_block;
  cat_e        al_cat;
  logic [15:0] al_offset;

  kv_directory #(.NSLOT(NSLOT), .NBLOCKS(NBLOCKS)) u_dir (
    .clk, .rst_n, .now,
    .lk_block(cmd.block), .lk_resident(lk_resident), .lk_slot(lk_slot),
    .al_en, .al_slot, .al_block, .al_cat, .al_offset,
    .to_en, .to_block(cmd.block), .to_remote(cmd.is_v), .to_card(cmd.card),
    .to_hit(to_hit), .to_slot(to_slot),
    .pd_en, .pd_slot, .fr_en, .fr_slot, .rp_en, .rp_slot,
    .meta(meta), .occupancy(occupancy)
  );

  // ---- migration job queues and DMA --------------------------------------------------------
  dma_job_t fg_dout, bg_dout, bg_din, dma_job, done_job;
  logic     fg_push, fg_full, fg_empty, bg_push, bg_full, bg_empty;
  logic     dma_job_valid, dma_job_ready, dma_done, dma_busy;
  logic [2:0] fg_cnt, bg_cnt;

  sync_fifo #(.T(dma_job_t), .DEPTH(4)) u_fgq (
    .clk, .rst_n, .push(fg_push),
    .din('{op: DMA_PROMOTE, block: cmd.block, slot: cmd.slot, cat: cmd.cat, offset: cmd.offset}),
    .pop(dma_job_valid && dma_job_ready && !fg_empty), .dout(fg_dout),
    .full(fg_full), .empty(fg_empty), .count(fg_cnt));
  sync_fifo #(.T(dma_job_t), .DEPTH(4)) u_bgq (
    .clk, .rst_n, .push(bg_push), .din(bg_din),
    .pop(dma_job_valid && dma_job_ready && fg_empty), .dout(bg_dout),
    .full(bg_full), .empty(bg_empty), .count(bg_cnt));

  // foreground (promotion) strictly before background (demotion)
  logic done_full, done_empty;
  assign dma_job_valid = (!fg_empty || !bg_empty) && !done_full;
  assign dma_job       = !fg_empty ? fg_dout : bg_dout;

  logic          dma_bk_wr_en, dma_bk_wr_is_v;
  logic [BW-1:0] dma_bk_wr_bank;
  logic [TW-1:0] dma_bk_wr_row;
  logic [DW-1:0] dma_bk_wr_col;
  fp16_t         dma_bk_wr_data;
  logic          promoting, kv_go;
  logic          dma_cap_valid, dma_cap_ready, dma_rsp_valid;
  cap_req_t      dma_cap_req;
  logic [63:0]   dma_rsp_data;

  migration_dma #(.D(D), .B(B), .L_MAX(L_MAX), .T_PAGE(T_PAGE), .BLOCK_PAGES(BLOCK_PAGES),
                  .B_CAP(B_CAP), .QGROUP(QGROUP)) u_dma (
    .clk, .rst_n,
    .job_valid(dma_job_valid), .job_ready(dma_job_ready), .job(dma_job),
    .done_valid(dma_done), .done_job(done_job), .busy(dma_busy), .promoting(promoting),
    .bk_wr_en(dma_bk_wr_en), .bk_wr_bank(dma_bk_wr_bank), .bk_wr_is_v(dma_bk_wr_is_v),
    .bk_wr_row(dma_bk_wr_row), .bk_wr_col(dma_bk_wr_col), .bk_wr_data(dma_bk_wr_data),
    .bk_rd_en(bk_rd_en), .bk_rd_bank(bk_rd_bank), .bk_rd_is_v(bk_rd_is_v),
    .bk_rd_row(bk_rd_row), .bk_rd_col(bk_rd_col), .bk_rd_data(bank_rd[bk_rd_bank_q]),
    .cap_req_valid(dma_cap_valid), .cap_req_ready(dma_cap_ready), .cap_req(dma_cap_req),
    .cap_rsp_valid(dma_rsp_valid), .cap_rsp_data(dma_rsp_data)
  );

  // bank write port: migration DMA first, host KV_WRITE otherwise
  assign kv_go     = cmd_valid && cmd.op == OP_KV_WRITE && !promoting;

  always_comb begin
    int n, j;
    n = int'(cmd.slot);
    j = int'(cmd.idx);
    if (dma_bk_wr_en) begin
      bk_wr_en   = 1'b1;
      bk_wr_bank = dma_bk_wr_bank;
      bk_wr_is_v = dma_bk_wr_is_v;
      bk_wr_row  = dma_bk_wr_row;
      bk_wr_col  = dma_bk_wr_col;
      bk_wr_data = dma_bk_wr_data;
    end else begin
      bk_wr_en   = kv_go;
      bk_wr_is_v = cmd.is_v;
      bk_wr_bank = cmd.is_v ? BW'(v_bank(j, B)) : BW'(k_bank(n, B));
      bk_wr_row  = cmd.is_v ? TW'(n) : TW'(k_row(n, B));
      bk_wr_col  = cmd.is_v ? DW'(v_col(j, B)) : DW'(j);
      bk_wr_data = cmd.data[15:0];
    end
  end

  // ---- MC arbiter -------------------------------------------------------------------------------
  logic        gpu_req_valid, gpu_req_ready, gpu_rsp_valid, gpu_rsp_ready;
  logic [63:0] gpu_rsp_data;
  assign gpu_req_valid = cmd_valid && (cmd.op == OP_GPU_RD || cmd.op == OP_GPU_WR);

  mc_arbiter u_arb (
    .clk, .rst_n,
    .gpu_req_valid(gpu_req_valid), .gpu_req_ready(gpu_req_ready),
    .gpu_req('{we: cmd.op == OP_GPU_WR, bank: cmd.bank, addr: cmd.addr, wdata: cmd.data}),
    .gpu_rsp_valid(gpu_rsp_valid), .gpu_rsp_ready(gpu_rsp_ready), .gpu_rsp_data(gpu_rsp_data),
    .dma_req_valid(dma_cap_valid), .dma_req_ready(dma_cap_ready), .dma_req(dma_cap_req),
    .dma_rsp_valid(dma_rsp_valid), .dma_rsp_data(dma_rsp_data),
    .cap_req_valid, .cap_req_ready, .cap_req, .cap_rsp_valid, .cap_rsp_data,
    .gpu_grants, .dma_grants
  );

  // ---- eviction ------------------------------------------------------------------------------------
  logic        ev_valid, ev_ready, ev_active;
  logic [15:0] ev_slot;
  logic [9:0]  ev_block;
  logic        host_demote;

  eviction_engine #(.NSLOT(NSLOT), .T_SHIFT(T_SHIFT)) u_evict (
    .clk, .rst_n, .now, .meta(meta), .occupancy(occupancy),
    .theta_hi(theta_hi), .theta_lo(theta_lo),
    .f_we(is_cfg && cmd.slot == CFG_F_TABLE), .f_cat(cmd.idx[FW+1:FW]), .f_bin(cmd.idx[FW-1:0]),
    .f_data(cmd.data[15:0]),
    .ell_we(is_cfg && cmd.slot == CFG_LIFESPAN), .ell_cat(cmd.idx[1:0]), .ell_data(cmd.data[31:0]),
    .ev_valid(ev_valid), .ev_ready(ev_ready), .ev_slot(ev_slot), .ev_block(ev_block),
    .active(ev_active), .n_demotions(n_evictions)
  );

  // ---- replica check, one cycle after a remote touch -----------------------------------------------
  logic        t1_v;
  logic [15:0] t1_slot;
  logic        rg_pos, rg_fan, rg_freq, rg_rep;
  replica_gate u_rgate (
    .m(meta[t1_slot[$clog2(NSLOT)-1:0]]), .tau_off(tau_off), .tau_cards(tau_cards),
    .tau_hits(tau_hits), .gate_pos(rg_pos), .gate_fanout(rg_fan), .gate_freq(rg_freq),
    .replicate(rg_rep)
  );

  // ---- response queues ---------------------------------------------------------------------------------
  host_rsp_t cr_din, cr_dout, dn_dout, rp_dout;
  logic      cr_push, cr_full, cr_empty, rp_push, rp_full, rp_empty;
  logic [2:0] cr_cnt, dn_cnt, rp_cnt;
  logic      rsp_cr, rsp_dn, rsp_rp;

  sync_fifo #(.T(host_rsp_t), .DEPTH(4)) u_crq (
    .clk, .rst_n, .push(cr_push), .din(cr_din), .pop(rsp_cr), .dout(cr_dout),
    .full(cr_full), .empty(cr_empty), .count(cr_cnt));
  sync_fifo #(.T(host_rsp_t), .DEPTH(4)) u_dnq (
    .clk, .rst_n, .push(dma_done),
    .din('{kind: RSP_DONE, idx: 16'(done_job.block), data: {47'd0, done_job.op, done_job.slot}}),
    .pop(rsp_dn), .dout(dn_dout), .full(done_full), .empty(done_empty), .count(dn_cnt));
  sync_fifo #(.T(host_rsp_t), .DEPTH(4)) u_rpq (
    .clk, .rst_n, .push(rp_push),
    .din('{kind: RSP_REPL, idx: 16'(meta[t1_slot[$clog2(NSLOT)-1:0]].block), data: {48'd0, t1_slot}}),
    .pop(rsp_rp), .dout(rp_dout), .full(rp_full), .empty(rp_empty), .count(rp_cnt));

  always_comb begin
    rsp_valid     = 1'b1;
    co_rsp_ready  = 1'b0;
    gpu_rsp_ready = 1'b0;
    rsp_cr = 1'b0; rsp_dn = 1'b0; rsp_rp = 1'b0;
    rsp = co_rsp;
    if (co_rsp_valid) begin
      co_rsp_ready = rsp_ready;
    end else if (gpu_rsp_valid) begin
      rsp = '{kind: RSP_GPU, idx: 16'd0, data: gpu_rsp_data};
      gpu_rsp_ready = rsp_ready;
    end else if (!cr_empty) begin
      rsp = cr_dout; rsp_cr = rsp_ready;
    end else if (!done_empty) begin
      rsp = dn_dout; rsp_dn = rsp_ready;
    end else if (!rp_empty) begin
      rsp = rp_dout; rsp_rp = rsp_ready;
    end else begin
      rsp_valid = 1'b0;
    end
  end

  // ---- host command decode ---------------------------------------------------------------------------------
  logic cmd_fire;
  assign cmd_fire    = cmd_valid && cmd_ready;
  assign host_demote = cmd_fire && cmd.op == OP_DEMOTE && lk_resident && !meta[lk_slot[$clog2(NSLOT)-1:0]].pending;
  assign ev_ready    = !bg_full && !host_demote;

  always_comb begin
    case (cmd.op)
      OP_Q_WRITE, OP_SCORE, OP_CONTEXT, OP_A_DATA: cmd_ready = co_cmd_ready;
      OP_KV_WRITE: cmd_ready = !promoting;
      OP_ALLOC:    cmd_ready = !dma_done;
      OP_TOUCH:    cmd_ready = !cr_full;
      OP_PROMOTE:  cmd_ready = lk_resident ? !cr_full : !fg_full;
      OP_DEMOTE:   cmd_ready = (lk_resident && !meta[lk_slot[$clog2(NSLOT)-1:0]].pending) ? !bg_full : !cr_full;
      OP_GPU_RD, OP_GPU_WR: cmd_ready = gpu_req_ready;
      default:     cmd_ready = 1'b1;
    endcase

    fg_push = cmd_fire && cmd.op == OP_PROMOTE && !lk_resident;
    bg_push = host_demote || (ev_valid && ev_ready);
    bg_din  = host_demote ? '{op: DMA_DEMOTE, block: cmd.block, slot: lk_slot, cat: CAT_API, offset: 16'd0}
                          : '{op: DMA_DEMOTE, block: ev_block, slot: ev_slot, cat: CAT_API, offset: 16'd0};
    pd_en   = bg_push;
    pd_slot = host_demote ? lk_slot : ev_slot;

    // directory install: migration done has priority over a host ALLOC (which then waits)
    al_en     = (dma_done && done_job.op == DMA_PROMOTE) || (cmd_fire && cmd.op == OP_ALLOC);
    al_slot   = dma_done ? done_job.slot   : cmd.slot;
    al_block  = dma_done ? done_job.block  : cmd.block;
    al_cat    = dma_done ? done_job.cat    : cmd.cat;
    al_offset = dma_done ? done_job.offset : cmd.offset;
    fr_en     = dma_done && done_job.op == DMA_DEMOTE;
    fr_slot   = done_job.slot;
    to_en     = cmd_fire && cmd.op == OP_TOUCH;

    cr_push = cmd_fire && (cmd.op == OP_TOUCH ||
                           (cmd.op == OP_PROMOTE && lk_resident) ||
                           (cmd.op == OP_DEMOTE && !host_demote));
    cr_din  = '{kind: (cmd.op == OP_TOUCH) ? RSP_TOUCH : RSP_DONE,
                idx: (cmd.op == OP_TOUCH) ? to_slot : 16'(cmd.block),
                data: {63'd0, (cmd.op == OP_TOUCH) ? to_hit : 1'b0}};

    rp_push = t1_v && rg_rep && !rp_full;
    rp_en   = rp_push;
    rp_slot = t1_slot;
  end

  // ---- statistics and the replica pipeline stage ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1_v         <= 1'b0;
      t1_slot      <= '0;
      n_promotions <= '0;
      n_demotions  <= '0;
      n_replicas   <= '0;
      n_kv_stalls  <= '0;
      n_fg_first   <= '0;
      n_touch_miss <= '0;
    end else begin
      t1_v    <= to_en && to_hit && cmd.is_v;
      t1_slot <= to_slot;
      if (dma_done && done_job.op == DMA_PROMOTE) n_promotions <= n_promotions + 1;
      if (dma_done && done_job.op == DMA_DEMOTE)  n_demotions  <= n_demotions + 1;
      if (rp_push) n_replicas <= n_replicas + 1;
      if (cmd_valid && cmd.op == OP_KV_WRITE && promoting) n_kv_stalls <= n_kv_stalls + 1;
      if (dma_job_valid && dma_job_ready && !fg_empty && !bg_empty) n_fg_first <= n_fg_first + 1;
      if (to_en && !to_hit) n_touch_miss <= n_touch_miss + 1;
    end
  end

endmodule
