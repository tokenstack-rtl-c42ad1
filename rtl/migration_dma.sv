// migration_dma -- stack-local DMA between compute and capacity layers.
//
// Moves one logical KV block (BLOCK_PAGES pages of T_PAGE tokens, one head
// group) between a compute-layer slot and the capacity layers, one page at a
// time through the shared page buffer and the K8V4 unit, all inside the stack.
// Block slot s covers context tokens n = s*T_BLK .. s*T_BLK + T_BLK - 1.
//
// Demotion (compute -> capacity), per page:
//   1. gather : read every FP16 Key (bank n mod B, row n div B, column j) and
//               Value (bank j mod B, column j div B, row n) of the page's
//               tokens into the page buffer, token-first, one element per
//               cycle; track the largest exponent of each quantization group.
//   2. write  : write the page to capacity bank p mod B_CAP as 64-bit words:
//               the group exponents, then INT8 Keys (8 per word), then INT4
//               Values (16 per word), quantized on the way out.
// Promotion (capacity -> compute), per page:
//   1. read   : read the page words back (requests pipelined, responses in
//               order), dequantize to FP16 and fill the page buffer.
//   2. scatter: write every Key to bank n mod B and every Value to bank
//               j mod B, one element per cycle; the Value transpose is the
//               change of address order between buffer and banks.
// Capacity address of word w of page p of block k:
//   bank = p mod B_CAP, addr = (k*PPB + p div B_CAP) * PAGE_WORDS + w,
//   PPB = ceil(BLOCK_PAGES / B_CAP) (each block id owns a fixed frame).
//
// Timing per page (no back-pressure): demotion 2*T_PAGE*D + 1 gather cycles,
// then 2 cycles per exponent word and per data word; promotion PAGE_WORDS
// read cycles plus capacity latency, then 2*T_PAGE*D + 1 scatter cycles.
// Paper: page-at-a-time streaming, K8V4, bank mapping, page interleaving.
// Own choices: element-serial bank access, word format, no overlap of one
// page's read with the previous page's transpose.
module migration_dma
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
  localparam int T_BLK      = T_PAGE * BLOCK_PAGES,
  localparam int TW         = $clog2(L_MAX + 1),
  localparam int DW         = (D > 1) ? $clog2(D) : 1,
  localparam int BW         = (B > 1) ? $clog2(B) : 1,
  localparam int GPT        = D / QGROUP,              // groups per token
  localparam int NEXP       = 2 * T_PAGE * GPT,
  localparam int EXPW       = (NEXP + 7) / 8,
  localparam int KW         = T_PAGE * D / 8,
  localparam int VW         = T_PAGE * D / 16,
  localparam int PW         = EXPW + KW + VW,
  localparam int PPB        = (BLOCK_PAGES + B_CAP - 1) / B_CAP,
  localparam int NCH        = 2 * T_PAGE * (D / 16),
  localparam int CAW        = $clog2(NCH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              job_valid,
  output logic              job_ready,
  input  dma_job_t          job,
  output logic              done_valid,
  output dma_job_t          done_job,
  output logic              busy,
  output logic              promoting,   // a promotion owns the bank write port
  // compute-layer bank access
  output logic              bk_wr_en,
  output logic [BW-1:0]     bk_wr_bank,
  output logic              bk_wr_is_v,
  output logic [TW-1:0]     bk_wr_row,
  output logic [DW-1:0]     bk_wr_col,
  output fp16_t             bk_wr_data,
  output logic              bk_rd_en,
  output logic [BW-1:0]     bk_rd_bank,
  output logic              bk_rd_is_v,
  output logic [TW-1:0]     bk_rd_row,
  output logic [DW-1:0]     bk_rd_col,
  input  fp16_t             bk_rd_data,
  // capacity-layer access (through the MC arbiter)
  output logic              cap_req_valid,
  input  logic              cap_req_ready,
  output cap_req_t          cap_req,
  input  logic              cap_rsp_valid,
  input  logic [63:0]       cap_rsp_data
);

  typedef enum logic [2:0] {M_IDLE, M_GATHER, M_WRD, M_WQ, M_READ, M_SCAT, M_DONE} mstate_e;
  mstate_e st;
  dma_job_t cur;

  logic [$clog2(BLOCK_PAGES + 1)-1:0] page;
  logic [4:0] gexp [2][T_PAGE][GPT];

  // element walk (gather / scatter): kv, token t, dim j
  logic                 e_kv;
  logic [$clog2(T_PAGE+1)-1:0] e_t;
  logic [DW:0]          e_j;
  logic                 e_last;
  // pipeline stage (data of previous read)
  logic                 p_v, p_s, p_kv;   // gather capture, scatter write
  logic [$clog2(T_PAGE+1)-1:0] p_t;
  logic [DW:0]          p_j;
  logic [TW-1:0]        p_n;
  // word counters
  logic [$clog2(PW+1)-1:0] w, r;

  // ---- page buffer and quantization unit --------------------------------------
  logic           pb_wr_en, pb_rd_en;
  logic [CAW-1:0] pb_wr_addr, pb_rd_addr;
  logic [15:0]    pb_wr_mask;
  fp16_t          pb_wr_data [16];
  fp16_t          pb_rd_data [16];

  page_buffer #(.D(D), .T_PAGE(T_PAGE), .CH(16)) u_pbuf (
    .clk, .wr_en(pb_wr_en), .wr_addr(pb_wr_addr), .wr_mask(pb_wr_mask), .wr_data(pb_wr_data),
    .rd_en(pb_rd_en), .rd_addr(pb_rd_addr), .rd_data(pb_rd_data)
  );

  fp16_t      qz_in [16];
  logic [4:0] qz_ge [16], dq_ge [16];
  logic [7:0] qz_out [16], dq_in [16];
  fp16_t      dq_out [16];
  logic       qz_is_v, dq_is_v;

  k8v4_quant #(.LANES(16)) u_quant (
    .qz_in(qz_in), .qz_gexp(qz_ge), .qz_is_v(qz_is_v), .qz_out(qz_out),
    .dq_in(dq_in), .dq_gexp(dq_ge), .dq_is_v(dq_is_v), .dq_out(dq_out)
  );

  function automatic logic [CAW-1:0] chunk_addr(input logic kv, input int t, input int j);
    return CAW'((int'(kv) * T_PAGE + t) * (D / 16) + j / 16);
  endfunction

  // token index of element (t) of the current page
  function automatic int tok_of(input int t);
    return int'(cur.slot) * T_BLK + int'(page) * T_PAGE + t;
  endfunction

  // which word of the page is w: exponent, key or value, and its chunk
  logic        w_is_exp, w_is_k;
  int          w_k, w_v;
  always_comb begin
    w_is_exp = (int'(w) < EXPW);
    w_is_k   = !w_is_exp && (int'(w) < EXPW + KW);
    w_k      = int'(w) - EXPW;
    w_v      = int'(w) - EXPW - KW;
  end
  logic        r_is_exp, r_is_k;
  int          r_k, r_v;
  always_comb begin
    r_is_exp = (int'(r) < EXPW);
    r_is_k   = !r_is_exp && (int'(r) < EXPW + KW);
    r_k      = int'(r) - EXPW;
    r_v      = int'(r) - EXPW - KW;
  end

  assign e_last    = e_kv && (int'(e_t) == T_PAGE - 1) && (int'(e_j) == D - 1);
  assign busy      = (st != M_IDLE);
  assign promoting = busy && (cur.op == DMA_PROMOTE);
  assign job_ready = (st == M_IDLE);

  // ---- bank port -----------------------------------------------------------------
  always_comb begin
    int n;
    n          = tok_of(int'(e_t));
    bk_rd_en   = (st == M_GATHER);
    bk_rd_is_v = e_kv;
    bk_rd_bank = e_kv ? BW'(v_bank(int'(e_j), B)) : BW'(k_bank(n, B));
    bk_rd_row  = e_kv ? TW'(n) : TW'(k_row(n, B));
    bk_rd_col  = e_kv ? DW'(v_col(int'(e_j), B)) : DW'(e_j);

    bk_wr_en   = p_s;
    bk_wr_is_v = p_kv;
    bk_wr_bank = p_kv ? BW'(v_bank(int'(p_j), B)) : BW'(k_bank(int'(p_n), B));
    bk_wr_row  = p_kv ? p_n : TW'(k_row(int'(p_n), B));
    bk_wr_col  = p_kv ? DW'(v_col(int'(p_j), B)) : DW'(p_j);
    bk_wr_data = pb_rd_data[p_j[3:0]];
  end

  // ---- page buffer port -------------------------------------------------------------
  always_comb begin
    pb_wr_en   = 1'b0;
    pb_wr_addr = '0;
    pb_wr_mask = '0;
    for (int i = 0; i < 16; i++) pb_wr_data[i] = bk_rd_data;
    pb_rd_en   = 1'b0;
    pb_rd_addr = '0;
    if (st == M_GATHER || (st == M_WRD && p_v)) begin
      // capture of the element read in the previous cycle
      pb_wr_en   = p_v;
      pb_wr_addr = chunk_addr(p_kv, int'(p_t), int'(p_j));
      pb_wr_mask = 16'(1) << p_j[3:0];
    end else if (st == M_READ && cap_rsp_valid && !r_is_exp) begin
      pb_wr_en = 1'b1;
      for (int i = 0; i < 16; i++) pb_wr_data[i] = dq_out[i];
      if (r_is_k) begin
        pb_wr_addr = chunk_addr(1'b0, r_k / (D / 8), ((r_k % (D / 8)) / 2) * 16);
        pb_wr_mask = r_k[0] ? 16'hFF00 : 16'h00FF;
      end else begin
        pb_wr_addr = chunk_addr(1'b1, r_v / (D / 16), (r_v % (D / 16)) * 16);
        pb_wr_mask = 16'hFFFF;
      end
    end
    if (st == M_WRD && !w_is_exp) begin
      pb_rd_en   = 1'b1;
      pb_rd_addr = w_is_k ? chunk_addr(1'b0, w_k / (D / 8), ((w_k % (D / 8)) / 2) * 16)
                          : chunk_addr(1'b1, w_v / (D / 16), (w_v % (D / 16)) * 16);
    end else if (st == M_SCAT) begin
      pb_rd_en   = 1'b1;
      pb_rd_addr = chunk_addr(e_kv, int'(e_t), int'(e_j));
    end
  end

  // ---- quantization lanes ------------------------------------------------------------
  always_comb begin
    int tq, jq, tr, jr;
    tq = w_is_k ? w_k / (D / 8) : w_v / (D / 16);
    jq = w_is_k ? ((w_k % (D / 8)) / 2) * 16 : (w_v % (D / 16)) * 16;
    tr = r_is_k ? r_k / (D / 8) : r_v / (D / 16);
    jr = r_is_k ? ((r_k % (D / 8)) / 2) * 16 : (r_v % (D / 16)) * 16;
    qz_is_v = !w_is_k;
    dq_is_v = !r_is_k;
    for (int i = 0; i < 16; i++) begin
      qz_in[i] = pb_rd_data[i];
      qz_ge[i] = gexp[qz_is_v][tq % T_PAGE][((jq + i) / QGROUP) % GPT];
      dq_ge[i] = gexp[dq_is_v][tr % T_PAGE][((jr + i) / QGROUP) % GPT];
      dq_in[i] = r_is_k ? cap_rsp_data[8 * (i % 8) +: 8] : {4'd0, cap_rsp_data[4 * i +: 4]};
    end
  end

  // ---- capacity port ---------------------------------------------------------------------
  always_comb begin
    logic [63:0] wd;
    int x;
    wd = '0;
    x  = 0;
    if (w_is_exp) begin
      for (int i = 0; i < 8; i++) begin
        x = int'(w) * 8 + i;
        if (x < NEXP) wd[8 * i +: 8] = {3'd0, gexp[x / (T_PAGE * GPT)][(x / GPT) % T_PAGE][x % GPT]};
      end
    end else if (w_is_k) begin
      for (int i = 0; i < 8; i++) wd[8 * i +: 8] = qz_out[(w_k % 2) * 8 + i];
    end else begin
      for (int i = 0; i < 16; i++) wd[4 * i +: 4] = qz_out[i][3:0];
    end
    cap_req.we    = (cur.op == DMA_DEMOTE);
    cap_req.bank  = 5'(cap_bank(int'(page), B_CAP));
    cap_req.wdata = wd;
    cap_req.addr  = CAP_AW'((int'(cur.block) * PPB + int'(page) / B_CAP) * PW + int'(w));
    cap_req_valid = (st == M_WQ) || (st == M_READ && int'(w) < PW);
  end

  // ---- control -----------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= M_IDLE;
      cur        <= '0;
      page       <= '0;
      e_kv       <= 1'b0;
      e_t        <= '0;
      e_j        <= '0;
      p_v        <= 1'b0;
      p_s        <= 1'b0;
      p_kv       <= 1'b0;
      p_t        <= '0;
      p_j        <= '0;
      p_n        <= '0;
      w          <= '0;
      r          <= '0;
      done_valid <= 1'b0;
      done_job   <= '0;
      for (int a = 0; a < 2; a++)
        for (int t = 0; t < T_PAGE; t++)
          for (int g = 0; g < GPT; g++) gexp[a][t][g] <= '0;
    end else begin
      done_valid <= 1'b0;
      // pipeline stage follows the element walk of gather and scatter
      p_v  <= (st == M_GATHER);
      p_s  <= (st == M_SCAT);
      p_kv <= e_kv;
      p_t  <= e_t;
      p_j  <= e_j;
      p_n  <= TW'(tok_of(int'(e_t)));
      // exponent tracking during gather
      if ((st == M_GATHER || st == M_WRD) && p_v && bk_rd_data[14:10] > gexp[p_kv][p_t][int'(p_j) / QGROUP])
        gexp[p_kv][p_t][int'(p_j) / QGROUP] <= bk_rd_data[14:10];
      case (st)
        M_IDLE: if (job_valid) begin
          cur  <= job;
          page <= '0;
          st   <= (job.op == DMA_DEMOTE) ? M_GATHER : M_READ;
          e_kv <= 1'b0; e_t <= '0; e_j <= '0; w <= '0; r <= '0;
          for (int a = 0; a < 2; a++)
            for (int t = 0; t < T_PAGE; t++)
              for (int g = 0; g < GPT; g++) gexp[a][t][g] <= '0;
        end
        M_GATHER, M_SCAT: begin
          if (int'(e_j) == D - 1) begin
            e_j <= '0;
            if (int'(e_t) == T_PAGE - 1) begin e_t <= '0; e_kv <= ~e_kv; end
            else e_t <= e_t + 1'b1;
          end else e_j <= e_j + 1'b1;
          if (e_last) begin
            w <= '0;
            if (st == M_GATHER) st <= M_WRD;
            else if (int'(page) == BLOCK_PAGES - 1) st <= M_DONE;
            else begin
              page <= page + 1'b1; r <= '0; w <= '0; st <= M_READ;
              for (int a = 0; a < 2; a++)
                for (int t = 0; t < T_PAGE; t++)
                  for (int g = 0; g < GPT; g++) gexp[a][t][g] <= '0;
            end
          end
        end
        M_WRD: st <= M_WQ;
        M_WQ: if (cap_req_ready) begin
          if (int'(w) == PW - 1) begin
            if (int'(page) == BLOCK_PAGES - 1) st <= M_DONE;
            else begin
              page <= page + 1'b1;
              st   <= M_GATHER;
              for (int a = 0; a < 2; a++)
                for (int t = 0; t < T_PAGE; t++)
                  for (int g = 0; g < GPT; g++) gexp[a][t][g] <= '0;
            end
          end else begin
            w  <= w + 1'b1;
            st <= M_WRD;
          end
        end
        M_READ: begin
          if (cap_req_valid && cap_req_ready) w <= w + 1'b1;
          if (cap_rsp_valid) begin
            if (r_is_exp)
              for (int i = 0; i < 8; i++) begin
                int x;
                x = int'(r) * 8 + i;
                if (x < NEXP) gexp[x / (T_PAGE * GPT)][(x / GPT) % T_PAGE][x % GPT] <= cap_rsp_data[8 * i +: 5];
              end
            r <= r + 1'b1;
            if (int'(r) == PW - 1) begin
              st <= M_SCAT;
              e_kv <= 1'b0; e_t <= '0; e_j <= '0;
            end
          end
        end
        M_DONE: begin
          // the last scattered element is written in this cycle
          done_valid <= 1'b1;
          done_job   <= cur;
          st         <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cap_rsp_valid |-> (st == M_READ));

endmodule
