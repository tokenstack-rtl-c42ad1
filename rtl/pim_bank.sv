// pim_bank -- one compute-layer PIM bank: bank storage plus its HBM-PIM unit.
//
// Storage follows the paper's asymmetric KV layout. The Key half holds full
// token rows: bank b keeps the Key of every context token n with n mod B = b,
// at row n div B (KROWS rows of D elements). The Value half holds full
// dimension columns: bank b keeps Value dimension j for every j with
// j mod B = b, at column j div B (VCOLS columns of L_MAX tokens). The DRAM
// array is modelled as a plain memory array.
//
// The PIM unit is an FP16 multiplier, an FP16 adder and registers (a q
// register file, an accumulator and result registers), as drawn for the
// compute-layer die. It runs two operations over the first op_len tokens:
//   * SCORE   : for each owned token row r, s = sum_k q[k] * K[r][k], one
//               multiply-add per cycle, D cycles per row, so
//               ceil((L - BANK_ID) / B) * D cycles in all. Results stay in
//               res registers (index r) until gathered.
//   * CONTEXT : the coordinator broadcasts a_n for n = 0..L-1. For each a_n the
//               unit does one multiply-add per owned column (ncols cycles),
//               o[c] += a_n * V[c][n]; it raises a_ready when it reaches its
//               last column and does that last multiply-add in the cycle in
//               which a_take says every bank is ready, so a_n is used once.
// The paper draws one unit between an even and an odd bank; this model gives
// each bank its own unit, as the attention dataflow figure does, so all B
// banks work in parallel.
//
// Interface: an element write port and a registered element read port (1-cycle
// latency) used by the host path and the migration DMA; a q broadcast write
// port; op_start/op_ctx/op_len to start an operation, busy while it runs;
// res_idx selects the result register shown on res_data. Accumulation order is
// fixed (k ascending, n ascending), so results are deterministic.
module pim_bank
  import ts_fp16_pkg::*;
#(
  parameter int D       = ts_pkg::D_HEAD,
  parameter int B       = ts_pkg::B_PIM,
  parameter int L_MAX   = ts_pkg::L_MAX,
  parameter int BANK_ID = 0,
  localparam int KROWS  = (L_MAX + B - 1) / B,
  localparam int VCOLS  = (D + B - 1) / B,
  localparam int RESN   = (KROWS > VCOLS) ? KROWS : VCOLS,
  localparam int TW     = $clog2(L_MAX + 1),
  localparam int DW     = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // element write: K -> (row = token row, col = dim); V -> (row = token, col = column)
  input  logic          wr_en,
  input  logic          wr_is_v,
  input  logic [TW-1:0] wr_row,
  input  logic [DW-1:0] wr_col,
  input  fp16_t         wr_data,
  // element read, data valid the next cycle
  input  logic          rd_en,
  input  logic          rd_is_v,
  input  logic [TW-1:0] rd_row,
  input  logic [DW-1:0] rd_col,
  output fp16_t         rd_data,
  // q broadcast
  input  logic          q_we,
  input  logic [DW-1:0] q_idx,
  input  fp16_t         q_data,
  // operation control
  input  logic          op_start,
  input  logic          op_ctx,     // 0 = SCORE, 1 = CONTEXT
  input  logic [TW-1:0] op_len,     // L
  output logic          busy,
  // a broadcast (CONTEXT)
  input  logic          a_valid,    // a_n present on a_data
  input  fp16_t         a_data,
  output logic          a_ready,    // this bank can finish a_n this cycle
  input  logic          a_take,     // every bank is ready: a_n is consumed
  // results
  input  logic [TW-1:0] res_idx,
  output fp16_t         res_data
);

  fp16_t kmem [KROWS][D];
  fp16_t vmem [VCOLS][L_MAX];
  fp16_t qreg [D];
  fp16_t res  [RESN];

  // rows / columns this bank owns for the current length
  localparam int NCOLS = (D > BANK_ID) ? (D - BANK_ID + B - 1) / B : 0;

  typedef enum logic [1:0] {S_IDLE, S_SCORE, S_CTX} state_e;
  state_e        state;
  logic [TW-1:0] nrows, row, tok;
  logic [DW-1:0] k;
  logic [TW-1:0] col;
  fp16_t         acc;

  // storage ports
  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_is_v) vmem[wr_col][wr_row] <= wr_data;
      else         kmem[wr_row][wr_col] <= wr_data;
    end
    if (rd_en) rd_data <= rd_is_v ? vmem[rd_col][rd_row] : kmem[rd_row][rd_col];
    if (q_we) qreg[q_idx] <= q_data;
  end

  fp16_t prod_k, prod_v, sum_k, sum_v;
  always_comb begin
    prod_k = fp16_mul(qreg[k], kmem[row][k]);
    sum_k  = fp16_add(acc, prod_k);
    prod_v = fp16_mul(a_data, vmem[col][tok]);
    sum_v  = fp16_add(res[col], prod_v);
  end

  assign busy     = (state != S_IDLE);
  assign res_data = res[res_idx];
  assign a_ready  = (state == S_CTX) && ((NCOLS == 0) || (col == TW'(NCOLS - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      nrows <= '0;
      row   <= '0;
      tok   <= '0;
      k     <= '0;
      col   <= '0;
      acc   <= FP16_ZERO;
      for (int i = 0; i < RESN; i++) res[i] <= FP16_ZERO;
    end else begin
      case (state)
        S_IDLE: if (op_start) begin
          row <= '0;
          k   <= '0;
          col <= '0;
          tok <= '0;
          acc <= FP16_ZERO;
          if (op_ctx) begin
            for (int i = 0; i < RESN; i++) res[i] <= FP16_ZERO;
            state <= (op_len != 0) ? S_CTX : S_IDLE;
          end else begin
            nrows <= (op_len > TW'(BANK_ID)) ? TW'((int'(op_len) - BANK_ID + B - 1) / B) : '0;
            state <= (op_len > TW'(BANK_ID)) ? S_SCORE : S_IDLE;
          end
        end
        S_SCORE: begin
          if (k == DW'(D - 1)) begin
            res[row] <= sum_k;
            acc      <= FP16_ZERO;
            k        <= '0;
            row      <= row + 1'b1;
            if (row + 1'b1 == nrows) state <= S_IDLE;
          end else begin
            acc <= sum_k;
            k   <= k + 1'b1;
          end
        end
        S_CTX: if (a_valid) begin
          if (!a_ready) begin
            res[col] <= sum_v;
            col      <= col + 1'b1;
          end else if (a_take) begin
            if (NCOLS != 0) res[col] <= sum_v;
            col <= '0;
            tok <= tok + 1'b1;
            if (tok + 1'b1 == op_len) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
