// eviction_engine -- category-aware demotion selector of the base-die MC
// (the paper's Algorithm 1).
//
// When compute-layer occupancy rises above the high-water mark theta_hi the
// engine starts demoting and keeps going until occupancy is at or below the
// low-water mark theta_lo. Each round:
//   1. SCAN : walk all slots (one per cycle) and find, for each category w,
//             the resident block with the oldest t_last (the front of the
//             paper's per-category queue Q_w, ordered by t_last).
//   2. PICK : for every category front compute
//             ReuseProb = F_w(dt + l_w) - F_w(dt),  dt = now - t_last,
//             and choose the block with the lowest reuse probability, then
//             the deepest prompt offset, then the fewest remote hits.
//   3. ISSUE: hand the block to the background DMA queue (ev_valid/ev_ready)
//             and wait one cycle for occupancy to reflect it.
// F_w is a programmable table of F_BINS entries per category (Q0.16
// probabilities) indexed by min(time >> T_SHIFT, F_BINS-1); the host fits the
// CDFs and loads them with l_w. A round takes NSLOT + 3 cycles.
//
// The paper writes the score as (-ReuseProb, +offset, -n_remote) and takes
// the lexicographic minimum; its prose asks for low reuse first, deeper
// positions first and protection of often-remote-hit blocks, which is the
// maximum of that tuple. This design follows the prose. It finds queue
// fronts by a scan instead of keeping sorted queues.
module eviction_engine
  import ts_pkg::*;
#(
  parameter int NSLOT   = ts_pkg::L_MAX / (ts_pkg::T_PAGE * ts_pkg::BLOCK_PAGES),
  parameter int NCAT    = ts_pkg::N_CAT,
  parameter int FBINS   = ts_pkg::F_BINS,
  parameter int T_SHIFT = 8,
  localparam int SW     = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int FW     = $clog2(FBINS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] now,
  input  meta_t       meta [NSLOT],
  input  logic [15:0] occupancy,
  input  logic [15:0] theta_hi,
  input  logic [15:0] theta_lo,
  // table loading
  input  logic        f_we,
  input  logic [1:0]  f_cat,
  input  logic [FW-1:0] f_bin,
  input  logic [15:0] f_data,
  input  logic        ell_we,
  input  logic [1:0]  ell_cat,
  input  logic [31:0] ell_data,
  // demotion request
  output logic        ev_valid,
  input  logic        ev_ready,
  output logic [15:0] ev_slot,
  output logic [9:0]  ev_block,
  output logic        active,
  output logic [31:0] n_demotions
);

  logic [15:0] ftab [NCAT][FBINS];
  logic [31:0] ell  [NCAT];

  typedef enum logic [2:0] {E_IDLE, E_SCAN, E_PICK, E_ISSUE, E_SETTLE} estate_e;
  estate_e       st;
  logic [SW:0]   idx;
  logic          fr_found [NCAT];
  logic [SW-1:0] fr_slot  [NCAT];
  logic [31:0]   fr_t     [NCAT];
  logic [SW-1:0] pick_slot;

  function automatic logic [FW-1:0] bin_of(input logic [31:0] t);
    logic [31:0] b;
    b = t >> T_SHIFT;
    return (b >= 32'(FBINS - 1)) ? FW'(FBINS - 1) : FW'(b);
  endfunction

  // PICK: score every category front
  logic          best_found;
  logic [SW-1:0] best_slot;
  always_comb begin
    logic [15:0] best_r, best_off, best_rem, r, f0, f1;
    logic [31:0] dt;
    meta_t       m;
    best_found = 1'b0;
    best_slot  = '0;
    best_r     = '0;
    best_off   = '0;
    best_rem   = '0;
    for (int w = 0; w < NCAT; w++) begin
      m  = meta[fr_slot[w]];
      dt = now - fr_t[w];
      f0 = ftab[w][bin_of(dt)];
      f1 = ftab[w][bin_of(dt + ell[w])];
      r  = (f1 > f0) ? f1 - f0 : 16'd0;
      if (fr_found[w] &&
          (!best_found || r < best_r ||
           (r == best_r && (m.offset > best_off ||
                            (m.offset == best_off && m.n_remote < best_rem))))) begin
        best_found = 1'b1;
        best_slot  = fr_slot[w];
        best_r     = r;
        best_off   = m.offset;
        best_rem   = m.n_remote;
      end
    end
  end

  assign ev_valid = (st == E_ISSUE);
  assign ev_slot  = 16'(pick_slot);
  assign ev_block = meta[pick_slot].block;
  assign active   = (st != E_IDLE);

  // tables clear to zero on reset: no reuse expected until the host loads them
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NCAT; w++) begin
        ell[w] <= '0;
        for (int b = 0; b < FBINS; b++) ftab[w][b] <= '0;
      end
    end else begin
      if (f_we)   ftab[f_cat][f_bin] <= f_data;
      if (ell_we) ell[ell_cat] <= ell_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= E_IDLE;
      idx         <= '0;
      pick_slot   <= '0;
      n_demotions <= '0;
      for (int w = 0; w < NCAT; w++) begin
        fr_found[w] <= 1'b0;
        fr_slot[w]  <= '0;
        fr_t[w]     <= '0;
      end
    end else begin
      case (st)
        E_IDLE: if (occupancy > theta_hi) begin
          st  <= E_SCAN;
          idx <= '0;
          for (int w = 0; w < NCAT; w++) fr_found[w] <= 1'b0;
        end
        E_SCAN: begin
          meta_t m;
          m = meta[idx[SW-1:0]];
          if (m.valid && !m.pending &&
              (!fr_found[m.cat] || m.t_last < fr_t[m.cat])) begin
            fr_found[m.cat] <= 1'b1;
            fr_slot[m.cat]  <= idx[SW-1:0];
            fr_t[m.cat]     <= m.t_last;
          end
          idx <= idx + 1'b1;
          if (int'(idx) == NSLOT - 1) st <= E_PICK;
        end
        E_PICK: begin
          pick_slot <= best_slot;
          st        <= best_found ? E_ISSUE : E_IDLE;
        end
        E_ISSUE: if (ev_ready) begin
          n_demotions <= n_demotions + 1;
          st          <= E_SETTLE;
        end
        E_SETTLE: begin
          if (occupancy > theta_lo) begin
            st  <= E_SCAN;
            idx <= '0;
            for (int w = 0; w < NCAT; w++) fr_found[w] <= 1'b0;
          end else st <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

endmodule
