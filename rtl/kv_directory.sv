// kv_directory -- layered address translation and per-block metadata of the
// base-die memory controller.
//
// The host only names logical KV blocks. The directory maps a logical block
// id to its current physical home: a compute-layer slot when the block is
// resident there, otherwise its fixed capacity-layer frame (frame = block id,
// see migration_dma). Promotion and demotion only change this table, so they
// stay invisible to the host.
//
// For every compute-layer slot it keeps the record the paper lists (category
// w, last-access time t_last, prompt-position offset, remote-hit count
// n_remote, distinct cards as an 8-bit card mask whose popcount is n_cards),
// plus valid / pending-demotion / replica-requested flags: 12 bytes, within
// the paper's 32-byte budget. Records change in line with the operations:
//   alloc : slot <- block, t_last <- now, counters cleared
//   touch : a hit sets t_last <- now; a remote hit also increments n_remote and
//           adds the card to the mask
//   pend  : demotion queued; the slot no longer counts as occupancy
//   free  : demotion finished; the block is back to its capacity frame
//   repl  : a replica has been requested for the slot
// Lookup is combinational; updates land at the next clock edge. occupancy
// counts slots that are valid and not pending. Several operations may come in
// one cycle if they name different slots.
module kv_directory
  import ts_pkg::*;
#(
  parameter int NSLOT   = ts_pkg::L_MAX / (ts_pkg::T_PAGE * ts_pkg::BLOCK_PAGES),
  parameter int NBLOCKS = ts_pkg::NUM_BLOCKS,
  localparam int SW     = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] now,
  // lookup
  input  logic [9:0]  lk_block,
  output logic        lk_resident,
  output logic [15:0] lk_slot,
  // alloc
  input  logic        al_en,
  input  logic [15:0] al_slot,
  input  logic [9:0]  al_block,
  input  cat_e        al_cat,
  input  logic [15:0] al_offset,
  // touch
  input  logic        to_en,
  input  logic [9:0]  to_block,
  input  logic        to_remote,
  input  logic [2:0]  to_card,
  output logic        to_hit,
  output logic [15:0] to_slot,
  // pend / free / replica flag
  input  logic        pd_en,
  input  logic [15:0] pd_slot,
  input  logic        fr_en,
  input  logic [15:0] fr_slot,
  input  logic        rp_en,
  input  logic [15:0] rp_slot,
  // state
  output meta_t       meta [NSLOT],
  output logic [15:0] occupancy
);

  logic          res_v [NBLOCKS];
  logic [SW-1:0] res_s [NBLOCKS];

  assign lk_resident = res_v[lk_block % NBLOCKS];
  assign lk_slot     = 16'(res_s[lk_block % NBLOCKS]);
  assign to_hit      = res_v[to_block % NBLOCKS];
  assign to_slot     = 16'(res_s[to_block % NBLOCKS]);

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < NSLOT; i++) occupancy += 16'(meta[i].valid && !meta[i].pending);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSLOT; i++) meta[i] <= '0;
      for (int i = 0; i < NBLOCKS; i++) begin
        res_v[i] <= 1'b0;
        res_s[i] <= '0;
      end
    end else begin
      if (fr_en && meta[SW'(fr_slot)].valid) begin
        meta[SW'(fr_slot)].valid   <= 1'b0;
        meta[SW'(fr_slot)].pending <= 1'b0;
        res_v[meta[SW'(fr_slot)].block % NBLOCKS] <= 1'b0;
      end
      if (pd_en) meta[SW'(pd_slot)].pending <= 1'b1;
      if (rp_en) meta[SW'(rp_slot)].replicated <= 1'b1;
      if (to_en && to_hit) begin
        meta[SW'(to_slot)].t_last <= now;
        if (to_remote) begin
          meta[SW'(to_slot)].n_remote <= meta[SW'(to_slot)].n_remote + 1'b1;
          meta[SW'(to_slot)].cards    <= meta[SW'(to_slot)].cards | (8'd1 << to_card);
        end
      end
      if (al_en) begin
        meta[SW'(al_slot)] <= '{valid: 1'b1, pending: 1'b0, replicated: 1'b0, block: al_block,
                                cat: al_cat, t_last: now, offset: al_offset,
                                n_remote: 16'd0, cards: 8'd0};
        res_v[al_block % NBLOCKS] <= 1'b1;
        res_s[al_block % NBLOCKS] <= SW'(al_slot);
      end
    end
  end

endmodule
