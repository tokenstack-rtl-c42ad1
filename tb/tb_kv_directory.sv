// tb_kv_directory -- self-checking test of the translation table and
// per-block metadata.
//
// Runs a random stream of alloc / touch (local and remote) / pend / free /
// replica operations, one per cycle, against a small directory (8 slots, 32
// logical blocks) and a model kept in the testbench. After each operation it
// compares every slot record, the occupancy count, and the lookup of a random
// block (resident flag and slot) with the model.
//
// The record fields follow the paper's list; sizes are the testbench's own.
module tb_kv_directory;
  import ts_pkg::*;
  localparam int NS = 8, NB = 32, NOPS = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now = 0;
  logic [9:0]  lk_block = 0, al_block = 0, to_block = 0;
  logic        lk_resident, to_hit;
  logic [15:0] lk_slot, to_slot, al_slot = 0, al_offset = 0, pd_slot = 0, fr_slot = 0, rp_slot = 0;
  logic        al_en = 0, to_en = 0, to_remote = 0, pd_en = 0, fr_en = 0, rp_en = 0;
  cat_e        al_cat = CAT_API;
  logic [2:0]  to_card = 0;
  meta_t       meta [NS];
  logic [15:0] occupancy;

  kv_directory #(.NSLOT(NS), .NBLOCKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  meta_t m_meta [NS];
  bit    m_res  [NB];
  int    m_slot [NB];

  initial begin
    repeat (NOPS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) now <= now + 1;

  task automatic check_all();
    int occ;
    occ = 0;
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (meta[s] !== m_meta[s]) begin
        failures++;
        $display("FAIL slot %0d meta %p expected %p", s, meta[s], m_meta[s]);
      end
      occ += int'(m_meta[s].valid && !m_meta[s].pending);
    end
    checks++;
    if (occupancy !== 16'(occ)) begin failures++; $display("FAIL occupancy %0d vs %0d", occupancy, occ); end
    lk_block = 10'($urandom % NB);
    #1;
    checks++;
    if (lk_resident !== m_res[lk_block] || (m_res[lk_block] && lk_slot !== 16'(m_slot[lk_block]))) begin
      failures++; $display("FAIL lookup block %0d", lk_block);
    end
  endtask

  initial begin
    for (int s = 0; s < NS; s++) m_meta[s] = '0;
    for (int b = 0; b < NB; b++) begin m_res[b] = 0; m_slot[b] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NOPS; k++) begin
      int op, s, b;
      @(negedge clk);
      al_en = 0; to_en = 0; pd_en = 0; fr_en = 0; rp_en = 0;
      op = int'($urandom % 6);
      s  = int'($urandom % NS);
      case (op)
        0: begin  // alloc into a free slot of a non-resident block
          b = int'($urandom % NB);
          if (!m_meta[s].valid && !m_res[b]) begin
            al_en = 1; al_slot = 16'(s); al_block = 10'(b); al_cat = cat_e'($urandom % 4);
            al_offset = 16'($urandom);
            m_meta[s] = '{valid: 1'b1, pending: 1'b0, replicated: 1'b0, block: al_block,
                          cat: al_cat, t_last: now, offset: al_offset, n_remote: 16'd0, cards: 8'd0};
            m_res[b] = 1; m_slot[b] = s;
          end
        end
        1, 2: begin  // touch
          b = int'($urandom % NB);
          to_en = 1; to_block = 10'(b); to_remote = op == 2; to_card = 3'($urandom);
          #1;
          checks++;
          if (to_hit !== m_res[b] || (m_res[b] && to_slot !== 16'(m_slot[b]))) begin
            failures++; $display("FAIL touch lookup block %0d", b);
          end
          if (m_res[b]) begin
            m_meta[m_slot[b]].t_last = now;
            if (to_remote) begin
              m_meta[m_slot[b]].n_remote++;
              m_meta[m_slot[b]].cards |= 8'(1) << to_card;
            end
          end
        end
        3: if (m_meta[s].valid && !m_meta[s].pending) begin
          pd_en = 1; pd_slot = 16'(s); m_meta[s].pending = 1;
        end
        4: if (m_meta[s].valid && m_meta[s].pending) begin
          fr_en = 1; fr_slot = 16'(s);
          m_res[m_meta[s].block] = 0;
          m_meta[s].valid = 0; m_meta[s].pending = 0;
        end
        default: if (m_meta[s].valid) begin
          rp_en = 1; rp_slot = 16'(s); m_meta[s].replicated = 1;
        end
      endcase
      @(posedge clk); #1;
      al_en = 0; to_en = 0; pd_en = 0; fr_en = 0; rp_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
