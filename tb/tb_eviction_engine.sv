// tb_eviction_engine -- self-checking test of the category-aware demotion
// selector.
//
// The testbench plays the directory: it holds NS slot records with random
// categories, ages, offsets and remote-hit counts, marks a slot pending when
// the engine's demotion request is accepted, and recomputes occupancy. F_w
// tables are loaded with a different CDF shape per category. For every
// demotion it works out independently which block should go (per-category
// oldest block, then lowest ReuseProb = F_w(dt+l_w) - F_w(dt), then deepest
// offset, then fewest remote hits) and compares. It checks that demotion
// starts only above the high-water mark, stops at the low-water mark, and
// that each round takes NSLOT + 3 cycles. Several random rounds are run,
// some with ties in ReuseProb so the offset and n_remote tie-breaks are used.
//
// The selection rule checked is the paper's (with its prose ordering); table
// sizes and the small slot count are the testbench's own.
module tb_eviction_engine;
  import ts_pkg::*;
  localparam int NS = 8, NC = 4, FB = 16, TS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now = 0;
  meta_t       meta [NS];
  logic [15:0] occupancy, theta_hi = 6, theta_lo = 3;
  logic        f_we = 0, ell_we = 0, ev_valid, ev_ready = 0, active;
  logic [1:0]  f_cat = 0, ell_cat = 0;
  logic [3:0]  f_bin = 0;
  logic [15:0] f_data = 0, ev_slot;
  logic [31:0] ell_data = 0, n_demotions;
  logic [9:0]  ev_block;

  eviction_engine #(.NSLOT(NS), .NCAT(NC), .FBINS(FB), .T_SHIFT(TS)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] F [NC][FB];
  logic [31:0] L [NC];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < NS; i++) occupancy += 16'(meta[i].valid && !meta[i].pending);
  end

  function automatic int fbin(input longint t);
    longint b;
    b = t >> TS;
    return (b >= FB - 1) ? FB - 1 : int'(b);
  endfunction

  // independent reference choice
  function automatic int ref_pick();
    int  front [NC];
    int  best;
    longint best_r, best_off, best_rem, r, dt;
    for (int w = 0; w < NC; w++) front[w] = -1;
    for (int s = 0; s < NS; s++)
      if (meta[s].valid && !meta[s].pending) begin
        int w;
        w = int'(meta[s].cat);
        if (front[w] < 0 || meta[s].t_last < meta[front[w]].t_last) front[w] = s;
      end
    best = -1; best_r = 0; best_off = 0; best_rem = 0;
    for (int w = 0; w < NC; w++) if (front[w] >= 0) begin
      dt = longint'(now) - 1 - longint'(meta[front[w]].t_last);  // scored one cycle before the request
      r  = longint'(F[w][fbin(dt + longint'(L[w]))]) - longint'(F[w][fbin(dt)]);
      if (r < 0) r = 0;
      if (best < 0 || r < best_r ||
          (r == best_r && (longint'(meta[front[w]].offset) > best_off ||
                           (longint'(meta[front[w]].offset) == best_off &&
                            longint'(meta[front[w]].n_remote) < best_rem)))) begin
        best = front[w]; best_r = r;
        best_off = longint'(meta[front[w]].offset);
        best_rem = longint'(meta[front[w]].n_remote);
      end
    end
    return best;
  endfunction

  task automatic load_tables(input bit flat);
    for (int w = 0; w < NC; w++) begin
      int acc;
      acc = 0;
      for (int b = 0; b < FB; b++) begin
        // a different rising shape per category; flat tables force ties
        if (!flat) acc += int'($urandom % (4096 >> w)) + 1;
        F[w][b] = 16'((acc > 65535) ? 65535 : acc);
        @(negedge clk); f_we = 1; f_cat = 2'(w); f_bin = 4'(b); f_data = F[w][b];
      end
      L[w] = 32'($urandom % 200);
      @(negedge clk); f_we = 0; ell_we = 1; ell_cat = 2'(w); ell_data = L[w];
    end
    @(negedge clk); f_we = 0; ell_we = 0;
  endtask

  task automatic fill(input bit small_offsets);
    for (int s = 0; s < NS; s++) begin
      meta[s] = '0;
      meta[s].valid    = 1;
      meta[s].block    = 10'(100 + s);
      meta[s].cat      = cat_e'($urandom % NC);
      meta[s].t_last   = now - 32'($urandom % 300) - 1;
      meta[s].offset   = small_offsets ? 16'($urandom % 2) : 16'($urandom % 5000);
      meta[s].n_remote = 16'($urandom % 3);
    end
  endtask

  task automatic run_round(input int round);
    int exp_n, got_n, t_acc, prev_acc;
    #1;
    exp_n = int'(occupancy) - int'(theta_lo);
    got_n = 0;
    prev_acc = -1;
    t_acc = 0;
    while (got_n < exp_n) begin
      int wait_c, pick;
      wait_c = 0;
      @(negedge clk);
      while (!ev_valid) begin
        @(negedge clk); wait_c++; t_acc++;
        if (wait_c > 100) break;
      end
      checks++;
      if (!ev_valid) begin failures++; $display("FAIL round %0d: no demotion %0d", round, got_n); return; end
      // round length: from one accept to the next request NS + 2 cycles
      if (prev_acc >= 0) begin
        checks++;
        if (wait_c + 1 != NS + 3) begin
          failures++; $display("FAIL round %0d: round took %0d cycles", round, wait_c + 1);
        end
      end
      pick = ref_pick();
      checks++;
      if (int'(ev_slot) != pick || ev_block !== meta[pick].block) begin
        failures++;
        $display("FAIL round %0d: picked slot %0d expected %0d", round, ev_slot, pick);
      end
      ev_ready = 1;
      @(posedge clk); #1;
      ev_ready = 0;
      meta[ev_slot].pending = 1;
      got_n++;
      prev_acc = 0;
    end
    // must stop now
    repeat (3 * NS) @(negedge clk);
    checks++;
    if (ev_valid || active) begin failures++; $display("FAIL round %0d: did not stop at low mark", round); end
    checks++;
    if (int'(occupancy) != int'(theta_lo)) begin failures++; $display("FAIL occupancy %0d", occupancy); end
  endtask

  always @(posedge clk) now <= now + 1;

  initial begin
    for (int s = 0; s < NS; s++) meta[s] = '0;
    now = 1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      @(negedge clk);
      load_tables(round % 3 == 2);
      // below the high mark: nothing happens
      fill(round % 3 == 2);
      meta[0].valid = 0; meta[1].valid = 0; meta[2].valid = 0;
      repeat (3 * NS) @(negedge clk);
      checks++;
      if (active || ev_valid) begin failures++; $display("FAIL started below high mark"); end
      meta[0].valid = 1; meta[1].valid = 1; meta[2].valid = 1;
      run_round(round);
    end
    checks++;
    if (n_demotions != 32'(12 * (NS - 3))) begin failures++; $display("FAIL n_demotions %0d", n_demotions); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
