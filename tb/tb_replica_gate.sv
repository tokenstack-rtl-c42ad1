// tb_replica_gate -- self-checking test of the three-gate replication test.
//
// Applies random metadata records and thresholds (plus directed boundary
// cases where a field equals its threshold) and compares each gate and the
// final decision with the rule: offset <= tau_off, popcount(cards) >
// tau_cards, n_remote > tau_hits, on a valid, not pending, not yet replicated
// record.
//
// The three gates are the paper's; thresholds are random test values.
module tb_replica_gate;
  import ts_pkg::*;
  meta_t       m;
  logic [15:0] tau_off, tau_cards, tau_hits;
  logic        gate_pos, gate_fanout, gate_freq, replicate;

  replica_gate dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    bit e_pos, e_fan, e_freq, e_rep;
    int nc;
    nc = 0;
    for (int i = 0; i < 8; i++) nc += int'(m.cards[i]);
    e_pos  = int'(m.offset) <= int'(tau_off);
    e_fan  = nc > int'(tau_cards);
    e_freq = int'(m.n_remote) > int'(tau_hits);
    e_rep  = m.valid && !m.pending && !m.replicated && e_pos && e_fan && e_freq;
    #1;
    checks++;
    if ({gate_pos, gate_fanout, gate_freq, replicate} !== {e_pos, e_fan, e_freq, e_rep}) begin
      failures++;
      $display("FAIL off=%0d cards=%b rem=%0d taus=%0d/%0d/%0d got %b%b%b%b", m.offset, m.cards,
               m.n_remote, tau_off, tau_cards, tau_hits, gate_pos, gate_fanout, gate_freq, replicate);
    end
  endtask

  initial begin
    for (int k = 0; k < 5000; k++) begin
      m = '0;
      m.valid      = ($urandom % 8) != 0;
      m.pending    = ($urandom % 8) == 0;
      m.replicated = ($urandom % 8) == 0;
      m.offset     = 16'($urandom % 4096);
      m.cards      = 8'($urandom);
      m.n_remote   = 16'($urandom % 64);
      tau_off      = 16'($urandom % 4096);
      tau_cards    = 16'($urandom % 8);
      tau_hits     = 16'($urandom % 64);
      // boundary cases
      if (k % 4 == 1) tau_off  = m.offset;
      if (k % 4 == 2) tau_hits = m.n_remote;
      if (k % 4 == 3) tau_cards = 16'($countones(m.cards));
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
