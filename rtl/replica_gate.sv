// replica_gate -- three-gate test for selective replication.
//
// A compute-layer block earns a replica on the requesting card only when all
// three of the paper's gates pass on its metadata:
//   gate 1 (position) : offset <= tau_off         (inside the system prompt)
//   gate 2 (fan-out)  : n_cards > tau_cards       (n_cards = popcount(cards))
//   gate 3 (frequency): n_remote > tau_hits
// The block must also be valid, not pending demotion and not replicated yet.
// Purely combinational; the per-gate results are outputs so that a caller can
// report which gate held a block back. Thresholds are runtime registers.
module replica_gate
  import ts_pkg::*;
(
  input  meta_t       m,
  input  logic [15:0] tau_off,
  input  logic [15:0] tau_cards,
  input  logic [15:0] tau_hits,
  output logic        gate_pos,
  output logic        gate_fanout,
  output logic        gate_freq,
  output logic        replicate
);
  always_comb begin
    gate_pos    = (m.offset <= tau_off);
    gate_fanout = (16'(popcount8(m.cards)) > tau_cards);
    gate_freq   = (m.n_remote > tau_hits);
    replicate   = m.valid && !m.pending && !m.replicated && gate_pos && gate_fanout && gate_freq;
  end
endmodule
