// issue_gate: the per-port decision whether an issue candidate must wait.
//
// A candidate is delayed when the protection is enabled, its PC hits in one
// of the Bloom filters (it was issued and squashed before, or is a false
// positive) and it is still speculative, i.e. an unsafe handle older than it
// is in the handle queue.  A candidate with no older unsafe handle, the ROB
// head in particular, is never delayed, so the core always makes progress.
// The delayed instruction simply retries in later cycles; it issues once the
// filter that holds it is cleared or the handles before it become safe.
//
// Purely combinational.  iss_go = iss_valid & ~iss_delay is the set of
// candidates that issue this cycle.  The enable input lets the core apply
// the protection only while executing enclave code, as the scheme intends.
module issue_gate
  import dos_pkg::*;
#(
  parameter int unsigned P_W     = WIDTH,
  parameter int unsigned P_SEQ_W = SEQ_W
) (
  input  logic                         enable,
  input  logic [P_W-1:0]               iss_valid,
  input  logic [P_W-1:0][P_SEQ_W-1:0]  iss_seq,
  input  logic [P_W-1:0]               bf_hit,
  input  logic                         oldest_valid,
  input  logic [P_SEQ_W-1:0]           oldest_seq,
  output logic [P_W-1:0]               iss_delay,
  output logic [P_W-1:0]               iss_go
);
  function automatic logic younger(input logic [P_SEQ_W-1:0] a,
                                   input logic [P_SEQ_W-1:0] b);
    logic [P_SEQ_W-1:0] d;
    d = a - b;
    return (d != '0) && !d[P_SEQ_W-1];
  endfunction

  always_comb begin
    for (int p = 0; p < P_W; p++) begin
      iss_delay[p] = enable && iss_valid[p] && bf_hit[p] && oldest_valid &&
                     younger(iss_seq[p], oldest_seq);
      iss_go[p]    = iss_valid[p] && !iss_delay[p];
    end
  end
endmodule
