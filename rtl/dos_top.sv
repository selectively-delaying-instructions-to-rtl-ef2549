// dos_top: the Delay-on-Squash unit, the replay-attack defence that sits
// beside the dispatch, issue, commit and squash paths of an out-of-order core.
//
// A microarchitectural replay attack makes a "handle" (a faulting load, a
// mispredicted branch, ...) squash and re-execute the same younger code over
// and over, so that a noisy side channel in that code can be measured many
// times.  The unit stops the repetition: an instruction that issued, was
// squashed, and comes back while the handles that preceded it are still
// unsafe is not allowed to issue speculatively again.
//
//   dispatch : pc_hash computes the Bloom indices of each PC; they are kept in
//              squash_tag_store under the ROB index; instructions flagged as
//              potential handles enter handle_queue in program order.
//   issue    : candidates look up their hashes, query the filters in
//              filter_ctrl and issue_gate delays those that hit while an
//              older unsafe handle exists.  iss_go marks the issued ones.
//   resolve  : the core reports a handle whose speculative shadow has lifted;
//              handles leave the queue head in order.
//   squash   : every instruction younger than sq_seq leaves the ROB; the
//              issued ones are inserted into the active filter, which is tied
//              to the youngest handle; a filter is cleared once its handle
//              leaves the queue.
//   commit   : frees the ROB entry's stored hashes.
//   context  : ctx_bits/active expose the filters of the running context so
//              the context-switch logic can store them with the rest of its
//              state; ctx_load reloads a stored set (all zeroes for a fresh
//              context).  Reloaded filters clear only after a full window
//              of the context's own instructions, since its handles are gone.
//              Loading is allowed only with the pipeline drained.
//
// Timing: issue decisions are combinational on the current state; every
// update lands at the next rising clock edge.  The core must not dispatch in
// a squash cycle and must hold dispatch while disp_ready is low.  Sequence
// numbers grow monotonically and are never reused after a squash.
// Inputs from the core's shadow tracking (res_*) and the squash source are
// ports; the core itself is outside this unit.
module dos_top
  import dos_pkg::*;
#(
  parameter int unsigned P_W        = WIDTH,
  parameter int unsigned P_ROB      = ROB_ENTRIES,
  parameter int unsigned P_HQ       = HQ_DEPTH,
  parameter int unsigned P_NF       = NUM_FILTERS,
  parameter int unsigned P_BITS     = BF_BITS,
  parameter int unsigned P_NUM_HASH = NUM_HASH,
  parameter int unsigned P_PC_W     = PC_W,
  parameter int unsigned P_SEQ_W    = SEQ_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   enable,
  // dispatch
  input  logic [P_W-1:0]                         disp_valid,
  input  logic [P_W-1:0][$clog2(P_ROB)-1:0]      disp_rob,
  input  logic [P_W-1:0][P_SEQ_W-1:0]            disp_seq,
  input  logic [P_W-1:0][P_PC_W-1:0]             disp_pc,
  input  logic [P_W-1:0]                         disp_handle,
  output logic                                   disp_ready,
  // issue
  input  logic [P_W-1:0]                         iss_valid,
  input  logic [P_W-1:0][$clog2(P_ROB)-1:0]      iss_rob,
  output logic [P_W-1:0]                         iss_delay,
  output logic [P_W-1:0]                         iss_go,
  // commit
  input  logic [P_W-1:0]                         cmt_valid,
  input  logic [P_W-1:0][$clog2(P_ROB)-1:0]      cmt_rob,
  // handle resolution (speculative shadow lifted)
  input  logic [P_W-1:0]                         res_valid,
  input  logic [P_W-1:0][P_SEQ_W-1:0]            res_seq,
  // squash: everything younger than sq_seq is removed
  input  logic                                   sq_valid,
  input  logic [P_SEQ_W-1:0]                     sq_seq,
  // context switch: filter contents out, and reload
  input  logic                                   ctx_load,
  input  logic [P_NF-1:0][P_BITS-1:0]            ctx_bits_in,
  input  logic [$clog2(P_NF)-1:0]                ctx_active_in,
  output logic [P_NF-1:0][P_BITS-1:0]            ctx_bits,
  // status and events
  output logic [$clog2(P_NF)-1:0]                active,
  output logic [P_NF-1:0][$clog2(P_BITS+1)-1:0]  bf_count,
  output logic [$clog2(P_HQ+1)-1:0]              hq_count,
  output logic [$clog2(P_ROB+1)-1:0]             sq_issued,
  output logic                                   ev_switch,
  output logic [P_NF-1:0]                        ev_clear,
  output logic                                   ev_defer
);
  localparam int unsigned IW = $clog2(P_BITS);

  // dispatch: hashing
  logic [P_W-1:0][P_NUM_HASH-1:0][IW-1:0] disp_idx;
  for (genvar p = 0; p < P_W; p++) begin : g_hash
    pc_hash #(.P_PC_W(P_PC_W), .P_NUM_HASH(P_NUM_HASH), .P_BF_BITS(P_BITS))
      u_hash (.pc(disp_pc[p]), .idx(disp_idx[p]));
  end

  logic [$clog2(P_W+1)-1:0] disp_cnt;
  always_comb begin
    disp_cnt = '0;
    for (int p = 0; p < P_W; p++)
      disp_cnt = disp_cnt + ($clog2(P_W+1))'(disp_valid[p]);
  end

  // per-ROB-entry hashes
  logic [P_W-1:0][P_SEQ_W-1:0]             iss_seq;
  logic [P_W-1:0][P_NUM_HASH-1:0][IW-1:0]  iss_idx;
  logic [P_BITS-1:0]                       sq_mask;

  squash_tag_store #(
    .P_ENTRIES(P_ROB), .P_SEQ_W(P_SEQ_W), .P_W(P_W), .P_BITS(P_BITS),
    .P_NUM_HASH(P_NUM_HASH)
  ) u_tags (
    .clk, .rst_n,
    .disp_valid, .disp_rob, .disp_seq, .disp_idx,
    .iss_rob, .iss_mark(iss_go), .iss_seq, .iss_idx,
    .cmt_valid, .cmt_rob,
    .sq_valid, .sq_seq, .sq_mask, .sq_issued
  );

  // handle queue
  logic                        young_valid, live_after_sq, oldest_valid;
  logic [$clog2(P_HQ)-1:0]     young_slot;
  logic [P_SEQ_W-1:0]          oldest_seq;
  logic [P_HQ-1:0]             pop_mask;

  handle_queue #(
    .P_DEPTH(P_HQ), .P_SEQ_W(P_SEQ_W), .P_ENQ(P_W), .P_RES(P_W), .P_POP(P_W)
  ) u_hq (
    .clk, .rst_n,
    .enq_valid(disp_valid & disp_handle), .enq_seq(disp_seq),
    .enq_ready(disp_ready),
    .res_valid, .res_seq,
    .sq_valid, .sq_seq,
    .pop_mask, .young_valid, .young_slot, .live_after_sq,
    .oldest_valid, .oldest_seq, .count(hq_count)
  );

  // rolling Bloom filters
  logic [P_W-1:0] bf_hit;

  filter_ctrl #(
    .P_NF(P_NF), .P_BITS(P_BITS), .P_NUM_HASH(P_NUM_HASH), .P_QPORTS(P_W),
    .P_HQ_DEPTH(P_HQ), .P_WINDOW(P_ROB), .P_SAT(P_BITS / 2), .P_W(P_W)
  ) u_fc (
    .clk, .rst_n,
    .sq_valid, .ins(sq_mask),
    .young_valid, .young_slot, .live_after_sq, .pop_mask,
    .disp_cnt,
    .q_idx(iss_idx), .q_hit(bf_hit),
    .ctx_load, .ctx_bits_in, .ctx_active_in, .ctx_bits,
    .active, .bf_count, .ev_switch, .ev_clear, .ev_defer
  );

  // issue decision
  issue_gate #(.P_W(P_W), .P_SEQ_W(P_SEQ_W)) u_gate (
    .enable, .iss_valid, .iss_seq, .bf_hit, .oldest_valid, .oldest_seq,
    .iss_delay, .iss_go
  );
endmodule
