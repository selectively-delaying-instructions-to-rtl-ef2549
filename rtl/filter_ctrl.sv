// filter_ctrl: the cyclic list of rolling Bloom filters and their handle
// associations.
//
// One filter is active.  On a squash the hashed PCs of the squashed, issued
// instructions (ins from squash_tag_store) are ORed into the active filter
// and the filter is (re)associated with the youngest entry of the handle
// queue, whether or not that entry is itself being squashed.  A filter is
// bulk-cleared when its associated handle leaves the handle queue, i.e. when
// every handle that was in the speculation window at its last squash has
// become safe.  Re-association keeps pushing this moment back, so before a
// squash inserts, the controller checks whether the active filter holds more
// than P_SAT ones; if so, and the next filter in the cycle is empty and
// unassociated, the next filter becomes active and takes the insertion.  The
// older filter then only waits for its clear.  Issue candidates query every
// filter and hit if any filter holds all their hash bits.
//
// Corner case: if after a squash no non-squashed handle is left in the queue
// (or the queue is empty), the squashed handles could return after the
// filters clear.  The filter is then marked deferred: once its handle has
// left (or at once when there is no handle at all) it is cleared only after
// more than P_WINDOW further instructions have been dispatched: with a
// window of P_WINDOW entries, at least one of them has then left the ROB, so
// the ROB can no longer hold a handle from before the count started.  Any
// squash restarts the count of every filter that is waiting this way: a
// squash can bring the same handles back, and under a replay attack on a
// single handle (which squashes itself every time) the filter holding the
// side-channel instructions must survive for as long as the replays go on.
//
// Context switch: the filters belong to one execution context.  ctx_bits
// shows every filter's contents (and active the active one) so that the
// context-switch logic can store them with the rest of the context; a
// ctx_load pulse writes the filters from ctx_bits_in and ctx_active_in in one
// cycle (through each filter's clear-and-insert path).  The handles of the
// reloaded context are gone from the pipeline by then, so every non-empty
// reloaded filter starts a deferred clear: it is cleared only after more
// than P_WINDOW instructions have been dispatched in that context without a
// squash.  Loading all zeroes starts a context with clean filters.
// ctx_load must not coincide with a squash or a dispatch (the pipeline is
// drained at a switch); it overrides any insert or clear in its cycle.
//
// Following the scheme: two filters, switching on saturation ("more than
// half full" in its worked example, so P_SAT = P_BITS/2), association with the
// youngest handle, clear when that handle is safe, deferred clear by one
// window; per-context filters that are stored and reloaded on a switch
// (how they are protected while stored is outside this block).  This design's
// choices: the reload starts a deferred clear; the window is counted in dispatched
// instructions, must be exceeded, equals the ROB size and restarts on every
// squash; a squash that inserts nothing leaves
// the associations unchanged; a filter re-associated in the cycle its old
// handle leaves is not cleared.
module filter_ctrl
  import dos_pkg::*;
#(
  parameter int unsigned P_NF       = NUM_FILTERS,
  parameter int unsigned P_BITS     = BF_BITS,
  parameter int unsigned P_NUM_HASH = NUM_HASH,
  parameter int unsigned P_QPORTS   = WIDTH,
  parameter int unsigned P_HQ_DEPTH = HQ_DEPTH,
  parameter int unsigned P_WINDOW   = ROB_ENTRIES,
  parameter int unsigned P_SAT      = BF_BITS / 2,
  parameter int unsigned P_W        = WIDTH
) (
  input  logic                                             clk,
  input  logic                                             rst_n,
  input  logic                                             sq_valid,
  input  logic [P_BITS-1:0]                                ins,
  input  logic                                             young_valid,
  input  logic [$clog2(P_HQ_DEPTH)-1:0]                    young_slot,
  input  logic                                             live_after_sq,
  input  logic [P_HQ_DEPTH-1:0]                            pop_mask,
  input  logic [$clog2(P_W+1)-1:0]                         disp_cnt,
  input  logic [P_QPORTS-1:0][P_NUM_HASH-1:0][$clog2(P_BITS)-1:0] q_idx,
  input  logic                                             ctx_load,
  input  logic [P_NF-1:0][P_BITS-1:0]                      ctx_bits_in,
  input  logic [$clog2(P_NF)-1:0]                          ctx_active_in,
  output logic [P_QPORTS-1:0]                              q_hit,
  output logic [$clog2(P_NF)-1:0]                          active,
  output logic [P_NF-1:0][P_BITS-1:0]                      ctx_bits,
  output logic [P_NF-1:0][$clog2(P_BITS+1)-1:0]            bf_count,
  output logic                                             ev_switch,
  output logic [P_NF-1:0]                                  ev_clear,
  output logic                                             ev_defer
);
  localparam int unsigned AW  = (P_NF > 1) ? $clog2(P_NF) : 1;
  localparam int unsigned SW  = $clog2(P_HQ_DEPTH);
  localparam int unsigned CNW = $clog2(P_WINDOW + P_W + 1);

  logic [P_NF-1:0]             tag_v, defer, cnt_v;
  logic [P_NF-1:0][SW-1:0]     tag;
  logic [P_NF-1:0][CNW-1:0]    cnt;
  logic [AW-1:0]               act_q;

  logic [P_NF-1:0][P_BITS-1:0]   ins_f;
  logic [P_NF-1:0]               clr_f;
  logic [P_NF-1:0][P_QPORTS-1:0] hit_f;

  for (genvar f = 0; f < P_NF; f++) begin : g_bf
    bloom_filter #(
      .P_BITS(P_BITS), .P_NUM_HASH(P_NUM_HASH), .P_QPORTS(P_QPORTS)
    ) u_bf (
      .clk, .rst_n,
      .clear   (clr_f[f]),
      .ins_mask(ins_f[f]),
      .q_idx,
      .q_hit   (hit_f[f]),
      .bits    (ctx_bits[f]),
      .count   (bf_count[f])
    );
  end

  function automatic logic [AW-1:0] next_f(input logic [AW-1:0] a);
    return (int'(a) == P_NF - 1) ? '0 : a + 1'b1;
  endfunction

  logic          do_sq;
  logic [AW-1:0] nxt, tgt;
  logic [P_NF-1:0] free_f;

  always_comb begin
    for (int f = 0; f < P_NF; f++)
      free_f[f] = (bf_count[f] == '0) && !tag_v[f] && !cnt_v[f];
    do_sq     = sq_valid && (ins != '0);
    nxt       = next_f(act_q);
    ev_switch = !ctx_load && do_sq && (P_NF > 1) && (int'(bf_count[act_q]) > P_SAT) &&
                free_f[nxt];
    tgt       = ev_switch ? nxt : act_q;
    ev_defer  = !ctx_load && do_sq && (!young_valid || !live_after_sq);
    for (int f = 0; f < P_NF; f++) begin
      ins_f[f] = (do_sq && int'(tgt) == f) ? ins : '0;
      clr_f[f] = 1'b0;
      if (!(do_sq && int'(tgt) == f)) begin
        if (tag_v[f] && pop_mask[tag[f]] && !defer[f]) clr_f[f] = 1'b1;
        if (cnt_v[f] && !sq_valid && (int'(cnt[f]) + int'(disp_cnt) > P_WINDOW))
          clr_f[f] = 1'b1;
      end
      if (ctx_load) begin
        ins_f[f] = ctx_bits_in[f];
        clr_f[f] = 1'b1;
      end
    end
    ev_clear = ctx_load ? '0 : clr_f;
  end

  always_comb begin
    q_hit = '0;
    for (int f = 0; f < P_NF; f++) q_hit = q_hit | hit_f[f];
  end

  assign active = act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_v <= '0;
      defer <= '0;
      cnt_v <= '0;
      tag   <= '0;
      cnt   <= '0;
      act_q <= '0;
    end else if (ctx_load) begin
      act_q <= AW'(ctx_active_in);
      for (int f = 0; f < P_NF; f++) begin
        tag_v[f] <= 1'b0;
        defer[f] <= 1'b0;
        cnt_v[f] <= (ctx_bits_in[f] != '0);
        cnt[f]   <= '0;
      end
    end else begin
      if (ev_switch) act_q <= nxt;
      for (int f = 0; f < P_NF; f++) begin
        if (do_sq && int'(tgt) == f) begin
          tag_v[f] <= young_valid;
          tag[f]   <= young_slot;
          defer[f] <= young_valid && !live_after_sq;
          cnt_v[f] <= !young_valid;
          cnt[f]   <= '0;
        end else begin
          if (tag_v[f] && pop_mask[tag[f]]) begin
            tag_v[f] <= 1'b0;
            if (defer[f]) begin
              cnt_v[f] <= 1'b1;
              cnt[f]   <= '0;
            end
            defer[f] <= 1'b0;
          end
          if (cnt_v[f]) begin
            if (clr_f[f])      cnt_v[f] <= 1'b0;
            else if (sq_valid) cnt[f]   <= '0;
            else               cnt[f]   <= cnt[f] + CNW'(disp_cnt);
          end
        end
      end
    end
  end

  a_load_quiet: assert property (@(posedge clk) disable iff (!rst_n)
    ctx_load |-> !sq_valid && disp_cnt == '0)
    else $error("filter_ctrl: context load during a squash or dispatch");
endmodule
