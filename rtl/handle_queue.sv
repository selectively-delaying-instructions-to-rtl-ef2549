// handle_queue: the FIFO of potential replay handles (the "HQ").
//
// Every dispatched instruction that can misspeculate and cause a squash
// (branch, load that may fault, store with an unknown address, ...) is
// enqueued at dispatch, in program order, and is "unsafe" while it is in the
// queue.  An entry is marked resolved when the core reports that it no longer
// casts a speculative shadow, and marked squashed when a squash removes it
// from the ROB.  Entries leave only from the head, and only when resolved or
// squashed, so a handle becomes safe only after every older handle has: this
// ordering is what defeats serial and nested replay handles.  Squashed entries
// stay in place until they reach the head.
//
// Per cycle: up to P_ENQ enqueues (the valid ports are packed in port order
// into consecutive entries), up to P_RES resolve reports, one squash (every
// entry younger than sq_seq is marked squashed; the squashing instruction
// itself stays) and up to P_POP removals from the head.  enq_ready is high
// when at least P_ENQ entries are free; the core stalls dispatch otherwise.
//
// Outputs for the filter controller: the entries removed this cycle
// (pop_mask, one bit per entry), the youngest entry that survives this
// cycle's removals (young_*), and whether any non-squashed entry survives a
// squash of this cycle (live_after_sq).  Output for the issue gate: the
// sequence number of the oldest non-squashed entry (oldest_*), taken from the
// registered state.  The queue depth is this design's choice.
module handle_queue
  import dos_pkg::*;
#(
  parameter int unsigned P_DEPTH = HQ_DEPTH,
  parameter int unsigned P_SEQ_W = SEQ_W,
  parameter int unsigned P_ENQ   = WIDTH,
  parameter int unsigned P_RES   = WIDTH,
  parameter int unsigned P_POP   = WIDTH
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [P_ENQ-1:0]                  enq_valid,
  input  logic [P_ENQ-1:0][P_SEQ_W-1:0]     enq_seq,
  output logic                              enq_ready,
  input  logic [P_RES-1:0]                  res_valid,
  input  logic [P_RES-1:0][P_SEQ_W-1:0]     res_seq,
  input  logic                              sq_valid,
  input  logic [P_SEQ_W-1:0]                sq_seq,
  output logic [P_DEPTH-1:0]                pop_mask,
  output logic                              young_valid,
  output logic [$clog2(P_DEPTH)-1:0]        young_slot,
  output logic                              live_after_sq,
  output logic                              oldest_valid,
  output logic [P_SEQ_W-1:0]                oldest_seq,
  output logic [$clog2(P_DEPTH+1)-1:0]      count
);
  localparam int unsigned PW = $clog2(P_DEPTH);
  localparam int unsigned CW = $clog2(P_DEPTH+1);

  logic [P_DEPTH-1:0]              v_q, sq_q, res_q;
  logic [P_DEPTH-1:0][P_SEQ_W-1:0] seq_q;
  logic [PW-1:0]                   head_q, tail_q;

  function automatic logic [PW-1:0] wrap_add(input logic [PW-1:0] p,
                                             input int unsigned n);
    int unsigned s;
    s = int'(p) + n;
    if (s >= P_DEPTH) s = s - P_DEPTH;
    return PW'(s);
  endfunction

  function automatic logic younger(input logic [P_SEQ_W-1:0] a,
                                   input logic [P_SEQ_W-1:0] b);
    logic [P_SEQ_W-1:0] d;
    d = a - b;
    return (d != '0) && !d[P_SEQ_W-1];
  endfunction

  // removals from the head
  logic [CW-1:0] npop;
  always_comb begin
    logic stop;
    logic [PW-1:0] s;
    pop_mask = '0;
    npop     = '0;
    stop     = 1'b0;
    for (int i = 0; i < P_POP; i++) begin
      s = wrap_add(head_q, i);
      if (!stop && (i < int'(count)) && (res_q[s] || sq_q[s])) begin
        pop_mask[s] = 1'b1;
        npop        = npop + 1'b1;
      end else begin
        stop = 1'b1;
      end
    end
  end

  // enqueue slots
  logic [CW-1:0]                nenq;
  logic [P_ENQ-1:0][PW-1:0]     enq_slot;
  always_comb begin
    nenq = '0;
    for (int j = 0; j < P_ENQ; j++) begin
      enq_slot[j] = wrap_add(tail_q, int'(nenq));
      if (enq_valid[j]) nenq = nenq + 1'b1;
    end
  end

  assign enq_ready   = (P_DEPTH - int'(count)) >= P_ENQ;
  assign young_valid = (count != npop);
  assign young_slot  = wrap_add(tail_q, P_DEPTH - 1);

  always_comb begin
    live_after_sq = 1'b0;
    for (int i = 0; i < P_DEPTH; i++)
      if (v_q[i] && !pop_mask[i] && !sq_q[i] &&
          !(sq_valid && younger(seq_q[i], sq_seq)))
        live_after_sq = 1'b1;
  end

  always_comb begin
    logic found;
    logic [PW-1:0] s;
    found        = 1'b0;
    oldest_valid = 1'b0;
    oldest_seq   = '0;
    for (int i = 0; i < P_DEPTH; i++) begin
      s = wrap_add(head_q, i);
      if (!found && (i < int'(count)) && !sq_q[s]) begin
        found        = 1'b1;
        oldest_valid = 1'b1;
        oldest_seq   = seq_q[s];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q    <= '0;
      sq_q   <= '0;
      res_q  <= '0;
      seq_q  <= '0;
      head_q <= '0;
      tail_q <= '0;
      count  <= '0;
    end else begin
      for (int i = 0; i < P_DEPTH; i++) begin
        if (v_q[i]) begin
          if (sq_valid && younger(seq_q[i], sq_seq)) sq_q[i] <= 1'b1;
          for (int r = 0; r < P_RES; r++)
            if (res_valid[r] && res_seq[r] == seq_q[i]) res_q[i] <= 1'b1;
        end
        if (pop_mask[i]) v_q[i] <= 1'b0;
      end
      for (int j = 0; j < P_ENQ; j++) begin
        if (enq_valid[j]) begin
          v_q[enq_slot[j]]   <= 1'b1;
          sq_q[enq_slot[j]]  <= 1'b0;
          res_q[enq_slot[j]] <= 1'b0;
          seq_q[enq_slot[j]] <= enq_seq[j];
        end
      end
      head_q <= wrap_add(head_q, int'(npop));
      tail_q <= wrap_add(tail_q, int'(nenq));
      count  <= count + nenq - npop;
    end
  end

  // The core must respect enq_ready and must not dispatch in a squash cycle.
  a_enq_ready : assert property (@(posedge clk) disable iff (!rst_n)
                                 (enq_valid != '0) |-> enq_ready);
  a_enq_no_sq : assert property (@(posedge clk) disable iff (!rst_n)
                                 sq_valid |-> (enq_valid == '0));
endmodule
