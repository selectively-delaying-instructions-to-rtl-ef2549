// dos_top_tb: end-to-end test of the Delay-on-Squash unit at its default
// size (8-wide, 192-entry ROB and handle queue, two 64-bit filters with two
// hashes), driven by a small out-of-order core model written here.
//
// The core model dispatches a program in order, issues ready instructions
// out of order (the oldest waiting one plus random others, up to 8 a cycle),
// completes them after 1-3 cycles, resolves branches after a random latency,
// squashes on mispredicted branches and commits in order.  Sequence numbers
// grow without reuse and ROB indices are allocated circularly.
//
// Phases:
//   1. single-handle replay (the original page-fault attack): a load at the
//      ROB head is squashed and replayed 6 times.  With the unit enabled the
//      two side-channel instructions that follow it may issue once before
//      the handle is released; with it disabled they issue on every replay,
//      which shows the attack the unit is there to stop.
//   2. nested handles, as in the scheme's worked example: an inner handle is
//      replayed several times under an outer one, which is itself replayed;
//      the side-channel instructions may again issue only once, and the
//      many squashed handles waiting behind the outer one fill the handle
//      queue until dispatch stalls.
//   3. ordinary execution of 5000 instructions with random branch
//      mispredictions.
//   4. the page-fault attack with the operating system running between
//      replays: the faulting load squashes itself and everything after it,
//      and 400 instructions of the operating system run before the load is
//      replayed.  (a) With the filters stored, replaced by a clean set and
//      reloaded around the excursion, the side channel issues once in 6
//      replays.  (b) If the operating system shares the filters, its
//      instructions let the deferred clear expire and the side channel
//      issues on every replay, which is why the filters belong to the
//      context.
// Throughout, an exact reference of the squashed-and-unsafe instructions
// is kept (each squash records the issued squashed PCs until the youngest
// handle of that moment leaves the handle queue); an instruction from a live
// record that issues while an older handle is unsafe is a failure, as a
// Bloom filter may give false positives but never false negatives.  Every
// program must also commit completely (no deadlock).  The test counts how
// often each mechanism acted and fails if one never did: delay, squash
// insertion, filter switch, clear, deferred clear, dispatch stall on a full
// handle queue, and the disable switch.
module dos_top_tb;
  import dos_pkg::*;

  localparam int RW = $clog2(ROB_ENTRIES);
  localparam int KX = 0, KH = 1, KS = 2, KB = 3;  // other, attack handle, side channel, branch

  logic clk = 0, rst_n = 0, enable;
  logic [WIDTH-1:0] disp_valid, disp_handle, iss_valid, iss_delay, iss_go;
  logic [WIDTH-1:0] cmt_valid, res_valid;
  logic [WIDTH-1:0][RW-1:0] disp_rob, iss_rob, cmt_rob;
  logic [WIDTH-1:0][SEQ_W-1:0] disp_seq, res_seq;
  logic [WIDTH-1:0][PC_W-1:0] disp_pc;
  logic disp_ready, sq_valid, ev_switch, ev_defer;
  logic [SEQ_W-1:0] sq_seq;
  logic [$clog2(NUM_FILTERS)-1:0] active;
  logic [NUM_FILTERS-1:0][$clog2(BF_BITS+1)-1:0] bf_count;
  logic [$clog2(HQ_DEPTH+1)-1:0] hq_count;
  logic [$clog2(ROB_ENTRIES+1)-1:0] sq_issued;
  logic [NUM_FILTERS-1:0] ev_clear;
  logic ctx_load;
  logic [NUM_FILTERS-1:0][BF_BITS-1:0] ctx_bits_in, ctx_bits;
  logic [$clog2(NUM_FILTERS)-1:0] ctx_active_in;

  dos_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // ---------------------------------------------------------------- program
  int prog_kind[$];
  int prog_mp[$];      // branch: mispredicts the first time it resolves

  function automatic logic [PC_W-1:0] pc_of(int i);
    return 64'h0000_5555_0040_0000 + 64'(i) * 4;
  endfunction

  // ------------------------------------------------------------ core model
  typedef struct {
    int seq; int pidx; int kind; bit issued; int done_cyc; bit resolved;
  } rob_e;
  typedef struct { int seq; bit sq; bit res; } hq_e;
  typedef struct { bit pcs[int]; int tag; } rec_e;

  rob_e rob[$];
  hq_e  hq[$];
  rec_e recs[$];
  int rob_head_idx = 0;
  int fetch = 0;
  int next_seq = 1;
  int committed_in_prog = 0;

  // event counters
  int n_delay = 0, n_ins = 0, n_switch = 0, n_clear = 0, n_defer = 0;
  int n_stall = 0, n_squash = 0;
  int s_issues[int];        // side-channel issues per program index

  // attack script state
  int  scen = 0;            // 1 single handle, 2 nested, 3 with OS excursions
  bit  os_after = 0;        // scenario 3: the last squash was a page fault
  bit  ctx_swap = 1;        // scenario 3: store and reload the filters
  int  n_ctx = 0, n_os_delay = 0;
  int  h_left = 0, h2_left = 0, h_wait = 0;
  bit  released = 0;

  function automatic int rob_idx(int i);
    return (rob_head_idx + i) % ROB_ENTRIES;
  endfunction

  function automatic bit older_unsafe(int seq);
    foreach (hq[i]) if (!hq[i].sq && hq[i].seq < seq) return 1;
    return 0;
  endfunction

  function automatic int find_kind(int k, int nth);
    int c = 0;
    foreach (rob[i]) if (rob[i].kind == k) begin
      if (c == nth) return i;
      c++;
    end
    return -1;
  endfunction

  task automatic cycle_step();
    bit do_sq;
    int sq_point, sq_fetch, res_n, ncmt, ndisp, free;
    int cand[$];
    bit pick[int];
    int hq_npop;
    @(negedge clk);
    disp_valid = '0; disp_handle = '0; iss_valid = '0; cmt_valid = '0;
    res_valid = '0; sq_valid = 0;
    do_sq = 0; sq_point = 0; sq_fetch = 0; res_n = 0;

    // --- attack scripts
    if ((scen == 1 || scen == 3) && rob.size() > 0 && rob[0].kind == KH && rob[0].issued &&
        !rob[0].resolved) begin
      h_wait++;
      if (h_wait >= 40) begin
        h_wait = 0;
        if (h_left > 0) begin
          h_left--;
          do_sq = 1; sq_point = rob[0].seq - 1; sq_fetch = rob[0].pidx;
          os_after = (scen == 3);
        end else begin
          rob[0].resolved = 1;
          res_valid[res_n] = 1; res_seq[res_n] = rob[0].seq; res_n++;
          released = 1;
        end
      end
    end
    if (scen == 2) begin
      int i1 = find_kind(KH, 0), i2 = find_kind(KH, 1);
      if (i1 >= 0 && rob[i1].issued && !rob[i1].resolved) begin
        h_wait++;
        if (i2 >= 0 && rob[i2].issued && !rob[i2].resolved && h2_left > 0 &&
            h_wait >= 30) begin
          // inner handle misspeculates; it stays, younger ones go
          h2_left--; h_wait = 0;
          do_sq = 1; sq_point = rob[i2].seq; sq_fetch = rob[i2].pidx + 1;
        end else if (h_wait >= 80 && h_left > 0 && i1 == 0) begin
          // outer handle misspeculates
          h_left--; h2_left = 3; h_wait = 0;
          do_sq = 1; sq_point = rob[i1].seq; sq_fetch = rob[i1].pidx + 1;
        end else if (h_wait >= 80 && h_left == 0 && i1 == 0) begin
          rob[i1].resolved = 1;
          res_valid[res_n] = 1; res_seq[res_n] = rob[i1].seq; res_n++;
          released = 1;
        end
      end
      if (released && i2 >= 0 && rob[i2].issued && !rob[i2].resolved &&
          res_n < WIDTH) begin
        rob[i2].resolved = 1;
        res_valid[res_n] = 1; res_seq[res_n] = rob[i2].seq; res_n++;
      end
    end

    // --- branch resolution (oldest mispredicting one squashes)
    foreach (rob[i]) begin
      if (rob[i].kind == KB && rob[i].issued && !rob[i].resolved &&
          cyc >= rob[i].done_cyc && res_n < WIDTH) begin
        if (prog_mp[rob[i].pidx] && !do_sq) begin
          prog_mp[rob[i].pidx] = 0;
          do_sq = 1; sq_point = rob[i].seq; sq_fetch = rob[i].pidx + 1;
          rob[i].resolved = 1;
          res_valid[res_n] = 1; res_seq[res_n] = rob[i].seq; res_n++;
        end else if (!prog_mp[rob[i].pidx]) begin
          rob[i].resolved = 1;
          res_valid[res_n] = 1; res_seq[res_n] = rob[i].seq; res_n++;
        end
      end
    end
    // a branch younger than the squash point resolving in the same cycle is
    // discarded with it: the unit ignores it as it is squashed anyway
    if (do_sq) begin
      sq_valid = 1; sq_seq = SEQ_W'(sq_point);
    end

    // --- issue: oldest waiting instruction plus random others
    foreach (rob[i]) if (!rob[i].issued && !(do_sq && rob[i].seq > sq_point))
      cand.push_back(i);
    if (cand.size() > 0) begin
      int k = 0;
      pick[cand[0]] = 1;
      iss_valid[k] = 1; iss_rob[k] = RW'(rob_idx(cand[0])); k++;
      for (int t = 0; t < 3 * WIDTH && k < WIDTH; t++) begin
        automatic int c = cand[$urandom % cand.size()];
        if (!pick.exists(c)) begin
          pick[c] = 1;
          iss_valid[k] = 1; iss_rob[k] = RW'(rob_idx(c)); k++;
        end
      end
    end

    // --- commit
    ncmt = 0;
    if (!do_sq)
      for (int i = 0; i < rob.size() && ncmt < WIDTH; i++) begin
        if (rob[i].issued && cyc >= rob[i].done_cyc &&
            ((rob[i].kind != KH && rob[i].kind != KB) || rob[i].resolved)) begin
          cmt_valid[ncmt] = 1; cmt_rob[ncmt] = RW'(rob_idx(i)); ncmt++;
        end else break;
      end

    // --- dispatch
    ndisp = 0;
    free = ROB_ENTRIES - rob.size();
    if (!do_sq && fetch < prog_kind.size()) begin
      if (!disp_ready) n_stall++;
      else
        while (ndisp < WIDTH && ndisp < free && fetch + ndisp < prog_kind.size()) begin
          automatic int p = fetch + ndisp;
          disp_valid[ndisp]  = 1;
          disp_rob[ndisp]    = RW'(rob_idx(rob.size() + ndisp));
          disp_seq[ndisp]    = SEQ_W'(next_seq + ndisp);
          disp_pc[ndisp]     = pc_of(p);
          disp_handle[ndisp] = prog_kind[p] == KH || prog_kind[p] == KB;
          ndisp++;
        end
    end

    #1;
    // --- observe the unit
    for (int k = 0; k < WIDTH; k++) begin
      if (iss_delay[k]) n_delay++;
      if (iss_go[k]) begin
        automatic int i = -1;
        foreach (rob[j]) if (rob_idx(j) == int'(iss_rob[k])) i = j;
        if (enable && older_unsafe(rob[i].seq))
          foreach (recs[r])
            if (recs[r].pcs.exists(rob[i].pidx)) begin
              chk(0, $sformatf("replayed pc %0d issued under unsafe handle",
                               rob[i].pidx));
              break;
            end
        if (rob[i].kind == KS && !released) begin
          if (!s_issues.exists(rob[i].pidx)) s_issues[rob[i].pidx] = 0;
          s_issues[rob[i].pidx]++;
        end
      end
    end
    if (sq_valid && sq_issued != 0) n_ins++;
    if (ev_switch) n_switch++;
    n_clear += $countones(ev_clear);
    if (ev_defer) n_defer++;
    chk(int'(hq_count) == hq.size(), "handle queue occupancy");

    // --- update the model at the clock edge
    @(posedge clk);
    hq_npop = 0;
    for (int i = 0; i < hq.size() && i < WIDTH; i++)
      if (hq[i].res || hq[i].sq) hq_npop++; else break;
    for (int k = 0; k < WIDTH; k++) if (iss_go[k])
      foreach (rob[j]) if (rob_idx(j) == int'(iss_rob[k])) begin
        rob[j].issued = 1; rob[j].done_cyc = cyc + 1 + $urandom % 3 +
          (rob[j].kind == KB ? $urandom % 30 : 0);
      end
    foreach (hq[i]) for (int r = 0; r < WIDTH; r++)
      if (res_valid[r] && int'(res_seq[r]) == hq[i].seq) hq[i].res = 1;
    if (do_sq) begin
      rec_e rec;
      n_squash++;
      foreach (hq[i]) if (hq[i].seq > sq_point) hq[i].sq = 1;
      while (rob.size() > 0 && rob[$].seq > sq_point) begin
        if (rob[$].issued) rec.pcs[rob[$].pidx] = 1;
        void'(rob.pop_back());
      end
      if (hq.size() > hq_npop && rec.pcs.num() > 0) begin
        rec.tag = hq[$].seq;
        recs.push_back(rec);
      end
      fetch = sq_fetch;
    end
    for (int i = 0; i < hq_npop; i++) begin
      automatic int s = hq[0].seq;
      for (int r = recs.size() - 1; r >= 0; r--)
        if (recs[r].tag == s) recs.delete(r);
      void'(hq.pop_front());
    end
    for (int k = 0; k < ncmt; k++) begin
      void'(rob.pop_front());
      rob_head_idx = (rob_head_idx + 1) % ROB_ENTRIES;
      committed_in_prog++;
    end
    for (int k = 0; k < ndisp; k++) begin
      rob_e e;
      e.seq = next_seq; e.pidx = fetch; e.kind = prog_kind[fetch];
      e.issued = 0; e.done_cyc = 0; e.resolved = 0;
      rob.push_back(e);
      if (e.kind == KH || e.kind == KB) hq.push_back('{seq: next_seq, sq: 0, res: 0});
      next_seq++; fetch++;
    end
  endtask

  // the operating system handles the fault: n instructions of its own,
  // dispatched, issued and committed in batches of WIDTH (the core model's
  // ROB is empty after the fault squash).  With ctx_swap the enclave's
  // filters are stored first, replaced by a clean set, and reloaded after.
  task automatic os_excursion(int n);
    logic [NUM_FILTERS-1:0][BF_BITS-1:0] saved;
    logic [$clog2(NUM_FILTERS)-1:0] saved_act;
    @(negedge clk);
    disp_valid = '0; disp_handle = '0; iss_valid = '0; cmt_valid = '0;
    res_valid = '0; sq_valid = 0;
    saved = ctx_bits; saved_act = active;
    chk(saved != '0, "filters hold the squashed instructions at the fault");
    if (ctx_swap) begin
      ctx_load = 1; ctx_bits_in = '0; ctx_active_in = '0;
      @(posedge clk); #1;
      chk(ctx_bits == '0, "operating system starts with clean filters");
      ctx_load = 0; n_ctx++;
    end
    for (int b = 0; b < n / WIDTH; b++) begin
      for (int k = 0; k < WIDTH; k++) begin
        disp_valid[k] = 1; disp_rob[k] = RW'(rob_idx(k));
        disp_seq[k] = SEQ_W'(next_seq + k);
        disp_pc[k] = 64'hFFFF_8000_0010_0000 + 64'(b * WIDTH + k) * 4;
      end
      next_seq += WIDTH;
      @(negedge clk);
      disp_valid = '0;
      for (int k = 0; k < WIDTH; k++) begin iss_valid[k] = 1; iss_rob[k] = RW'(rob_idx(k)); end
      #1 if (iss_delay != '0) n_os_delay++;
      @(negedge clk);
      iss_valid = '0;
      for (int k = 0; k < WIDTH; k++) begin cmt_valid[k] = 1; cmt_rob[k] = RW'(rob_idx(k)); end
      @(negedge clk);
      cmt_valid = '0;
      rob_head_idx = (rob_head_idx + WIDTH) % ROB_ENTRIES;
      // the enclave's squashed handles drain from the queue meanwhile
      for (int i = 0; i < WIDTH && hq.size() > 0 && (hq[0].sq || hq[0].res); i++) begin
        automatic int s = hq[0].seq;
        for (int r = recs.size() - 1; r >= 0; r--) if (recs[r].tag == s) recs.delete(r);
        void'(hq.pop_front());
      end
    end
    chk(int'(hq_count) == hq.size(), "handle queue after the excursion");
    if (ctx_swap) begin
      ctx_load = 1; ctx_bits_in = saved; ctx_active_in = saved_act;
      @(posedge clk); #1;
      chk(ctx_bits == saved && active == saved_act, "enclave filters reloaded");
      ctx_load = 0; n_ctx++;
    end
  endtask

  // run the loaded program to completion
  task automatic run_prog(string name, int limit);
    int start = cyc;
    fetch = 0; released = 0; h_wait = 0;
    s_issues.delete();
    while ((fetch < prog_kind.size() || rob.size() > 0) && cyc - start < limit)
    begin
      cycle_step();
      if (os_after) begin
        os_after = 0;
        os_excursion(400);
      end
    end
    chk(rob.size() == 0 && fetch == prog_kind.size(), {name, ": program completes"});
    $display("%s: %0d cycles, squashes so far %0d", name, cyc - start, n_squash);
  endtask

  task automatic load_prog(int n, int pct_branch, int pct_mp);
    prog_kind.delete(); prog_mp.delete();
    for (int i = 0; i < n; i++) begin
      bit b = ($urandom % 100) < pct_branch;
      prog_kind.push_back(b ? KB : KX);
      prog_mp.push_back(b && (($urandom % 100) < pct_mp));
    end
  endtask

  initial begin
    enable = 1;
    disp_valid = '0; disp_handle = '0; iss_valid = '0; cmt_valid = '0;
    res_valid = '0; sq_valid = 0; disp_rob = '0; iss_rob = '0; cmt_rob = '0;
    disp_seq = '0; res_seq = '0; disp_pc = '0; sq_seq = '0;
    ctx_load = 0; ctx_bits_in = '0; ctx_active_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1a. single-handle replay, protected
    load_prog(300, 10, 0);
    prog_kind[4] = KH; prog_kind[5] = KX; prog_kind[6] = KS; prog_kind[7] = KS;
    prog_mp[4] = 0; prog_mp[6] = 0; prog_mp[7] = 0;
    scen = 1; h_left = 6;
    run_prog("single handle, protected", 20000);
    chk(s_issues.num() == 2, "both side-channel instructions ran once");
    foreach (s_issues[p]) chk(s_issues[p] == 1, "side channel issued once while the handle is held");

    // 1b. same attack with the unit disabled: every replay leaks
    enable = 0;
    for (int i = 0; i < prog_mp.size(); i++) prog_mp[i] = 0;
    scen = 1; h_left = 6;
    run_prog("single handle, unprotected", 20000);
    foreach (s_issues[p]) chk(s_issues[p] == 7, "unprotected: side channel replayed 7 times");
    enable = 1;

    // 2. nested handles: X H1 X H2 S S H3, followed by many branches
    load_prog(600, 60, 0);
    prog_kind[0] = KX; prog_kind[1] = KH; prog_kind[2] = KX; prog_kind[3] = KH;
    prog_kind[4] = KS; prog_kind[5] = KS; prog_kind[6] = KB;
    for (int i = 0; i < 7; i++) prog_mp[i] = 0;
    scen = 2; h_left = 3; h2_left = 3;
    run_prog("nested handles", 40000);
    chk(s_issues.num() == 2, "nested: side-channel instructions ran");
    foreach (s_issues[p]) chk(s_issues[p] == 1, "nested: side channel issued once");

    // 3. ordinary execution with mispredicted branches
    scen = 0;
    load_prog(5000, 20, 30);
    run_prog("random branches", 200000);

    // 4. page faults with the operating system running between replays
    load_prog(300, 10, 0);
    prog_kind[4] = KH; prog_kind[5] = KX; prog_kind[6] = KS; prog_kind[7] = KS;
    prog_mp[4] = 0; prog_mp[6] = 0; prog_mp[7] = 0;
    scen = 3; h_left = 6; ctx_swap = 1;
    run_prog("page faults, filters stored per context", 40000);
    chk(s_issues.num() == 2, "context: side-channel instructions ran");
    foreach (s_issues[p]) chk(s_issues[p] == 1, "context: side channel issued once");
    chk(n_ctx == 12, "context: six stores and reloads of the filters");
    chk(n_os_delay == 0, "operating system never delayed by enclave filters");
    scen = 3; h_left = 6; ctx_swap = 0;
    run_prog("page faults, filters shared with the OS", 40000);
    foreach (s_issues[p]) chk(s_issues[p] == 7, "shared filters: side channel replayed 7 times");
    scen = 0;

    $display("delays=%0d insertions=%0d switches=%0d clears=%0d defers=%0d hq_stalls=%0d squashes=%0d",
             n_delay, n_ins, n_switch, n_clear, n_defer, n_stall, n_squash);
    chk(n_delay > 0,  "mechanism: delay");
    chk(n_ins > 0,    "mechanism: squash insertion");
    chk(n_switch > 0, "mechanism: filter switch on saturation");
    chk(n_clear > 0,  "mechanism: filter clear");
    chk(n_defer > 0,  "mechanism: deferred clear");
    chk(n_stall > 0,  "mechanism: dispatch stall on full handle queue");
    chk(n_ctx > 0,    "mechanism: context store and reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
