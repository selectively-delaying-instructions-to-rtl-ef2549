// filter_ctrl_tb: directed test of the rolling-filter controller at a small
// size (two 16-bit filters, two hashes, handle queue of 8, window of 10
// instructions, saturation above 8 ones, 4-wide dispatch).  It walks through
// the life of the filters in the order of the scheme's worked example:
// insertion tied to the youngest handle, no clear while that handle stays,
// switch to the second filter once the first is more than half full,
// queries that hit in either filter, clear when each filter's own handle
// leaves, the deferred clear more than one window after a squash that leaves no live
// handle (with and without any handle in the queue, and restarted by a squash), no switch when the next
// filter is still busy, a squash that inserts nothing, and a context switch:
// the filters are read out, replaced by a clean set, reloaded, and the
// reloaded filters wait one window before clearing.  A final random phase
// (squashes, pops, dispatch, queries and occasional reloads) compares every
// output, every cycle, with a reference model of the same rules kept here.  Every expected
// value below is worked out by hand from those rules.
module filter_ctrl_tb;
  localparam int NF = 2, B = 16, NH = 2, Q = 2, HQ = 8, WIN = 10, SAT = 8, W = 4;
  logic clk = 0, rst_n = 0;
  logic sq_valid, young_valid, live_after_sq, ev_switch, ev_defer;
  logic [B-1:0] ins;
  logic [2:0] young_slot;
  logic [HQ-1:0] pop_mask;
  logic [2:0] disp_cnt;
  logic [Q-1:0][NH-1:0][3:0] q_idx;
  logic [Q-1:0] q_hit;
  logic [0:0] active;
  logic [NF-1:0][4:0] bf_count;
  logic [NF-1:0] ev_clear;
  logic ctx_load;
  logic [NF-1:0][B-1:0] ctx_bits_in, ctx_bits, saved;
  logic [0:0] ctx_active_in;
  int checks = 0, failures = 0;

  filter_ctrl #(.P_NF(NF), .P_BITS(B), .P_NUM_HASH(NH), .P_QPORTS(Q),
                .P_HQ_DEPTH(HQ), .P_WINDOW(WIN), .P_SAT(SAT), .P_W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic idle();
    sq_valid = 0; ins = '0; young_valid = 0; young_slot = '0;
    live_after_sq = 0; pop_mask = '0; disp_cnt = '0;
    ctx_load = 0; ctx_bits_in = '0; ctx_active_in = '0;
  endtask

  task automatic load(logic [NF-1:0][B-1:0] v, logic [0:0] a);
    @(negedge clk);
    idle();
    ctx_load = 1; ctx_bits_in = v; ctx_active_in = a;
  endtask

  task automatic squash(logic [B-1:0] m, bit yv, int slot, bit live);
    @(negedge clk);
    idle();
    sq_valid = 1; ins = m; young_valid = yv; young_slot = 3'(slot);
    live_after_sq = live;
  endtask

  task automatic pop(int slot);
    @(negedge clk);
    idle();
    pop_mask[slot] = 1;
  endtask

  task automatic disp(int n);
    @(negedge clk);
    idle();
    disp_cnt = 3'(n);
  endtask

  // ---- reference model for the random phase
  logic [NF-1:0][B-1:0] r_bits;
  bit   r_tv[NF], r_df[NF], r_cv[NF];
  int   r_tag[NF], r_cnt[NF];
  int   r_act;

  task automatic ref_sync();          // take the state after the directed part
    r_bits = ctx_bits; r_act = int'(active);
    for (int f = 0; f < NF; f++) begin
      r_tv[f] = 0; r_df[f] = 0; r_cv[f] = 0; r_tag[f] = 0; r_cnt[f] = 0;
    end
  endtask

  task automatic random_phase(int n);
    for (int c = 0; c < n; c++) begin
      bit sw, df, any_ins, ins_here;
      int tgt, nx;
      logic [NF-1:0] clr;
      logic [Q-1:0] exp_hit;
      @(negedge clk);
      idle();
      if ($urandom % 100 < 2) begin
        ctx_load = 1;
        for (int f = 0; f < NF; f++)
          ctx_bits_in[f] = ($urandom % 3 == 0) ? '0 : B'($urandom) & B'($urandom);
        ctx_active_in = 1'($urandom);
      end else begin
        if ($urandom % 100 < 20) begin
          sq_valid = 1;
          ins = ($urandom % 4 == 0) ? '0 : B'(1) << ($urandom % B) | B'(1) << ($urandom % B);
          young_valid = $urandom % 5 != 0; young_slot = 3'($urandom);
          live_after_sq = $urandom % 3 != 0;
        end else disp_cnt = 3'($urandom % 5);
        for (int h = 0; h < HQ; h++) pop_mask[h] = $urandom % 6 == 0;
      end
      for (int q = 0; q < Q; q++) for (int k = 0; k < NH; k++) q_idx[q][k] = 4'($urandom);
      // expected combinational outputs
      any_ins = !ctx_load && sq_valid && ins != '0;
      nx = (r_act + 1) % NF;
      sw = any_ins && $countones(r_bits[r_act]) > SAT && r_bits[nx] == '0 &&
           !r_tv[nx] && !r_cv[nx];
      tgt = sw ? nx : r_act;
      df = any_ins && (!young_valid || !live_after_sq);
      for (int f = 0; f < NF; f++) begin
        ins_here = any_ins && tgt == f;
        clr[f] = !ctx_load && !ins_here &&
                 ((r_tv[f] && pop_mask[r_tag[f]] && !r_df[f]) ||
                  (r_cv[f] && !sq_valid && r_cnt[f] + int'(disp_cnt) > WIN));
      end
      for (int q = 0; q < Q; q++) begin
        exp_hit[q] = 0;
        for (int f = 0; f < NF; f++)
          if (r_bits[f][q_idx[q][0]] && r_bits[f][q_idx[q][1]]) exp_hit[q] = 1;
      end
      #1;
      chk(ev_switch == sw && ev_defer == df && ev_clear == clr, "random: events");
      chk(q_hit == exp_hit, "random: query hits");
      chk(ctx_bits == r_bits && int'(active) == r_act, "random: filter contents");
      for (int f = 0; f < NF; f++) chk(int'(bf_count[f]) == $countones(r_bits[f]), "random: counts");
      // reference update
      if (ctx_load) begin
        r_bits = ctx_bits_in; r_act = int'(ctx_active_in);
        for (int f = 0; f < NF; f++) begin
          r_tv[f] = 0; r_df[f] = 0; r_cv[f] = ctx_bits_in[f] != '0; r_cnt[f] = 0;
        end
      end else begin
        if (sw) r_act = nx;
        for (int f = 0; f < NF; f++) begin
          if (any_ins && tgt == f) begin
            r_bits[f] |= ins;
            r_tv[f] = young_valid; r_tag[f] = int'(young_slot);
            r_df[f] = young_valid && !live_after_sq;
            r_cv[f] = !young_valid; r_cnt[f] = 0;
          end else begin
            bit was_cv = r_cv[f];
            if (clr[f]) r_bits[f] = '0;
            if (r_tv[f] && pop_mask[r_tag[f]]) begin
              r_tv[f] = 0;
              if (r_df[f]) begin r_cv[f] = 1; r_cnt[f] = 0; end
              r_df[f] = 0;
            end
            if (was_cv) begin
              if (clr[f]) r_cv[f] = 0;
              else if (sq_valid) r_cnt[f] = 0;
              else r_cnt[f] += int'(disp_cnt);
            end
          end
        end
      end
    end
  endtask

  task automatic settle();
    @(negedge clk);
    idle();
    #1;
  endtask

  function automatic logic [B-1:0] bitsof(int a, int b = -1, int c = -1);
    logic [B-1:0] m = '0;
    m[a] = 1;
    if (b >= 0) m[b] = 1;
    if (c >= 0) m[c] = 1;
    return m;
  endfunction

  initial begin
    idle();
    q_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. squash inserts three PCs' bits into filter 0, tagged with slot 5
    squash(bitsof(1, 2, 4), 1, 5, 1);
    #1 chk(!ev_switch && !ev_defer, "plain squash: no switch, no defer");
    settle();
    chk(bf_count[0] == 3 && bf_count[1] == 0 && active == 0, "filter 0 holds 3");
    q_idx[0] = '{4'd2, 4'd1}; q_idx[1] = '{4'd3, 4'd1};
    #1 chk(q_hit == 2'b01, "query hit (1,2), miss (1,3)");

    // 2. another handle leaves: no clear
    pop(3);
    #1 chk(ev_clear == 2'b00, "unrelated handle leaves: no clear");
    settle();
    chk(bf_count[0] == 3, "filter 0 kept");

    // 3. more squashed PCs: filter 0 reaches 9 ones, re-tagged with slot 5
    squash(bitsof(5, 6, 7) | bitsof(8, 9, 12), 1, 5, 1);
    settle();
    chk(bf_count[0] == 9 && active == 0, "filter 0 holds 9");

    // 4. filter 0 more than half full, filter 1 free: switch
    squash(bitsof(10, 11), 1, 6, 1);
    #1 chk(ev_switch, "switch on saturation");
    settle();
    chk(active == 1 && bf_count[1] == 2 && bf_count[0] == 9, "filter 1 active");
    q_idx[0] = '{4'd11, 4'd10}; q_idx[1] = '{4'd2, 4'd1};
    #1 chk(q_hit == 2'b11, "hits in either filter");
    q_idx[0] = '{4'd13, 4'd10};
    #1 chk(q_hit == 2'b10, "miss across filters");

    // 5. handle 5 leaves: filter 0 cleared, filter 1 kept
    pop(5);
    #1 chk(ev_clear == 2'b01, "clear filter 0 on its handle");
    settle();
    chk(bf_count[0] == 0 && bf_count[1] == 2, "filter 0 empty");

    // 6. handle 6 leaves: filter 1 cleared
    pop(6);
    #1 chk(ev_clear == 2'b10, "clear filter 1 on its handle");
    settle();
    chk(bf_count[1] == 0 && active == 1, "both empty, filter 1 still active");

    // 7. squash that leaves no live handle: deferred clear
    squash(bitsof(3), 1, 2, 0);
    #1 chk(ev_defer, "defer flagged");
    settle();
    chk(bf_count[1] == 1, "filter 1 holds 1");
    pop(2);
    #1 chk(ev_clear == 2'b00, "deferred: no clear when handle leaves");
    disp(4); #1 chk(ev_clear == 2'b00, "window 4/10");
    disp(4); #1 chk(ev_clear == 2'b00, "window 8/10");
    disp(0); #1 chk(ev_clear == 2'b00, "no dispatch, no progress");
    disp(4); #1 chk(ev_clear == 2'b10, "window full: clear");
    settle();
    chk(bf_count[1] == 0, "deferred clear done");

    // 8. squash with no handle at all: countdown starts at once
    squash(bitsof(7), 0, 0, 0);
    #1 chk(ev_defer, "defer flagged, empty queue");
    disp(3); #1 chk(ev_clear == 2'b00, "window 3/10");
    disp(4); #1 chk(ev_clear == 2'b00, "window 7/10");
    disp(3); #1 chk(ev_clear == 2'b00, "window 10/10: not yet");
    disp(1); #1 chk(ev_clear == 2'b10, "window 11/10: clear");
    settle();
    chk(bf_count[1] == 0, "cleared");

    // 8b. any squash, even one that inserts nothing, restarts a waiting count
    squash(bitsof(7), 0, 0, 0);
    disp(4); disp(4);
    squash('0, 1, 3, 1);
    #1 chk(ev_clear == 2'b00, "squash: no clear");
    disp(4); disp(4); #1 chk(ev_clear == 2'b00, "window restarted: 8/10");
    disp(3); #1 chk(ev_clear == 2'b10, "window 11/10 after restart: clear");
    settle();
    chk(bf_count[1] == 0, "cleared after restart");

    // 9. saturated active filter but the other one busy: no switch
    squash(bitsof(0), 1, 1, 1);                      // filter 1 -> slot 1
    squash(bitsof(1, 2, 3) | bitsof(4, 5, 6) | bitsof(7, 8, 9), 1, 1, 1);
    settle();
    chk(active == 1 && bf_count[1] == 10, "filter 1 holds 10");
    squash(bitsof(14), 1, 4, 1);
    #1 chk(ev_switch, "switch to free filter 0");
    settle();
    chk(active == 0 && bf_count[0] == 1, "filter 0 active");
    squash(bitsof(1, 2, 3) | bitsof(4, 5, 6) | bitsof(7, 8, 9), 1, 4, 1);
    settle();
    chk(bf_count[0] == 10, "filter 0 holds 10");
    squash(bitsof(15), 1, 4, 1);
    #1 chk(!ev_switch, "no switch: filter 1 still tagged");
    settle();
    chk(active == 0 && bf_count[0] == 11, "inserted into saturated filter 0");

    // 10. squash that inserts nothing keeps the tag: slot 4 still clears it
    squash('0, 1, 7, 1);
    settle();
    pop(4);
    #1 chk(ev_clear == 2'b01, "tag kept across empty squash");
    // 11. re-association in the cycle the old handle leaves: no clear
    squash(bitsof(2), 1, 3, 1);                     // filter 0 -> slot 3
    @(negedge clk); idle();
    sq_valid = 1; ins = bitsof(5); young_valid = 1; young_slot = 3'd7;
    live_after_sq = 1; pop_mask[3] = 1;
    #1 chk(ev_clear == 2'b00, "re-associated filter not cleared");
    settle();
    chk(bf_count[0] == 2, "filter 0 kept both PCs");
    pop(1);
    #1 chk(ev_clear == 2'b10, "filter 1 cleared by slot 1");
    settle();

    // 12. context switch: read out, load a clean context, reload
    chk(ctx_bits[0] == bitsof(2, 5) && ctx_bits[1] == '0, "contents readable");
    saved = ctx_bits;
    saved[1] = bitsof(11);                           // as if B held a PC too
    load('0, 1'b0);
    #1 chk(ev_clear == 2'b00 && !ev_switch, "load raises no events");
    settle();
    chk(bf_count[0] == 0 && bf_count[1] == 0 && active == 0, "clean context");
    pop(7);
    #1 chk(ev_clear == 2'b00, "old association dropped by the load");
    squash(bitsof(9), 1, 2, 1);                      // the other context's squash
    settle();
    chk(ctx_bits[0] == bitsof(9), "other context uses filter 0");
    load(saved, 1'b1);
    settle();
    chk(ctx_bits == saved && active == 1, "reloaded contents and active filter");
    q_idx[0] = '{4'd5, 4'd2}; q_idx[1] = '{4'd9, 4'd9};
    #1 chk(q_hit == 2'b01, "reloaded PC hits, other context's PC misses");
    pop(2);
    #1 chk(ev_clear == 2'b00, "other context's handle clears nothing");
    disp(4);
    #1 chk(ev_clear == 2'b00, "reloaded: waiting (4)");
    disp(4);
    #1 chk(ev_clear == 2'b00, "reloaded: waiting (8)");
    squash('0, 0, 0, 0);
    #1 chk(ev_clear == 2'b00, "squash restarts the reloaded wait");
    disp(4);
    disp(4);
    #1 chk(ev_clear == 2'b00, "reloaded: waiting again (8)");
    disp(3);
    #1 chk(ev_clear == 2'b11, "reloaded filters clear after the window");
    settle();
    chk(bf_count[0] == 0 && bf_count[1] == 0, "both empty");

    // 13. random phase against the reference model
    ref_sync();
    random_phase(3000);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
