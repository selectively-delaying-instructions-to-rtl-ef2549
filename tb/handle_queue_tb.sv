// handle_queue_tb: random test of the handle queue against a reference FIFO
// kept here, at a small size (12 entries, 4-wide, 8-bit sequence numbers so
// that they wrap many times).  Each cycle either squashes (everything younger
// than a random live or recent sequence number) or enqueues up to four new
// handles; random handles are resolved.  Before each clock edge the test
// compares the entries removed this cycle, the youngest surviving entry,
// the "live handle after squash" flag, the oldest unsafe sequence number and
// the occupancy with the reference.  It also checks that a squashed handle
// waits behind an older unresolved one, and counts dispatch stalls.
module handle_queue_tb;
  localparam int D = 12, SW = 8, E = 4;
  typedef struct { logic [SW-1:0] seq; bit sq; bit res; int slot; } ent_t;

  logic clk = 0, rst_n = 0;
  logic [E-1:0] enq_valid, res_valid;
  logic [E-1:0][SW-1:0] enq_seq, res_seq;
  logic enq_ready, sq_valid, young_valid, live_after_sq, oldest_valid;
  logic [SW-1:0] sq_seq, oldest_seq;
  logic [D-1:0] pop_mask;
  logic [3:0] young_slot;
  logic [3:0] count;

  handle_queue #(.P_DEPTH(D), .P_SEQ_W(SW), .P_ENQ(E), .P_RES(E), .P_POP(E))
    dut (.*);

  ent_t q[$];
  int tail_slot = 0;
  logic [SW-1:0] next_seq = 8'd250;
  int checks = 0, failures = 0, stalls = 0, pops_sq = 0, waits = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic bit yng(logic [SW-1:0] a, logic [SW-1:0] b);
    logic [SW-1:0] d = a - b;
    return d != 0 && d < 128;
  endfunction

  initial begin
    enq_valid = '0; res_valid = '0; enq_seq = '0; res_seq = '0;
    sq_valid = 0; sq_seq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int npop, exp_old;
      bit live, found;
      logic [D-1:0] exp_mask;
      @(negedge clk);
      enq_valid = '0; res_valid = '0; sq_valid = 0;
      if (q.size() > 0 && $urandom % 8 == 0) begin
        sq_valid = 1;
        sq_seq   = q[$urandom % q.size()].seq - SW'($urandom % 2);
      end else if (enq_ready && $urandom % 3 != 0) begin
        for (int j = 0; j < E; j++) begin
          enq_valid[j] = $urandom % 2;
          enq_seq[j]   = next_seq;
          next_seq     = next_seq + 1 + SW'($urandom % 2);
        end
      end else if (!enq_ready) stalls++;
      for (int r = 0; r < E; r++)
        if (q.size() > 0 && $urandom % 4 == 0) begin
          res_valid[r] = 1;
          res_seq[r]   = q[$urandom % q.size()].seq;
        end
      #1;
      // expected removals
      exp_mask = '0; npop = 0;
      for (int i = 0; i < q.size() && i < E; i++) begin
        if (q[i].res || q[i].sq) begin exp_mask[q[i].slot] = 1; npop++; end
        else break;
      end
      chk(pop_mask == exp_mask, "pop_mask");
      chk(young_valid == (q.size() > npop), "young_valid");
      if (q.size() > npop) chk(int'(young_slot) == q[$].slot, "young_slot");
      live = 0;
      for (int i = npop; i < q.size(); i++)
        if (!q[i].sq && !(sq_valid && yng(q[i].seq, sq_seq))) live = 1;
      chk(live_after_sq == live, "live_after_sq");
      found = 0; exp_old = 0;
      foreach (q[i]) if (!found && !q[i].sq) begin found = 1; exp_old = q[i].seq; end
      chk(oldest_valid == found, "oldest_valid");
      if (found) chk(int'(oldest_seq) == exp_old, "oldest_seq");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 1 && !q[0].res && !q[0].sq && q[1].sq) waits++;
      @(posedge clk);
      // update reference
      foreach (q[i]) begin
        if (sq_valid && yng(q[i].seq, sq_seq)) q[i].sq = 1;
        for (int r = 0; r < E; r++)
          if (res_valid[r] && res_seq[r] == q[i].seq) q[i].res = 1;
      end
      for (int i = 0; i < npop; i++) begin
        if (q[0].sq) pops_sq++;
        void'(q.pop_front());
      end
      for (int j = 0; j < E; j++)
        if (enq_valid[j]) begin
          q.push_back('{seq: enq_seq[j], sq: 0, res: 0, slot: tail_slot});
          tail_slot = (tail_slot + 1) % D;
        end
    end
    chk(stalls > 0, "dispatch stall seen");
    chk(pops_sq > 0, "squashed entry removed at head");
    chk(waits > 0, "squashed entry waited behind unresolved head");
    $display("stalls=%0d squashed_pops=%0d waits=%0d", stalls, pops_sq, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
