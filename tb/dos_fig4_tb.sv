// dos_fig4_tb: the step-by-step example of the Delay-on-Squash scheme, run on
// the whole unit with an 8-entry ROB (as drawn in the example), 4-wide
// dispatch and issue, a 16-entry handle queue and two 8-bit filters (small,
// so that three squashed PCs make a filter more than half full).
//
//   1. H1 X H2 S S H3 are dispatched; H1, H2, H3 enter the handle queue.
//   2. H2 misspeculates: the issued S S H3 are inserted into filter A, which
//      is tied to the youngest handle (H3, itself squashed).
//   3. The new path Y S S H3 is dispatched: S S H3 hit and are delayed, Y
//      issues.
//   4. H1 misspeculates: only X H2 Y had issued and are inserted; filter A is
//      more than half full, so filter B becomes active and takes them.
//   5. H1 replays the code twice more: nothing issues speculatively, so the
//      side-channel instructions S are never replayed.
//   6. H1 resolves and leaves the queue; the squashed handles behind it
//      drain and clear both filters; S then issue and everything commits.
// The PCs are picked at the start (with a local pc_hash) so that Y misses
// filter A and S S H3 set more than half of its bits, which makes the switch
// of step 4 happen as in the example.
module dos_fig4_tb;
  localparam int W = 4, ROB = 8, HQ = 16, B = 8, SW = 32;

  logic clk = 0, rst_n = 0, enable = 1;
  logic [W-1:0] disp_valid, disp_handle, iss_valid, iss_delay, iss_go;
  logic [W-1:0] cmt_valid, res_valid;
  logic [W-1:0][2:0] disp_rob, iss_rob, cmt_rob;
  logic [W-1:0][SW-1:0] disp_seq, res_seq;
  logic [W-1:0][63:0] disp_pc;
  logic disp_ready, sq_valid, ev_switch, ev_defer;
  logic [SW-1:0] sq_seq;
  logic [0:0] active;
  logic [1:0][3:0] bf_count;
  logic [4:0] hq_count;
  logic [3:0] sq_issued;
  logic [1:0] ev_clear;
  logic ctx_load = 0;
  logic [1:0][B-1:0] ctx_bits_in = '0, ctx_bits;
  logic [0:0] ctx_active_in = '0;

  dos_top #(.P_W(W), .P_ROB(ROB), .P_HQ(HQ), .P_BITS(B)) dut (.*);

  // local hash unit, used only to choose the PCs
  logic [63:0] hpc;
  logic [1:0][2:0] hidx;
  pc_hash #(.P_PC_W(64), .P_NUM_HASH(2), .P_BF_BITS(B)) u_h (.pc(hpc), .idx(hidx));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
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

  // program: index -> PC;  0 H1, 1 X, 2 H2, 3 S, 4 S, 5 H3, 6 Y
  logic [63:0] pc[7];
  int seq = 1;

  function automatic logic [B-1:0] bits_of(logic [1:0][2:0] ix);
    logic [B-1:0] m = '0;
    m[ix[0]] = 1; m[ix[1]] = 1;
    return m;
  endfunction

  task automatic pick_pcs();
    logic [B-1:0] fa, my;
    for (int base = 0; base < 4096; base++) begin
      for (int i = 0; i < 7; i++) pc[i] = 64'h1000 + 64'(base) * 64 + 64'(i) * 4;
      fa = '0;
      for (int i = 3; i <= 5; i++) begin
        hpc = pc[i]; #1; fa |= bits_of(hidx);
      end
      hpc = pc[6]; #1; my = bits_of(hidx);
      if ($countones(fa) > B / 2 && (my & ~fa) != '0) return;
    end
    $display("no suitable PCs found");
    failures++;
  endtask

  task automatic idle();
    disp_valid = '0; disp_handle = '0; iss_valid = '0; cmt_valid = '0;
    res_valid = '0; sq_valid = 0;
  endtask

  // dispatch program indices p[] into ROB slots r[] in one cycle
  task automatic dispatch(int p[$], int r[$], output int s[$]);
    @(negedge clk); idle();
    s = {};
    foreach (p[i]) begin
      disp_valid[i] = 1; disp_rob[i] = 3'(r[i]); disp_seq[i] = seq;
      disp_pc[i] = pc[p[i]]; disp_handle[i] = (p[i] == 0 || p[i] == 2 || p[i] == 5);
      s.push_back(seq); seq++;
    end
    #1 chk(disp_ready, "dispatch allowed");
  endtask

  // offer ROB slots r[] for issue; return which went
  task automatic issue(int r[$], output logic [W-1:0] go, output logic [W-1:0] dly);
    @(negedge clk); idle();
    foreach (r[i]) begin iss_valid[i] = 1; iss_rob[i] = 3'(r[i]); end
    #1 go = iss_go; dly = iss_delay;
  endtask

  task automatic squash(int s, output int nins, output bit sw, output bit df);
    @(negedge clk); idle();
    sq_valid = 1; sq_seq = s;
    #1 nins = int'(sq_issued); sw = ev_switch; df = ev_defer;
  endtask

  task automatic step();
    @(negedge clk); idle();
  endtask

  initial begin
    int s1[$], s2[$], s3[$];
    logic [W-1:0] go, dly;
    int nins, a_bits, clears;
    bit sw, df;
    idle();
    disp_rob = '0; iss_rob = '0; cmt_rob = '0; disp_seq = '0; res_seq = '0;
    disp_pc = '0; sq_seq = '0;
    pick_pcs();
    repeat (2) @(posedge clk);
    rst_n = 1;

    // step 1
    dispatch('{0, 1, 2, 3}, '{0, 1, 2, 3}, s1);
    dispatch('{4, 5}, '{4, 5}, s2);
    step();
    chk(hq_count == 3, "step 1: three handles queued");
    issue('{0, 1, 2, 3}, go, dly);
    chk(go == 4'b1111, "step 1: H1 X H2 S issue");
    issue('{4, 5}, go, dly);
    chk(go == 4'b0011, "step 1: S H3 issue");

    // step 2: H2 (seq s1[2]) misspeculates
    squash(s1[2], nins, sw, df);
    chk(nins == 3, "step 2: S S H3 inserted");
    chk(!sw && !df, "step 2: no switch, no deferral");
    step();
    a_bits = int'(bf_count[0]);
    chk(active == 0 && a_bits > B / 2 && bf_count[1] == 0, "step 2: filter A holds them");
    chk(hq_count == 3, "step 2: squashed H3 stays in the queue");

    // step 3: Y S S H3 on the new path, ROB slots 3..6
    dispatch('{6, 3, 4, 5}, '{3, 4, 5, 6}, s3);
    issue('{3, 4, 5, 6}, go, dly);
    chk(go == 4'b0001 && dly == 4'b1110, "step 3: Y issues, S S H3 delayed");
    step();
    chk(hq_count == 4, "step 3: H3 queued again");

    // step 4: H1 misspeculates; X H2 Y issued, S S H3 did not
    squash(s1[0], nins, sw, df);
    chk(nins == 3, "step 4: X H2 Y inserted");
    chk(sw, "step 4: filter A more than half full, switch to B");
    chk(!df, "step 4: H1 still live, no deferral");
    step();
    chk(active == 1 && int'(bf_count[0]) == a_bits && bf_count[1] > 0,
        "step 4: filter B active, A kept");

    // step 5: H1 replays the code twice; nothing younger issues
    for (int rep = 0; rep < 2; rep++) begin
      dispatch('{1, 2, 6, 3}, '{1, 2, 3, 4}, s1);
      dispatch('{4, 5}, '{5, 6}, s2);
      issue('{1, 2, 3, 4}, go, dly);
      chk(go == 4'b0000 && dly == 4'b1111, "step 5: X H2 Y S delayed");
      issue('{5, 6}, go, dly);
      chk(go == 4'b0000 && dly == 4'b0011, "step 5: S H3 delayed");
      issue('{0}, go, dly);
      chk(!dly[0], "step 5: H1 at the head is never delayed");
      squash(1, nins, sw, df);   // H1 (sequence 1) squashes everything after it
      chk(nins == 0, "step 5: nothing to insert");
      step();
    end
    chk(int'(bf_count[0]) == a_bits && bf_count[1] > 0, "step 5: filters unchanged");

    // step 6: H1 resolves; the squashed handles drain and clear the filters
    @(negedge clk); idle();
    res_valid[0] = 1; res_seq[0] = 1;
    cmt_valid[0] = 1; cmt_rob[0] = 3'd0;
    clears = 0;
    for (int c = 0; c < 10; c++) begin
      step();
      clears += $countones(ev_clear);
    end
    chk(clears == 2, "step 6: both filters cleared");
    chk(bf_count[0] == 0 && bf_count[1] == 0, "step 6: filters empty");
    chk(hq_count == 0, "step 6: handle queue empty");
    dispatch('{1, 2, 6, 3}, '{1, 2, 3, 4}, s1);
    dispatch('{4, 5}, '{5, 6}, s2);
    issue('{1, 2, 3, 4}, go, dly);
    chk(go == 4'b1111, "step 6: X H2 Y S issue");
    issue('{5, 6}, go, dly);
    chk(go == 4'b0011, "step 6: S H3 issue");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
