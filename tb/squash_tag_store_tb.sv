// squash_tag_store_tb: random test of the per-ROB-entry hash store at a small
// size (16 entries, 4 ports, 16-bit filter, 8-bit sequence numbers).  A
// reference copy of every entry is kept here.  Each cycle dispatches into
// free entries, issues and commits random live entries, and now and then
// squashes everything younger than a random live instruction; the read-out
// hashes, the insertion mask (only issued, squashed instructions count) and
// the number of squashed issued instructions are compared with the reference.
module squash_tag_store_tb;
  localparam int N = 16, SW = 8, W = 4, B = 16, NH = 2;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] disp_valid, iss_mark, cmt_valid;
  logic [W-1:0][3:0] disp_rob, iss_rob, cmt_rob;
  logic [W-1:0][SW-1:0] disp_seq, iss_seq;
  logic [W-1:0][NH-1:0][3:0] disp_idx, iss_idx;
  logic sq_valid;
  logic [SW-1:0] sq_seq;
  logic [B-1:0] sq_mask;
  logic [4:0] sq_issued;

  squash_tag_store #(.P_ENTRIES(N), .P_SEQ_W(SW), .P_W(W), .P_BITS(B),
                     .P_NUM_HASH(NH)) dut (.*);

  bit m_v[N], m_iss[N];
  logic [SW-1:0] m_seq[N];
  logic [NH-1:0][3:0] m_idx[N];
  logic [SW-1:0] next_seq = 8'd200;
  int checks = 0, failures = 0, nsq = 0, nunissued = 0;

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
    bit used[N];
    disp_valid = '0; iss_mark = '0; cmt_valid = '0; sq_valid = 0;
    disp_rob = '0; iss_rob = '0; cmt_rob = '0; disp_seq = '0; disp_idx = '0;
    sq_seq = '0;
    foreach (m_v[i]) begin m_v[i] = 0; m_iss[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic [B-1:0] exp_mask;
      int exp_cnt;
      @(negedge clk);
      foreach (used[i]) used[i] = 0;
      disp_valid = '0; iss_mark = '0; cmt_valid = '0; sq_valid = 0;
      // issue reads (any entry) and marks (live, not yet issued)
      for (int p = 0; p < W; p++) begin
        automatic int e = $urandom % N;
        iss_rob[p] = 4'(e);
        if (m_v[e] && !m_iss[e] && !used[e] && $urandom % 2) begin
          iss_mark[p] = 1; used[e] = 1;
        end
      end
      for (int p = 0; p < W; p++) begin
        automatic int e = $urandom % N;
        cmt_rob[p] = 4'(e);
        if (m_v[e] && !used[e] && $urandom % 6 == 0) begin
          cmt_valid[p] = 1; used[e] = 1;
        end
      end
      if ($urandom % 6 == 0) begin
        automatic int e = $urandom % N;
        sq_valid = 1;
        sq_seq   = m_v[e] ? m_seq[e] : next_seq - 8'd10;
      end else begin
        for (int p = 0; p < W; p++) begin
          automatic int e = $urandom % N;
          disp_rob[p] = 4'(e);
          disp_seq[p] = next_seq;
          disp_idx[p] = NH * 4'($urandom);
          if (!m_v[e] && !used[e] && $urandom % 2) begin
            disp_valid[p] = 1; used[e] = 1; next_seq++;
          end
        end
      end
      #1;
      for (int p = 0; p < W; p++) begin
        if (m_v[iss_rob[p]]) begin
          chk(iss_seq[p] == m_seq[iss_rob[p]], "iss_seq");
          chk(iss_idx[p] == m_idx[iss_rob[p]], "iss_idx");
        end
      end
      exp_mask = '0; exp_cnt = 0;
      if (sq_valid)
        for (int e = 0; e < N; e++)
          if (m_v[e] && yng(m_seq[e], sq_seq)) begin
            if (m_iss[e]) begin
              exp_cnt++;
              for (int k = 0; k < NH; k++) exp_mask[m_idx[e][k]] = 1;
            end else nunissued++;
          end
      chk(sq_mask == exp_mask, "sq_mask");
      chk(int'(sq_issued) == exp_cnt, "sq_issued");
      if (sq_valid && exp_cnt > 0) nsq++;
      @(posedge clk);
      for (int p = 0; p < W; p++) if (iss_mark[p]) m_iss[iss_rob[p]] = 1;
      for (int p = 0; p < W; p++) if (cmt_valid[p]) m_v[cmt_rob[p]] = 0;
      if (sq_valid)
        for (int e = 0; e < N; e++)
          if (m_v[e] && yng(m_seq[e], sq_seq)) m_v[e] = 0;
      for (int p = 0; p < W; p++)
        if (disp_valid[p]) begin
          m_v[disp_rob[p]] = 1; m_iss[disp_rob[p]] = 0;
          m_seq[disp_rob[p]] = disp_seq[p]; m_idx[disp_rob[p]] = disp_idx[p];
        end
    end
    chk(nsq > 50, "squashes with insertions");
    chk(nunissued > 0, "squashed instruction that never issued");
    $display("squashes=%0d unissued_squashed=%0d", nsq, nunissued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
