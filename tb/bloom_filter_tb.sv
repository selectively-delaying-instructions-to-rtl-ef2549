// bloom_filter_tb: random test of one 64-bit, two-hash filter with eight
// query ports against a reference bit vector kept here.  Each cycle inserts
// a random sparse mask, sometimes bulk-clears (alone or together with an
// insertion), and queries random index pairs; hits, the stored bits and the
// population count are compared with the reference.
module bloom_filter_tb;
  localparam int B = 64, NH = 2, Q = 8;
  logic clk = 0, rst_n = 0, clear;
  logic [B-1:0] ins_mask, bits;
  logic [Q-1:0][NH-1:0][5:0] q_idx;
  logic [Q-1:0] q_hit;
  logic [6:0] count;
  logic [B-1:0] model;
  int checks = 0, failures = 0;

  bloom_filter #(.P_BITS(B), .P_NUM_HASH(NH), .P_QPORTS(Q)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
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

  initial begin
    clear = 0; ins_mask = '0; q_idx = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      clear    = ($urandom % 40) == 0;
      ins_mask = '0;
      if ($urandom % 3 == 0) ins_mask[$urandom % B] = 1'b1;
      if ($urandom % 3 == 0) ins_mask[$urandom % B] = 1'b1;
      for (int p = 0; p < Q; p++)
        for (int k = 0; k < NH; k++) q_idx[p][k] = 6'($urandom);
      #1;
      for (int p = 0; p < Q; p++)
        chk(q_hit[p] == (model[q_idx[p][0]] && model[q_idx[p][1]]), "hit");
      chk(bits == model, "bits");
      chk(int'(count) == $countones(model), "count");
      @(posedge clk);
      model = (clear ? '0 : model) | ins_mask;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
