// issue_gate_tb: the issue decision against its rule, over random inputs
// (including sequence numbers near the wrap point of a 6-bit counter) and a
// few directed cases: an instruction is delayed only when the protection is
// on, it hits in a filter, and an older non-squashed handle exists; the
// oldest handle itself and anything older than it always issue.
module issue_gate_tb;
  localparam int W = 8, SW = 6;
  logic enable, oldest_valid;
  logic [W-1:0] iss_valid, bf_hit, iss_delay, iss_go;
  logic [W-1:0][SW-1:0] iss_seq;
  logic [SW-1:0] oldest_seq;
  int checks = 0, failures = 0, ndelay = 0;
  logic clk = 0;

  issue_gate #(.P_W(W), .P_SEQ_W(SW)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      enable       = ($urandom % 8) != 0;
      oldest_valid = ($urandom % 6) != 0;
      oldest_seq   = SW'($urandom);
      iss_valid    = W'($urandom);
      bf_hit       = W'($urandom);
      for (int p = 0; p < W; p++)
        // distance from the oldest handle in [-8, 23]
        iss_seq[p] = oldest_seq + SW'(int'($urandom % 32) - 8);
      #1;
      for (int p = 0; p < W; p++) begin
        automatic int d = int'(SW'(iss_seq[p] - oldest_seq));
        automatic bit spec = oldest_valid && d != 0 && d < 32;
        automatic bit exp  = enable && iss_valid[p] && bf_hit[p] && spec;
        chk(iss_delay[p] == exp, "delay");
        chk(iss_go[p] == (iss_valid[p] && !exp), "go");
        if (exp) ndelay++;
      end
    end
    // directed: the oldest handle itself is never delayed
    enable = 1; oldest_valid = 1; oldest_seq = 6'd63; iss_valid = '1; bf_hit = '1;
    iss_seq = '0;
    iss_seq[0] = 6'd63; iss_seq[1] = 6'd0; iss_seq[2] = 6'd62;
    #1;
    chk(!iss_delay[0], "oldest handle not delayed");
    chk(iss_delay[1], "younger across wrap delayed");
    chk(!iss_delay[2], "older not delayed");
    chk(ndelay > 100, "delays seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
