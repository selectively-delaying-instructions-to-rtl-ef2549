// pc_hash_tb: checks the PC hash functions at their default sizes (64-bit
// PC, two hashes, 64-bit filter).  Each index is compared with a reference
// H3 hash computed here bit by bit from its own copy of the mask generator;
// the test also checks that the two hashes spread 4096 random PCs over all
// 64 positions and that they disagree for most PCs, which a Bloom filter
// with two hash functions needs.
module pc_hash_tb;
  import dos_pkg::*;

  logic [PC_W-1:0]                         pc;
  logic [NUM_HASH-1:0][$clog2(BF_BITS)-1:0] idx;
  int checks = 0, failures = 0;
  logic clk = 0;

  pc_hash dut (.pc, .idx);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_mask(int k, int b);
    logic [63:0] x;
    x = 64'h9E3779B97F4A7C15 * 64'(k * 64 + b + 1);
    repeat (8) begin
      x ^= x << 13;
      x ^= x >> 7;
      x ^= x << 17;
    end
    return x;
  endfunction

  function automatic int ref_idx(logic [63:0] p, int k);
    int r = 0;
    for (int b = 0; b < 6; b++) begin
      logic m = 0;
      logic [63:0] q = ref_mask(k, b);
      for (int i = 0; i < 64; i++) m ^= p[i] & q[i];
      r |= int'(m) << b;
    end
    return r;
  endfunction

  int hist [2][64];
  int same;
  initial begin
    same = 0;
    for (int k = 0; k < 2; k++) for (int i = 0; i < 64; i++) hist[k][i] = 0;
    for (int n = 0; n < 4096; n++) begin
      pc = (n < 2048) ? 64'h0000_7f00_0040_0000 + 64'(n) * 4
                      : {$urandom, $urandom};
      #1;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (int'(idx[k]) != ref_idx(pc, k)) begin
          failures++;
          if (failures < 10)
            $display("mismatch pc=%h k=%0d got %0d exp %0d", pc, k, idx[k],
                     ref_idx(pc, k));
        end
        hist[k][idx[k]]++;
      end
      if (idx[0] == idx[1]) same++;
    end
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (hist[k][i] < 20 || hist[k][i] > 120) begin
          failures++;
          $display("hash %0d bucket %0d count %0d out of range", k, i, hist[k][i]);
        end
      end
    checks++;
    if (same > 4096 / 16) begin
      failures++;
      $display("hashes agree on %0d of 4096 PCs", same);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
