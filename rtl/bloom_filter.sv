// bloom_filter: one binary Bloom filter of P_BITS bits holding the hashed PCs
// of squashed instructions.
//
// Insertion ORs a whole P_BITS-wide mask into the filter in one cycle, so all
// instructions of a squash go in together.  Elements cannot be removed one by
// one: the only way to forget is the bulk reset (clear), as the scheme
// prescribes for the simplest binary filter.  If clear and an insertion come
// in the same cycle the filter is reset and then receives the new mask.
//
// Each of the P_QPORTS query ports presents P_NUM_HASH bit indices and gets a
// hit when all of them are set (combinational, same cycle).  count is the
// number of set bits, used by the controller to judge saturation.
module bloom_filter
  import dos_pkg::*;
#(
  parameter int unsigned P_BITS     = BF_BITS,
  parameter int unsigned P_NUM_HASH = NUM_HASH,
  parameter int unsigned P_QPORTS   = WIDTH
) (
  input  logic                                             clk,
  input  logic                                             rst_n,
  input  logic                                             clear,
  input  logic [P_BITS-1:0]                                ins_mask,
  input  logic [P_QPORTS-1:0][P_NUM_HASH-1:0][$clog2(P_BITS)-1:0] q_idx,
  output logic [P_QPORTS-1:0]                              q_hit,
  output logic [P_BITS-1:0]                                bits,
  output logic [$clog2(P_BITS+1)-1:0]                      count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bits <= '0;
    else        bits <= (clear ? '0 : bits) | ins_mask;
  end

  always_comb begin
    for (int p = 0; p < P_QPORTS; p++) begin
      q_hit[p] = 1'b1;
      for (int k = 0; k < P_NUM_HASH; k++)
        q_hit[p] = q_hit[p] & bits[q_idx[p][k]];
    end
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < P_BITS; i++)
      count = count + ($clog2(P_BITS+1))'(bits[i]);
  end
endmodule
