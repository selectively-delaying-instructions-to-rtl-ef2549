// pc_hash: the NUM_HASH hash functions that map an instruction PC to bit
// positions of a BF_BITS-bit Bloom filter.
//
// Each hash is an H3 hash: index bit b of hash k is the XOR of the PC bits
// selected by a fixed mask (dos_pkg::h3_mask).  All PC bits take part, so
// variable-length code is hashed as well as aligned code.  Purely
// combinational: the hashes are
// computed once at dispatch and stored with the instruction, as the scheme
// requires; how the hashes are built is this design's choice.
//
// Ports: pc in, idx[k] out, one log2(BF_BITS)-bit index per hash.
module pc_hash
  import dos_pkg::*;
#(
  parameter int unsigned P_PC_W     = PC_W,
  parameter int unsigned P_NUM_HASH = NUM_HASH,
  parameter int unsigned P_BF_BITS  = BF_BITS
) (
  input  logic [P_PC_W-1:0]                              pc,
  output logic [P_NUM_HASH-1:0][$clog2(P_BF_BITS)-1:0]   idx
);
  localparam int unsigned IW = $clog2(P_BF_BITS);

  logic [63:0] pc64;
  assign pc64 = 64'(pc);

  always_comb begin
    for (int k = 0; k < P_NUM_HASH; k++)
      for (int b = 0; b < IW; b++)
        idx[k][b] = ^(pc64 & h3_mask(k, b));
  end
endmodule
