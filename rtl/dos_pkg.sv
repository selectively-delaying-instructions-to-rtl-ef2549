// dos_pkg: shared sizes, types and the hash-matrix generator of the
// Delay-on-Squash replay-attack defence.
//
// Sizes that the evaluated configuration fixes: two Bloom filters of 64 bits,
// two hash functions per filter, an 8-wide issue / execute / commit machine.
// Sizes that are this design's own choice: a 192-entry reorder buffer (ROB),
// a handle queue as deep as the ROB, 64-bit PCs and 32-bit dynamic sequence
// numbers.  Sequence numbers grow monotonically over the whole run (they are
// not reused after a squash) and are compared modulo 2^SEQ_W, which is valid
// while fewer than 2^(SEQ_W-1) instructions separate any two live ones.
package dos_pkg;

  localparam int unsigned WIDTH       = 8;    // issue / dispatch / commit width
  localparam int unsigned ROB_ENTRIES = 192;  // reorder buffer entries
  localparam int unsigned HQ_DEPTH    = 192;  // handle queue entries
  localparam int unsigned NUM_FILTERS = 2;    // rolling Bloom filters
  localparam int unsigned BF_BITS     = 64;   // bits per filter
  localparam int unsigned NUM_HASH    = 2;    // hash functions per filter
  localparam int unsigned PC_W        = 64;
  localparam int unsigned SEQ_W       = 32;

  // One 64-bit mask per (hash function, index bit) of an H3 hash: index bit
  // b of hash k is the parity of (pc & h3_mask(k, b)).  The masks come from a
  // xorshift64 generator seeded with the golden-ratio constant times
  // (64k + b + 1), so they are fixed constants.
  function automatic logic [63:0] h3_mask(input int unsigned k,
                                          input int unsigned b);
    logic [63:0] x;
    x = 64'h9E37_79B9_7F4A_7C15 * (64'(k) * 64'd64 + 64'(b) + 64'd1);
    for (int i = 0; i < 8; i++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 7);
      x = x ^ (x << 17);
    end
    return x;
  endfunction

endpackage
