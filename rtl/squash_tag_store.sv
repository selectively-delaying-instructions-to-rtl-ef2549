// squash_tag_store: the Delay-on-Squash state kept beside each ROB entry.
//
// At dispatch the instruction's precomputed Bloom hash indices and its
// sequence number are written into the entry of its ROB index.  When the
// instruction issues, the entry's issued flag is set; commit frees the entry.
// On a squash every valid entry younger than sq_seq is removed, and those of
// them that had issued contribute their hash bits to sq_mask, the one-hot
// union that the filter controller ORs into the active Bloom filter.
// Instructions that never issued (for example because they were delayed)
// are not inserted.  All ROB entries are scanned in parallel, so the whole
// insertion takes the squash cycle itself; the scheme assumes this work is
// hidden behind the back-end recovery after a squash.
//
// The issue ports read the stored hashes and sequence number of the entry
// named by iss_rob (combinational) and set its issued flag when iss_mark is
// high.  Keeping the hashes with the ROB entry follows the scheme; the port
// arrangement is this design's.
module squash_tag_store
  import dos_pkg::*;
#(
  parameter int unsigned P_ENTRIES  = ROB_ENTRIES,
  parameter int unsigned P_SEQ_W    = SEQ_W,
  parameter int unsigned P_W        = WIDTH,
  parameter int unsigned P_BITS     = BF_BITS,
  parameter int unsigned P_NUM_HASH = NUM_HASH
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  logic [P_W-1:0]                                  disp_valid,
  input  logic [P_W-1:0][$clog2(P_ENTRIES)-1:0]           disp_rob,
  input  logic [P_W-1:0][P_SEQ_W-1:0]                     disp_seq,
  input  logic [P_W-1:0][P_NUM_HASH-1:0][$clog2(P_BITS)-1:0] disp_idx,
  input  logic [P_W-1:0][$clog2(P_ENTRIES)-1:0]           iss_rob,
  input  logic [P_W-1:0]                                  iss_mark,
  output logic [P_W-1:0][P_SEQ_W-1:0]                     iss_seq,
  output logic [P_W-1:0][P_NUM_HASH-1:0][$clog2(P_BITS)-1:0] iss_idx,
  input  logic [P_W-1:0]                                  cmt_valid,
  input  logic [P_W-1:0][$clog2(P_ENTRIES)-1:0]           cmt_rob,
  input  logic                                            sq_valid,
  input  logic [P_SEQ_W-1:0]                              sq_seq,
  output logic [P_BITS-1:0]                               sq_mask,
  output logic [$clog2(P_ENTRIES+1)-1:0]                  sq_issued
);
  localparam int unsigned IW = $clog2(P_BITS);

  logic [P_ENTRIES-1:0]                               v_q, iss_q;
  logic [P_ENTRIES-1:0][P_SEQ_W-1:0]                  seq_q;
  logic [P_ENTRIES-1:0][P_NUM_HASH-1:0][IW-1:0]       idx_q;

  function automatic logic younger(input logic [P_SEQ_W-1:0] a,
                                   input logic [P_SEQ_W-1:0] b);
    logic [P_SEQ_W-1:0] d;
    d = a - b;
    return (d != '0) && !d[P_SEQ_W-1];
  endfunction

  logic [P_ENTRIES-1:0] kill;
  always_comb begin
    for (int e = 0; e < P_ENTRIES; e++)
      kill[e] = sq_valid && v_q[e] && younger(seq_q[e], sq_seq);
  end

  always_comb begin
    sq_mask   = '0;
    sq_issued = '0;
    for (int e = 0; e < P_ENTRIES; e++) begin
      if (kill[e] && iss_q[e]) begin
        sq_issued = sq_issued + 1'b1;
        for (int k = 0; k < P_NUM_HASH; k++)
          sq_mask[idx_q[e][k]] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < P_W; p++) begin
      iss_seq[p] = seq_q[iss_rob[p]];
      iss_idx[p] = idx_q[iss_rob[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      iss_q <= '0;
      seq_q <= '0;
      idx_q <= '0;
    end else begin
      for (int p = 0; p < P_W; p++)
        if (iss_mark[p]) iss_q[iss_rob[p]] <= 1'b1;
      for (int p = 0; p < P_W; p++)
        if (cmt_valid[p]) v_q[cmt_rob[p]] <= 1'b0;
      for (int e = 0; e < P_ENTRIES; e++)
        if (kill[e]) v_q[e] <= 1'b0;
      for (int p = 0; p < P_W; p++) begin
        if (disp_valid[p]) begin
          v_q[disp_rob[p]]   <= 1'b1;
          iss_q[disp_rob[p]] <= 1'b0;
          seq_q[disp_rob[p]] <= disp_seq[p];
          idx_q[disp_rob[p]] <= disp_idx[p];
        end
      end
    end
  end
endmodule
