// find_max -- comparator tree returning the index of the largest of N keys.
//
// The keys are compared pairwise in a binary tree of log2(N) levels; each
// node forwards the larger key and its index.  On equal keys the node keeps
// the left (lower-index) one, so ties go to the lowest index.  The tree
// structure is the one the paper names for the bus arbiter's "Find Max"
// block; the tie rule and the key width are this design's choices.  The
// block is purely combinational.
//
// Ports: vals (N keys of W bits), max_idx (index of a largest key),
// max_val (that key).  For N = 1 the index is one bit wide and always 0.
module find_max #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 17
) (
  input  logic [N-1:0][W-1:0]      vals,
  output logic [((N > 1) ? $clog2(N) : 1)-1:0] max_idx,
  output logic [W-1:0]             max_val
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned L  = 1 << IW;       // leaves, N rounded up to 2^k

  // Heap-ordered tree: node k has children 2k and 2k+1, leaves at L..2L-1.
  logic [2*L-1:1][W-1:0]  tv;
  logic [2*L-1:1][IW-1:0] ti;

  always_comb begin
    tv = '0;
    ti = '0;
    for (int unsigned k = 0; k < L; k++) begin
      tv[L+k] = (k < N) ? vals[k] : '0;
      ti[L+k] = IW'(k);
    end
    for (int k = int'(L) - 1; k >= 1; k--) begin
      if (tv[2*k+1] > tv[2*k]) begin
        tv[k] = tv[2*k+1];
        ti[k] = ti[2*k+1];
      end else begin
        tv[k] = tv[2*k];
        ti[k] = ti[2*k];
      end
    end
  end

  assign max_idx = ti[1];
  assign max_val = tv[1];
endmodule
