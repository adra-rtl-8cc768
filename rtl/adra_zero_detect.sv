// adra_zero_detect: near-memory AND-gate tree that flags an all-zero word.
//
// The difference of two equal operands is zero in every bit. Each input bit is
// inverted and the N inverted bits are combined by a tree of N-1 two-input AND
// gates, matching the "n-1 AND gates for an n-bit comparison" count of the
// design. The tree is laid out as a heap: node k (k < N-1) is the AND of nodes
// 2k+1 and 2k+2, and nodes N-1 .. 2N-2 are the inverted inputs; its depth is
// ceil(log2 N). The inversion (an XNOR output of the sum stage would do the
// same) is this design's choice. Combinational.
module adra_zero_detect #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] d,
  output logic         zero
);
  logic [2*N-2:0] node;

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N-1+i] = ~d[i];
  end
  for (genvar k = 0; k < N - 1; k++) begin : g_and
    assign node[k] = node[2*k+1] & node[2*k+2];
  end

  assign zero = node[0];
endmodule
