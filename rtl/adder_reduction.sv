// adder_reduction: signed adder tree over N inputs (one output column).
//
// Sums the products delivered by the N banks for the same weight column into
// one partial dot product ("final addition" across banks). The inputs are
// sign-extended to OW bits and added pairwise, level by level, in a balanced
// binary tree of ceil(log2 N) levels. Combinational; the user registers the
// result. The tree structure is this design's own; the paper draws the
// reduction only as a block.
module adder_reduction #(
  parameter int unsigned N  = 256,
  parameter int unsigned IW = 16,
  parameter int unsigned OW = 32
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned NP     = 1 << LEVELS;

  // node[l][i]: level l has NP >> l partial sums
  logic signed [OW-1:0] node [LEVELS+1][NP];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++) begin
      for (int i = 0; i < NP; i++) node[l][i] = '0;
    end
    for (int i = 0; i < N; i++) node[0][i] = OW'(in[i]);
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < (NP >> l); i++) begin
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
      end
    end
    sum = node[LEVELS][0];
  end

endmodule
