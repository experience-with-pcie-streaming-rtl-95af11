// tree_comparator: the compare at one internal node of a decision tree (the
// C1..C7 blocks of a tree processing unit).
//
// It compares one input feature with the node's threshold and returns one
// bit: 1 when feature >= threshold, meaning the right branch is taken. The
// paper gives a two-input comparator with a one-bit result; the direction of
// the compare and the meaning of 1 are this design's choice. Purely
// combinational.
module tree_comparator #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] feature,    // IF: input feature
  input  logic [W-1:0] threshold,  // MP: model parameter of the node
  output logic         go_right
);
  always_comb go_right = (feature >= threshold);
endmodule
