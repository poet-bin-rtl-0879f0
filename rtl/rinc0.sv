// rinc0 -- RINC-0: a level-wise decision tree over P binary features, held in one LUT.
//
// The tree is trained level by level, so every node of level j tests the same
// feature I_j (I_0 at the root, I_{P-1} just above the leaves). All 2^P root-to-leaf
// paths therefore exist, and evaluating the tree is the same as reading a 2^P-entry
// truth table: the path taken through the levels, one bit per level, is the table
// address. A feature value of 0 takes the left branch and 1 the right branch.
//
// Interface: in[j] is feature I_j; out is the leaf label (the tree's binary class).
// Timing: purely combinational, one LUT deep.
//
// Leaf numbering is this design's choice: the root decision is the most significant
// address bit, so leaf a (bit a of LEAVES) is the a-th leaf from the left when the
// tree is drawn with 0-branches to the left. The default LEAVES is only a placeholder;
// the enclosing layer overrides it with the trained (model) leaves.
module rinc0 import poetbin_pkg::*; #(
  parameter int unsigned P = P_DEF,
  parameter logic [2**P-1:0] LEAVES = {(2**P/8){8'h96}}
) (
  input  logic [P-1:0] in,
  output logic         out
);
  logic [P-1:0] path;  // leaf address, root decision first

  always_comb begin
    path = '0;
    for (int unsigned j = 0; j < P; j++)
      path = {path[P-2:0], in[j]};  // descend one level
    out = LEAVES[path];
  end

  initial assert (P >= 3 && P <= MAX_P) else $error("rinc0: P must be in 3..%0d", MAX_P);
endmodule
