// tree_encoder: the 7-to-3 encoder of a depth-3 tree processing unit.
//
// All seven node compares of a tree are evaluated in parallel; only three of
// them lie on the path actually taken. The encoder follows that path: the root
// bit c[0] selects which second-level node matters (c[1] or c[2]), and the two
// bits together select one of the four third-level nodes (c[3]..c[6]). The
// three path bits, root first, form the leaf index {s2, s1, s0}, which drives
// the select of the 8:1 leaf multiplexer. Node numbering (breadth first) and
// bit order are this design's choice; the paper only says that a 7-to-3
// encoder indexes one of the 8 leaves. A tree that is shallower on some path
// is handled by repeating its leaf value in the leaf table, so one encoder
// serves every tree. The top index bit s2 is the root compare itself, wired
// straight through. Purely combinational.
module tree_encoder (
  input  logic [6:0] cmp,     // compare results, index = node number
  output logic [2:0] leaf_sel
);
  logic s2, s1, s0;
  always_comb begin
    s2 = cmp[0];
    s1 = s2 ? cmp[2] : cmp[1];
    unique case ({s2, s1})
      2'b00:   s0 = cmp[3];
      2'b01:   s0 = cmp[4];
      2'b10:   s0 = cmp[5];
      default: s0 = cmp[6];
    endcase
    leaf_sel = {s2, s1, s0};
  end
endmodule
