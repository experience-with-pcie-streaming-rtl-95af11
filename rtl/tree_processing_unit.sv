// tree_processing_unit: evaluates one decision tree of depth 3 in a single
// combinational pass.
//
// Seven comparators test the seven input features of the tree (IF1..IF7,
// already picked out of the input word by the caller) against the tree's
// seven thresholds (MP1..MP7). All compares run at once; the 7-to-3 encoder
// turns their results into the index of the leaf that a root-to-leaf walk
// would reach, and an 8:1 multiplexer returns that leaf's value, the tree
// value (TV). This structure is the paper's. The tree has no register of its
// own: the caller registers TV (one pipeline stage for all trees).
module tree_processing_unit
  import xgb_pkg::*;
(
  input  feature_t [NUM_NODES-1:0] feat,    // IF1..IF7, index = node number
  input  tree_params_t             params,  // thresholds and leaf values
  output leaf_t                    tv
);
  logic [NUM_NODES-1:0] cmp;
  logic [2:0]           leaf_sel;

  for (genvar n = 0; n < NUM_NODES; n++) begin : g_cmp
    tree_comparator #(.W(FEAT_W)) u_cmp (
      .feature  (feat[n]),
      .threshold(params.thr[n]),
      .go_right (cmp[n])
    );
  end

  tree_encoder u_enc (
    .cmp     (cmp),
    .leaf_sel(leaf_sel)
  );

  leaf_mux #(.W(LEAF_W)) u_mux (
    .leaves(params.leaf),
    .sel   (leaf_sel),
    .tv    (tv)
  );
endmodule
