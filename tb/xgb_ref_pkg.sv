// xgb_ref_pkg: reference model used by the engine testbenches.
//
// ref_score walks every tree of the ensemble from the root, one compare per
// level (feature >= threshold goes right; children of node n are 2n+1 and
// 2n+2), adds the reached leaves as integers and returns the total. It reads
// the features from a 512-bit input word (feature i at bits [4i+3:4i]) and
// the node-to-feature wiring from xgb_pkg::default_tree_fidx. rand_word makes
// a random input word with the unused upper bits random as well.
package xgb_ref_pkg;
  import xgb_pkg::*;

  function automatic int ref_score(input logic [AXIS_W-1:0] w,
                                   input tree_params_t p [],
                                   input int unsigned seed);
    int s = 0;
    for (int t = 0; t < p.size(); t++) begin
      tree_fidx_t fi;
      int node, idx;
      fi   = default_tree_fidx(seed, t);
      node = 0;
      idx  = 0;
      for (int lvl = 0; lvl < TREE_DEPTH; lvl++) begin
        int f, b;
        f    = int'(w[int'(fi[node]) * FEAT_W +: FEAT_W]);
        b    = (f >= int'(p[t].thr[node])) ? 1 : 0;
        idx  = 2 * idx + b;
        node = 2 * node + 1 + b;
      end
      s += int'(p[t].leaf[idx]);
    end
    return s;
  endfunction

  function automatic logic [AXIS_W-1:0] rand_word();
    logic [AXIS_W-1:0] w;
    for (int i = 0; i < AXIS_W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  // Expected output word: the score sign-extended to the full width.
  function automatic logic [AXIS_W-1:0] score_word(input int s);
    logic signed [AXIS_W-1:0] w;
    w = AXIS_W'(s);
    return w;
  endfunction
endpackage
