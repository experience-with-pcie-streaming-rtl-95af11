// xgb_pkg: constants, types and the built-in tree ensemble shared by the
// streaming gradient-boosted-tree inference engine.
//
// The engine scores one 512-bit input word per clock. A word carries 112
// features of 4 bits each, packed feature i at bits [4i+3:4i]; the upper 64
// bits are unused. The model is 100 trees of depth 3: each tree has 7 internal
// nodes (a threshold compare) and 8 leaves (a signed tree value).
//
// Figures taken from the paper: 100 trees, depth 3, 7 compares and 8 leaves
// per tree, 112 features of 4 bits (448 bits of a 512-bit word), 7 adder
// stages, a 16-deep output FIFO. This design's own choices: the 16-bit signed
// leaf values, the node numbering and branch direction, and the synthetic
// default model below (the trained model is not published). Node numbering is
// breadth first: node 0 is the root, nodes 1-2 the second level, nodes 3-6 the
// third; a compare that is true (feature >= threshold) takes the right branch.
package xgb_pkg;

  localparam int unsigned NUM_TREES    = 100;
  localparam int unsigned TREE_DEPTH   = 3;
  localparam int unsigned NUM_NODES    = (1 << TREE_DEPTH) - 1;  // 7
  localparam int unsigned NUM_LEAVES   = 1 << TREE_DEPTH;        // 8
  localparam int unsigned NUM_FEATURES = 112;
  localparam int unsigned FEAT_W       = 4;
  localparam int unsigned FIDX_W       = $clog2(NUM_FEATURES);   // 7
  localparam int unsigned AXIS_W       = 512;
  localparam int unsigned LEAF_W       = 16;
  localparam int unsigned ADD_STAGES   = 7;
  localparam int unsigned SUM_W        = LEAF_W + ADD_STAGES;    // 23
  localparam int unsigned FIFO_DEPTH   = 16;
  localparam int unsigned TREE_IDX_W   = 7;

  typedef logic [FEAT_W-1:0]        feature_t;
  typedef logic signed [LEAF_W-1:0] leaf_t;
  typedef logic signed [SUM_W-1:0]  score_t;
  typedef logic [FIDX_W-1:0]        fidx_t;

  // Model parameters (MP) of one tree: node thresholds and leaf values.
  typedef struct packed {
    feature_t [NUM_NODES-1:0]  thr;
    leaf_t    [NUM_LEAVES-1:0] leaf;
  } tree_params_t;

  // Feature index compared at each node of one tree (fixed wiring).
  typedef fidx_t [NUM_NODES-1:0] tree_fidx_t;

  // 32-bit integer hash (xor-shift-multiply), used to derive the default model.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Default thresholds and leaves of tree t. Leaves lie in [-2048, 2047] so
  // that the sum of 100 of them always fits SUM_W bits.
  function automatic tree_params_t default_tree_params(input int unsigned seed,
                                                       input int unsigned t);
    tree_params_t p;
    logic [31:0]  h;
    for (int unsigned n = 0; n < NUM_NODES; n++) begin
      h = mix32(32'(seed * 32'h9e3779b9) ^ 32'(t * 64 + n + 1));
      p.thr[n] = h[FEAT_W-1:0];
    end
    for (int unsigned l = 0; l < NUM_LEAVES; l++) begin
      h = mix32(32'(seed * 32'h85ebca6b) ^ 32'(t * 64 + 32 + l));
      p.leaf[l] = leaf_t'(int'(h % 4096) - 2048);
    end
    return p;
  endfunction

  // Default feature index of every node of tree t, each below NUM_FEATURES.
  function automatic tree_fidx_t default_tree_fidx(input int unsigned seed,
                                                   input int unsigned t);
    tree_fidx_t f;
    logic [31:0] h;
    for (int unsigned n = 0; n < NUM_NODES; n++) begin
      h = mix32(32'(seed * 32'hc2b2ae35) ^ 32'(t * 64 + 16 + n));
      f[n] = fidx_t'(h % NUM_FEATURES);
    end
    return f;
  endfunction

endpackage
