// xgboost_core: the streaming inference engine. It scores one input word per
// clock (initiation interval 1) and returns one score per input, in order.
//
// Pipeline (one register stage each, nine in all):
//   A      input register: the 448 feature bits of an accepted word
//   B      tree-value register: the outputs of the N_TREES tree processing
//          units, all evaluated in parallel from register A
//   C..I   the seven stages of the registered adder tree
// A word accepted on s_axis in clock n gives its score on m_axis in clock
// n + 9 when nothing stalls. Each feature of a tree node is wired to the node
// by fixed index (xgb_pkg::default_tree_fidx with MODEL_SEED), as an HDL
// model generated from a trained model would be; thresholds and leaf values
// come from the model registers through `params`.
//
// Flow control: the whole pipeline advances together when the output stage is
// empty or taken (adv = !m_axis.tvalid || m_axis.tready); s_axis.tready is
// adv. A full output FIFO thus stalls the pipeline and then the input, and
// no result is dropped. Empty slots (no input word) travel as bubbles. tlast
// travels with its word and marks the score of that word. The score, a signed
// SUM_W-bit number, sits sign-extended in the 512-bit output word.
//
// Follows the paper: tree units, seven-stage adder with 50/25/13/7/4/2/1
// units, one inference per clock, nine-clock latency, 512-bit stream ports,
// 4-bit features. This design's own choices: the stall scheme, tlast
// handling, the feature packing and the output word layout.
module xgboost_core
  import xgb_pkg::*;
#(
  parameter int unsigned N_TREES    = NUM_TREES,
  parameter int unsigned MODEL_SEED = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  axis_if.snk                        s_axis,
  axis_if.src                        m_axis,
  input  tree_params_t [N_TREES-1:0] params
);
  localparam int unsigned N_STAGES = (N_TREES > 1) ? $clog2(N_TREES) : 1;
  localparam int unsigned OUT_W    = LEAF_W + N_STAGES;
  localparam int unsigned LAT      = N_STAGES + 2;   // A + B + adder stages

  logic adv;
  assign adv           = !m_axis.tvalid || m_axis.tready;
  assign s_axis.tready = adv;

  // Stage A: input feature register.
  feature_t [NUM_FEATURES-1:0] feat_q;
  always_ff @(posedge clk) begin
    if (adv) feat_q <= s_axis.tdata[NUM_FEATURES*FEAT_W-1:0];
  end

  // Tree processing units and stage B: tree-value register.
  leaf_t tv      [N_TREES];
  leaf_t tv_q    [N_TREES];
  for (genvar t = 0; t < N_TREES; t++) begin : g_tree
    localparam tree_fidx_t FIDX = default_tree_fidx(MODEL_SEED, t);
    feature_t [NUM_NODES-1:0] node_feat;
    for (genvar n = 0; n < NUM_NODES; n++) begin : g_node
      assign node_feat[n] = feat_q[FIDX[n]];
    end
    tree_processing_unit u_tpu (
      .feat  (node_feat),
      .params(params[t]),
      .tv    (tv[t])
    );
    always_ff @(posedge clk) begin
      if (adv) tv_q[t] <= tv[t];
    end
  end

  // Stages C..I: registered adder tree.
  logic signed [OUT_W-1:0] score;
  adder_tree #(
    .N_IN    (N_TREES),
    .IN_W    (LEAF_W),
    .N_STAGES(N_STAGES),
    .OUT_W   (OUT_W)
  ) u_add (
    .clk    (clk),
    .en     (adv),
    .in_vals(tv_q),
    .sum    (score)
  );

  // Valid and tlast travel alongside the data, one bit per stage.
  logic [LAT-1:0] vld_q;
  logic [LAT-1:0] last_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q  <= '0;
      last_q <= '0;
    end else if (adv) begin
      vld_q  <= {vld_q[LAT-2:0],  s_axis.tvalid};
      last_q <= {last_q[LAT-2:0], s_axis.tvalid && s_axis.tlast};
    end
  end

  assign m_axis.tvalid = vld_q[LAT-1];
  assign m_axis.tlast  = last_q[LAT-1];
  assign m_axis.tdata  = AXIS_W'(score);

endmodule
