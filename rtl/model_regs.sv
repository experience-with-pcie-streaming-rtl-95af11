// model_regs: the register file holding the model parameters (thresholds and
// leaf values) of every tree.
//
// The paper keeps the model parameters in registers next to the tree
// processing units. Each tree's entry (7 four-bit thresholds and 8 signed
// leaf values, 156 bits) is one register. On reset every entry takes the
// built-in default model (xgb_pkg::default_tree_params with MODEL_SEED). A
// write port replaces one tree's entry per clock: when wr_en is high at a
// rising edge, entry wr_tree takes wr_params and is used from the next clock
// on. Writes to a tree number at or above N_TREES are ignored. The write port
// and the reset contents are this design's choices; the paper does not say
// how the registers are loaded. Reset is synchronous and active low.
module model_regs
  import xgb_pkg::*;
#(
  parameter int unsigned N_TREES    = NUM_TREES,
  parameter int unsigned MODEL_SEED = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [TREE_IDX_W-1:0]        wr_tree,
  input  tree_params_t                 wr_params,
  output tree_params_t [N_TREES-1:0]   params
);
  for (genvar t = 0; t < N_TREES; t++) begin : g_tree
    localparam tree_params_t RESET_VAL = default_tree_params(MODEL_SEED, t);
    always_ff @(posedge clk) begin
      if (!rst_n)
        params[t] <= RESET_VAL;
      else if (wr_en && (wr_tree == TREE_IDX_W'(t)))
        params[t] <= wr_params;
    end
  end
endmodule
