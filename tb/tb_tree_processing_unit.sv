// tb_tree_processing_unit: random trees and random features. The expected
// tree value is found by a root-to-leaf walk in the testbench, one compare per
// level, instead of the unit's all-compares-at-once structure.
module tb_tree_processing_unit;
  import xgb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  feature_t [NUM_NODES-1:0] feat;
  tree_params_t             params;
  leaf_t                    tv;

  always #5 clk = ~clk;

  tree_processing_unit dut (.feat(feat), .params(params), .tv(tv));

  function automatic leaf_t walk(input feature_t [NUM_NODES-1:0] f, input tree_params_t p);
    int node = 0, idx = 0;
    for (int lvl = 0; lvl < TREE_DEPTH; lvl++) begin
      int b;
      b    = (f[node] >= p.thr[node]) ? 1 : 0;
      idx  = idx * 2 + b;
      node = 2 * node + 1 + b;
    end
    return p.leaf[idx];
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int leaf_hits [NUM_LEAVES];
    foreach (leaf_hits[i]) leaf_hits[i] = 0;
    for (int r = 0; r < 4000; r++) begin
      for (int n = 0; n < NUM_NODES; n++) begin
        feat[n]       = feature_t'($urandom);
        params.thr[n] = feature_t'($urandom);
      end
      for (int l = 0; l < NUM_LEAVES; l++) params.leaf[l] = leaf_t'($urandom);
      @(posedge clk);
      checks++;
      if (tv !== walk(feat, params)) begin
        failures++;
        $display("FAIL tv=%0d expected %0d", tv, walk(feat, params));
      end
      for (int l = 0; l < NUM_LEAVES; l++) if (tv == params.leaf[l]) leaf_hits[l]++;
    end
    // every leaf must have been reached at least once
    for (int l = 0; l < NUM_LEAVES; l++) begin
      checks++;
      if (leaf_hits[l] == 0) begin
        failures++;
        $display("FAIL leaf %0d never reached", l);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
