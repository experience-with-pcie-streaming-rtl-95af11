// tb_tree_encoder: exhaustive test of the 7-to-3 encoder. For each of the 128
// compare patterns the expected leaf is found by walking the tree from the
// root (node n has children 2n+1 on the left and 2n+2 on the right) and
// collecting the three branch bits, root first.
module tb_tree_encoder;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [6:0] cmp;
  logic [2:0] leaf_sel;

  always #5 clk = ~clk;

  tree_encoder dut (.cmp(cmp), .leaf_sel(leaf_sel));

  function automatic int walk(input logic [6:0] c);
    int node = 0, idx = 0;
    for (int lvl = 0; lvl < 3; lvl++) begin
      idx  = idx * 2 + int'(c[node]);
      node = 2 * node + 1 + int'(c[node]);
    end
    return idx;
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      cmp = 7'(v);
      @(posedge clk);
      checks++;
      if (int'(leaf_sel) != walk(cmp)) begin
        failures++;
        $display("FAIL cmp=%b leaf_sel=%0d expected %0d", cmp, leaf_sel, walk(cmp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
