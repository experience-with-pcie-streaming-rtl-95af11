// tb_model_regs: the model register file at its default 100 trees. After
// reset every entry must hold the built-in model. Random writes then update a
// testbench copy of the table; after each write the whole table is compared
// with the copy, so a write to the wrong tree or a lost write shows. Writes
// to tree numbers 100..127 must change nothing.
module tb_model_regs;
  import xgb_pkg::*;
  localparam int unsigned NT = NUM_TREES;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  logic wr_en;
  logic [TREE_IDX_W-1:0] wr_tree;
  tree_params_t          wr_params;
  tree_params_t [NT-1:0] params;
  tree_params_t          shadow [NT];

  always #5 clk = ~clk;

  model_regs #(.N_TREES(NT), .MODEL_SEED(1)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_tree(wr_tree),
    .wr_params(wr_params), .params(params));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(input string what);
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (params[t] !== shadow[t]) begin
        failures++;
        $display("FAIL %s: tree %0d differs", what, t);
      end
    end
  endtask

  initial begin
    wr_en = 1'b0; wr_tree = '0; wr_params = '0;
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NT; t++) shadow[t] = default_tree_params(1, t);
    compare_all("reset");
    for (int r = 0; r < 300; r++) begin
      wr_en     = ($urandom_range(0, 3) != 0);
      wr_tree   = TREE_IDX_W'($urandom_range(0, 127));
      wr_params = {$urandom, $urandom, $urandom, $urandom, $urandom};
      @(posedge clk); #1;
      if (wr_en && int'(wr_tree) < NT) shadow[wr_tree] = wr_params;
      compare_all("write");
    end
    wr_en = 1'b0;
    // reset again restores the built-in model
    rst_n = 1'b0;
    @(posedge clk); #1 rst_n = 1'b1;
    for (int t = 0; t < NT; t++) shadow[t] = default_tree_params(1, t);
    compare_all("second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
