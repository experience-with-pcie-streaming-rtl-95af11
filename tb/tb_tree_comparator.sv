// tb_tree_comparator: exhaustive test of the node comparator. Every pair of
// 4-bit feature and threshold is applied; the expected bit comes from a
// subtraction done in integer arithmetic (right branch when the difference
// is not negative).
module tb_tree_comparator;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [3:0] feature, threshold;
  logic       go_right;

  always #5 clk = ~clk;

  tree_comparator #(.W(4)) dut (.feature(feature), .threshold(threshold), .go_right(go_right));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 16; f++) begin
      for (int t = 0; t < 16; t++) begin
        feature = 4'(f); threshold = 4'(t);
        @(posedge clk);
        checks++;
        if (go_right !== ((f - t) >= 0)) begin
          failures++;
          $display("FAIL f=%0d t=%0d go_right=%0b", f, t, go_right);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
