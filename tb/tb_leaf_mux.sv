// tb_leaf_mux: the 8:1 leaf multiplexer is given random leaf sets and every
// select value; the output must equal the chosen leaf.
module tb_leaf_mux;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [7:0][15:0] leaves;
  logic [2:0]       sel;
  logic [15:0]      tv;

  always #5 clk = ~clk;

  leaf_mux #(.W(16)) dut (.leaves(leaves), .sel(sel), .tv(tv));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 50; r++) begin
      for (int i = 0; i < 8; i++) leaves[i] = 16'($urandom);
      for (int s = 0; s < 8; s++) begin
        sel = 3'(s);
        @(posedge clk);
        checks++;
        if (tv !== leaves[s]) begin
          failures++;
          $display("FAIL sel=%0d tv=%h expected %h", s, tv, leaves[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
