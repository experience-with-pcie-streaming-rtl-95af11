// tb_adder_tree: the 100-input, 7-stage adder tree at its default size.
// Each clock a fresh random set of tree values is applied with a random
// enable. The testbench keeps its own 7-deep shift register of plain integer
// sums, shifted only on enabled clocks, and compares the tree's output with
// its last entry. A first pass with the enable always high checks that a sum
// comes out exactly 7 clocks after its inputs and that a new sum follows on
// every clock.
module tb_adder_tree;
  localparam int N_IN = 100;
  localparam int N_ST = 7;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic en;
  logic signed [15:0] in_vals [N_IN];
  logic signed [22:0] sum;

  int exp_pipe [N_ST];
  bit exp_vld  [N_ST];

  always #5 clk = ~clk;

  adder_tree #(.N_IN(N_IN), .IN_W(16)) dut (.clk(clk), .en(en), .in_vals(in_vals), .sum(sum));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_random(input bit extreme);
    for (int i = 0; i < N_IN; i++)
      in_vals[i] = extreme ? ($urandom_range(0, 1) ? 16'sh7fff : 16'sh8000) : 16'($urandom);
  endtask

  function automatic int ref_sum();
    int s = 0;
    for (int i = 0; i < N_IN; i++) s += int'(in_vals[i]);
    return s;
  endfunction

  task automatic step();
    int s;
    s = ref_sum();
    @(posedge clk);
    if (en) begin
      for (int k = N_ST - 1; k > 0; k--) begin
        exp_pipe[k] = exp_pipe[k-1];
        exp_vld[k]  = exp_vld[k-1];
      end
      exp_pipe[0] = s;
      exp_vld[0]  = 1'b1;
    end
    #1;
    if (exp_vld[N_ST-1]) begin
      checks++;
      if (int'(sum) != exp_pipe[N_ST-1]) begin
        failures++;
        $display("FAIL sum=%0d expected %0d", sum, exp_pipe[N_ST-1]);
      end
    end
  endtask

  initial begin
    int first_sum, cycles;
    foreach (exp_vld[k]) exp_vld[k] = 1'b0;
    // latency: one known input set, then zeros, enable always high
    en = 1'b1;
    for (int i = 0; i < N_IN; i++) in_vals[i] = 16'(i + 1);     // sum 5050
    first_sum = 5050;
    @(posedge clk); #1;
    for (int i = 0; i < N_IN; i++) in_vals[i] = '0;
    cycles = 1;
    while (int'(sum) != first_sum && cycles < 20) begin
      @(posedge clk); #1;
      cycles++;
    end
    checks++;
    if (cycles != N_ST) begin
      failures++;
      $display("FAIL latency %0d clocks, expected %0d", cycles, N_ST);
    end
    // back-to-back, then random enable, then extreme values
    for (int r = 0; r < 300; r++) begin
      en = 1'b1; apply_random(1'b0); step();
    end
    for (int r = 0; r < 1500; r++) begin
      en = ($urandom_range(0, 2) != 0); apply_random(r >= 1200); step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
