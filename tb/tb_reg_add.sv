// tb_reg_add: random signed operands with a random enable. The sum must
// appear one clock after the operands when enabled and hold when not.
module tb_reg_add;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic en;
  logic signed [22:0] a, b, sum;
  logic signed [22:0] expected;

  always #5 clk = ~clk;

  reg_add #(.W(23)) dut (.clk(clk), .en(en), .a(a), .b(b), .sum(sum));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // first, a known value
    en = 1'b1; a = -23'sd5; b = 23'sd3;
    @(posedge clk); #1;
    expected = -23'sd2;
    checks++;
    if (sum !== expected) begin failures++; $display("FAIL sum=%0d expected -2", sum); end
    for (int r = 0; r < 2000; r++) begin
      a  = 23'($urandom_range(0, 2000000)) - 23'sd1000000;
      b  = 23'($urandom_range(0, 2000000)) - 23'sd1000000;
      en = ($urandom_range(0, 3) != 0);
      if (en) expected = 23'(int'(a) + int'(b));
      @(posedge clk); #1;
      checks++;
      if (sum !== expected) begin
        failures++;
        $display("FAIL en=%0b a=%0d b=%0d sum=%0d expected %0d", en, a, b, sum, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
