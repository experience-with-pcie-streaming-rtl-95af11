// reg_add: a registered adder (Reg-Add unit), an adder followed by a
// register, the building block of the pipelined adder tree.
//
// On a rising edge with en high, sum takes a + b; with en low it holds. The
// operands are signed and as wide as the sum (the adder tree sizes every
// stage for the full ensemble sum, so no carry is lost). The result appears
// one clock after the operands. The unit follows the paper; the enable, used
// to stall the pipeline, is this design's addition.
module reg_add #(
  parameter int unsigned W = 23
) (
  input  logic                clk,
  input  logic                en,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] sum
);
  always_ff @(posedge clk) begin
    if (en) sum <= a + b;
  end
endmodule
