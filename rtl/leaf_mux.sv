// leaf_mux: the 8:1 multiplexer of a tree processing unit.
//
// Inputs are the eight leaf values of one tree (LF1..LF8 as I0..I7) and the
// 3-bit select from the tree encoder; the output is the tree value (TV).
// Purely combinational. W is the leaf width, 16 bits by this design's choice.
module leaf_mux #(
  parameter int unsigned W = 16
) (
  input  logic [7:0][W-1:0] leaves,
  input  logic [2:0]        sel,
  output logic [W-1:0]      tv
);
  always_comb begin
    unique case (sel)
      3'd0:    tv = leaves[0];
      3'd1:    tv = leaves[1];
      3'd2:    tv = leaves[2];
      3'd3:    tv = leaves[3];
      3'd4:    tv = leaves[4];
      3'd5:    tv = leaves[5];
      3'd6:    tv = leaves[6];
      default: tv = leaves[7];
    endcase
  end
endmodule
