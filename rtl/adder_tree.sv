// adder_tree: pipelined reduction of the tree values to one ensemble score.
//
// N_IN signed values of IN_W bits are summed by a binary tree of registered
// adders with ceil(log2(N_IN)) stages. Stage s has ceil(n/2) Reg-Add units for
// the n values it receives; when n is odd the last unit adds its single value
// to zero. For the paper's 100 trees the stages have 50, 25, 13, 7, 4, 2 and 1
// units. Every value is sign-extended to OUT_W = IN_W + stages bits at the
// input, so no stage can overflow. With en high every clock, the tree takes a
// new set of values each clock and returns their sum N_STAGES clocks later
// (one clock per stage); en low freezes all stages together. The stage and
// unit counts follow the paper; the bit widths and the zero operand of an odd
// unit are this design's choices.
module adder_tree #(
  parameter int unsigned N_IN     = 100,
  parameter int unsigned IN_W     = 16,
  parameter int unsigned N_STAGES = (N_IN > 1) ? $clog2(N_IN) : 1,
  parameter int unsigned OUT_W    = IN_W + N_STAGES
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  in_vals [N_IN],
  output logic signed [OUT_W-1:0] sum
);
  // Number of values entering stage s (s = 0 is the tree input).
  function automatic int unsigned count_at(input int unsigned s);
    int unsigned n;
    n = N_IN;
    for (int unsigned i = 0; i < s; i++) n = (n + 1) / 2;
    return n;
  endfunction

  logic signed [OUT_W-1:0] lvl [N_STAGES+1][N_IN];

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    assign lvl[0][i] = OUT_W'(in_vals[i]);
  end

  for (genvar s = 0; s < N_STAGES; s++) begin : g_stage
    localparam int unsigned NIN  = count_at(s);
    localparam int unsigned NOUT = count_at(s + 1);
    for (genvar u = 0; u < NOUT; u++) begin : g_unit
      logic signed [OUT_W-1:0] b_op;
      if (2 * u + 1 < NIN) begin : g_pair
        assign b_op = lvl[s][2*u+1];
      end else begin : g_single
        assign b_op = '0;
      end
      reg_add #(.W(OUT_W)) u_add (
        .clk(clk),
        .en (en),
        .a  (lvl[s][2*u]),
        .b  (b_op),
        .sum(lvl[s+1][u])
      );
    end
    for (genvar u = NOUT; u < N_IN; u++) begin : g_unused
      assign lvl[s+1][u] = '0;
    end
  end

  assign sum = lvl[N_STAGES][0];
endmodule
