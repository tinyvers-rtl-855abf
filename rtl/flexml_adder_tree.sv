// flexml_adder_tree -- row adder tree of the FlexML array (C|K dataflow).
//
// In the C|K dataflow the eight PEs of one row work on eight different input
// channels of the same output channel. Once their partial sums are complete,
// this tree adds the eight 32-bit accumulators of the row into one sum, which
// is then normalised (shift, ReLU, saturation) and written to the activation
// L1. The tree is purely combinational: three levels of two-input adders
// (8 -> 4 -> 2 -> 1). Sums wrap at 32 bits, like the accumulators.
//
// From the paper: one adder tree per PE row, accumulating the row outputs in
// the C|K dataflow. The balanced binary structure is this design's choice.
module flexml_adder_tree
  import tv_pkg::*;
#(
  parameter int unsigned N = ARR      // inputs per tree (power of two)
) (
  input  logic [N-1:0][ACCBITS-1:0] in_i,
  output logic [ACCBITS-1:0]        sum_o
);
  localparam int unsigned LVL = $clog2(N);

  logic [LVL:0][N-1:0][ACCBITS-1:0] t;

  always_comb begin
    t = '0;
    t[0] = in_i;
    for (int l = 0; l < LVL; l++)
      for (int i = 0; i < (N >> (l + 1)); i++)
        t[l+1][i] = t[l][2*i] + t[l][2*i+1];
  end
  assign sum_o = t[LVL][0];
endmodule
