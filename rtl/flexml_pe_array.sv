// flexml_pe_array -- the 8x8 SIMD PE array of FlexML with its row adder trees.
//
// Rows are indexed by r (output channel K within a block of 8), columns by c.
// The array runs in one of two dataflows, switched per layer at no cost:
//  * OX|K (ck_i = 0): column c receives the activation col_act_i[c] (from the
//    L0 FIFO, one output column OX per PE column, multicast down the column);
//    row r receives the weight row_wgt_i[r], multicast along the row. Every
//    PE accumulates one output (output stationary). To write back, out_load_i
//    captures the requantised results in the output registers and out_shift_i
//    shifts them one row down per cycle: col_out_o carries row ARR-1 first,
//    so ARR cycles move a whole 8x8 tile out, one output channel per cycle.
//  * C|K (ck_i = 1): column c receives input channel c (multicast), each PE
//    receives its own weight all_wgt_i[r][c] (unicast). After all channel
//    blocks are accumulated, row_q_o[r] is the adder-tree sum of row r,
//    requantised: one output channel per row, all eight valid at once.
//
// Control inputs are common to all PEs (SIMD). col_out_o and row_q_o follow
// the paper; the exact interface and the write-back order (last row first)
// are this design's choices.
module flexml_pe_array
  import tv_pkg::*;
(
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          ck_i,          // 1: C|K dataflow
  input  logic [ARR-1:0][WBITS-1:0]     col_act_i,
  input  logic [ARR-1:0][WBITS-1:0]     row_wgt_i,
  input  logic [ARR-1:0][ARR-1:0][WBITS-1:0] all_wgt_i, // [row][col]
  input  prec_e                         prec_i,
  input  pe_op_e                        op_i,
  input  logic                          acc_en_i,
  input  logic                          acc_clr_i,
  input  logic [4:0]                    shift_i,
  input  logic                          relu_i,
  input  logic                          out_load_i,
  input  logic                          out_shift_i,
  output logic [ARR-1:0][WBITS-1:0]     col_out_o,     // OX|K write-back
  output logic [ARR-1:0][WBITS-1:0]     row_q_o        // C|K write-back
);

  logic [ARR-1:0][ARR-1:0][WBITS-1:0]   pe_out;
  logic [ARR-1:0][ARR-1:0][ACCBITS-1:0] pe_acc;

  for (genvar r = 0; r < ARR; r++) begin : g_row
    for (genvar c = 0; c < ARR; c++) begin : g_col
      logic [WBITS-1:0] w;
      logic [WBITS-1:0] nb;
      logic [WBITS-1:0] q_unused;
      assign w  = ck_i ? all_wgt_i[r][c] : row_wgt_i[r];
      assign nb = (r == 0) ? '0 : pe_out[(r == 0) ? 0 : r-1][c];
      flexml_pe u_pe (
        .clk_i, .rst_ni,
        .act_i      (col_act_i[c]),
        .wgt_i      (w),
        .prec_i, .op_i, .acc_en_i, .acc_clr_i, .shift_i, .relu_i,
        .out_load_i, .out_shift_i,
        .nb_i       (nb),
        .out_o      (pe_out[r][c]),
        .q_o        (q_unused),
        .acc_o      (pe_acc[r][c])
      );
    end
    logic [ACCBITS-1:0] rsum;
    flexml_adder_tree #(.N(ARR)) u_tree (.in_i(pe_acc[r]), .sum_o(rsum));
    assign row_q_o[r] = requant(rsum, shift_i, relu_i, prec_i);
  end

  assign col_out_o = pe_out[ARR-1];

endmodule
