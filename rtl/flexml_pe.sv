// flexml_pe -- one processing element of the FlexML 8x8 SIMD array.
//
// Each PE holds a precision-scalable multiply-accumulate unit and a 32-bit
// accumulator. One 8-bit activation word and one 8-bit weight word arrive per
// cycle. At INT8 they are one value each (one MAC per cycle); at INT4 each word
// packs two 4-bit values and the PE adds the two "diagonal" products a0*w0 +
// a1*w1 (two MACs per cycle); at INT2 each word packs four 2-bit values and
// four products are added (four MACs). The off-diagonal sub-products are
// gated, as in the paper's PE figure. For support-vector machines the PE
// instead forms d = a - w and accumulates |d| (L1 norm) or round(d)^2 (squared
// L2 norm, the multiplier squaring its own input). At INT8 the activation and
// weight are signed; the SVM modes use 8-bit signed inputs too.
//
// The output path applies the arithmetic right shift used for normalisation,
// an optional ReLU, and overflow control (saturation to the selected
// precision). The result can be loaded into the output register, which
// otherwise takes the value of the neighbour PE: a column of PEs thus forms a
// shift register that moves finished outputs out in ARR cycles.
//
// Timing: acc_en / acc_clr act on the rising clock edge; q_o is combinational
// from the accumulator; out_o is registered.
//
// From the paper: INT8/4/2 precision scaling with 1/2/4 MACs per cycle, the
// 16b/9b/6b product widths, 32-bit accumulator, subtraction, absolute, round
// and squaring units, shift + ReLU normalisation, overflow control and the
// neighbour output register. This design's own choices: the rounding unit
// halves d (round half up) and saturates to 8 bits so the 8x8 multiplier can
// square it; acc_clr loads the new term instead of adding it (the "0" input of
// the adder mux).
module flexml_pe
  import tv_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [WBITS-1:0]    act_i,      // input activation word
  input  logic [WBITS-1:0]    wgt_i,      // input weight word
  input  prec_e               prec_i,
  input  pe_op_e              op_i,
  input  logic                acc_en_i,   // accumulate this cycle
  input  logic                acc_clr_i,  // with acc_en_i: start a new sum
  input  logic [4:0]          shift_i,    // requantisation shift
  input  logic                relu_i,
  input  logic                out_load_i, // load own result into output reg
  input  logic                out_shift_i,// take neighbour's output
  input  logic [WBITS-1:0]    nb_i,       // output register of neighbour PE
  output logic [WBITS-1:0]    out_o,      // output register
  output logic [WBITS-1:0]    q_o,        // requantised result (comb.)
  output logic [ACCBITS-1:0]  acc_o       // raw accumulator
);

  logic signed [ACCBITS-1:0] acc_q;
  logic signed [ACCBITS-1:0] term;

  // precision-scalable product sum
  logic signed [15:0] p8;
  logic signed [8:0]  p4;
  logic signed [5:0]  p2;
  logic signed [8:0]  diff;
  logic signed [8:0]  diff_rnd;
  logic signed [7:0]  diff_sat;
  logic signed [15:0] sq;

  always_comb begin
    p8 = $signed(act_i) * $signed(wgt_i);
    p4 = 9'(($signed(act_i[3:0]) * $signed(wgt_i[3:0])))
       + 9'(($signed(act_i[7:4]) * $signed(wgt_i[7:4])));
    p2 = 6'($signed(act_i[1:0]) * $signed(wgt_i[1:0]))
       + 6'($signed(act_i[3:2]) * $signed(wgt_i[3:2]))
       + 6'($signed(act_i[5:4]) * $signed(wgt_i[5:4]))
       + 6'($signed(act_i[7:6]) * $signed(wgt_i[7:6]));
    // SVM path: subtract, round, absolute, square
    diff     = 9'($signed(act_i)) - 9'($signed(wgt_i));
    diff_rnd = (diff + 9'sd1) >>> 1;
    diff_sat = (diff_rnd > 9'sd127) ? 8'sd127 : diff_rnd[7:0];
    sq       = diff_sat * diff_sat;
    unique case (op_i)
      PE_L1:   term = ACCBITS'(diff < 0 ? -diff : diff);
      PE_L2:   term = ACCBITS'(sq);
      default: begin
        unique case (prec_i)
          PREC_INT4: term = ACCBITS'(p4);
          PREC_INT2: term = ACCBITS'(p2);
          default:   term = ACCBITS'(p8);
        endcase
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       acc_q <= '0;
    else if (acc_en_i) acc_q <= acc_clr_i ? term : acc_q + term;
  end
  assign acc_o = acc_q;

  // normalisation: shift, ReLU, overflow control
  logic signed [ACCBITS-1:0] shifted;
  logic signed [ACCBITS-1:0] hi, lo;
  always_comb begin
    shifted = acc_q >>> shift_i;
    if (relu_i && shifted < 0) shifted = '0;
    unique case (prec_i)
      PREC_INT4: begin hi = 32'sd7;   lo = -32'sd8;   end
      PREC_INT2: begin hi = 32'sd1;   lo = -32'sd2;   end
      default:   begin hi = 32'sd127; lo = -32'sd128; end
    endcase
    if (shifted > hi)      q_o = hi[WBITS-1:0];
    else if (shifted < lo) q_o = lo[WBITS-1:0];
    else                   q_o = shifted[WBITS-1:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)          out_o <= '0;
    else if (out_load_i)  out_o <= q_o;
    else if (out_shift_i) out_o <= nb_i;
  end

endmodule
