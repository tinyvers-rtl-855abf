// flexml_input_fifo -- the L0 input FIFO (16 x 8 bit) between activation L1
// and the PE array, used by the OX|K dataflow.
//
// The FIFO is a 16-entry byte shift register e[0..15]. Operations (one per
// cycle, priority in this order):
//  * load_lo_i   : e[0..7]  <= the 8 bytes of a 64-bit activation L1 word
//                  (the paper's "fetches 8 words in the first cycle")
//  * load_hi_i   : e[8..15] <= the 8 bytes of a 64-bit word
//  * load_dec_i  : deconvolution load: e[2i] <= byte i, e[2i+1] <= 0, so
//                  eight fetched words are spread over 16 entries with zero
//                  padding in between
//  * shift_i     : e[i] <= e[i+1], e[15] <= in_byte_i: the "single word"
//                  shift of the sliding window. A dilation d is made by
//                  shifting d times. In deconvolution mode a shift moves the
//                  register by two entries and fills with zeros.
// The eight outputs to the PE columns are taps of the register:
//  * normal mode:        tap[j] = e[j*stride]   (stride 1 or 2)
//  * deconvolution mode: tap[j] = e[j + ctrl]   (ctrl selects the phase)
// With ctrl = 0 after a deconvolution load the PEs see "a 0 b 0 c 0 d 0",
// with ctrl = 1 "0 b 0 c 0 d 0 e"; after one (two-entry) shift, ctrl = 0
// gives "b 0 c 0 d 0 e 0": the three cycles printed in the paper's figure,
// whose third line shows the window advanced by two entries.
//
// Timing: loads and shifts take effect at the rising edge; taps are
// combinational from the register.
//
// From the paper: 16 x 8-bit size, 8-word first fetch then one word per shift,
// programmable shift for stride/dilation, zero-padding shuffle and Ctrl-driven
// output muxes in deconvolution mode. Own choices: the tap-at-j*stride scheme
// for stride 2 and the exact encoding of the operations.
module flexml_input_fifo
  import tv_pkg::*;
(
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [ARR-1:0][WBITS-1:0] word_i,
  input  logic [WBITS-1:0]          in_byte_i,
  input  logic                      load_lo_i,
  input  logic                      load_hi_i,
  input  logic                      load_dec_i,
  input  logic                      shift_i,
  input  logic                      deconv_i,
  input  logic                      ctrl_i,
  input  logic [1:0]                stride_i,
  output logic [ARR-1:0][WBITS-1:0] tap_o
);

  logic [L0_DEPTH-1:0][WBITS-1:0] e;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) e <= '0;
    else if (load_lo_i) e[ARR-1:0] <= word_i;
    else if (load_hi_i) e[L0_DEPTH-1:ARR] <= word_i;
    else if (load_dec_i) begin
      for (int i = 0; i < ARR; i++) begin
        e[2*i]   <= word_i[i];
        e[2*i+1] <= '0;
      end
    end else if (shift_i && deconv_i) begin
      for (int i = 0; i < L0_DEPTH-2; i++) e[i] <= e[i+2];
      e[L0_DEPTH-2] <= '0;
      e[L0_DEPTH-1] <= '0;
    end else if (shift_i) begin
      for (int i = 0; i < L0_DEPTH-1; i++) e[i] <= e[i+1];
      e[L0_DEPTH-1] <= in_byte_i;
    end
  end

  always_comb begin
    for (int j = 0; j < ARR; j++) begin
      if (deconv_i)
        tap_o[j] = e[j + int'(ctrl_i)];
      else if (stride_i == 2'd2)
        tap_o[j] = e[2*j];
      else
        tap_o[j] = e[j];
    end
  end

  // only one operation per cycle is meaningful
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   $onehot0({load_lo_i, load_hi_i, load_dec_i, shift_i}));

endmodule
