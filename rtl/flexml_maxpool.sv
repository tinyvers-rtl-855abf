// flexml_maxpool -- FlexML max-pooling unit (2x2 window, stride 2).
//
// Takes two 64-bit activation words per step: row_a_i from input row 2y and
// row_b_i from row 2y+1 at the same eight x positions. For each pair of
// neighbouring lanes (2i, 2i+1) it outputs the signed maximum of the four
// values, i.e. four pooled outputs per step. Two steps (half_i = 0, then 1)
// fill one 64-bit output word: step 0 fills lanes 0..3, step 1 lanes 4..7;
// the word is presented on y_o with valid_o high after step 1.
//
// Timing: valid_o and y_o are registered; valid_o pulses one cycle after the
// step with half_i = 1.
//
// From the paper: a max pooling unit beside the PE array. Its window size,
// stride and interface are not given; 2x2 / stride 2 is this design's choice.
module flexml_maxpool
  import tv_pkg::*;
(
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      valid_i,
  input  logic                      half_i,
  input  logic [ARR-1:0][WBITS-1:0] row_a_i,
  input  logic [ARR-1:0][WBITS-1:0] row_b_i,
  output logic                      valid_o,
  output logic [ARR-1:0][WBITS-1:0] y_o
);
  function automatic logic [7:0] smax(logic signed [7:0] a, logic signed [7:0] b);
    return (a > b) ? a : b;
  endfunction

  logic [ARR/2-1:0][WBITS-1:0] pooled;
  always_comb
    for (int i = 0; i < ARR/2; i++)
      pooled[i] = smax(smax(row_a_i[2*i], row_a_i[2*i+1]),
                       smax(row_b_i[2*i], row_b_i[2*i+1]));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      y_o     <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i && half_i;
      if (valid_i) begin
        if (half_i) y_o[ARR-1:ARR/2] <= pooled;
        else        y_o[ARR/2-1:0]   <= pooled;
      end
    end
  end
endmodule
