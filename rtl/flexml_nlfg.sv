// flexml_nlfg -- FlexML non-linear function generator (NLFG).
//
// Produces activation functions other than ReLU (tanh, sigmoid, ...) by
// piecewise-linear approximation from a look-up table. The signed 8-bit input
// range is cut into 16 equal segments of 16 codes, selected by the input's
// top four bits. Segment s stores a signed slope m[s] (2.6 fixed point) and a
// signed offset b[s]; the output is
//     y = sat8( ((m[s] * x) >>> 6) + b[s] ).
// Eight lanes (one 64-bit activation word) are processed in parallel. The
// table is written by software through the lut_we_i port before use.
//
// Timing: one cycle; y_o and valid_o are registered copies of the result of
// x_i / valid_i.
//
// From the paper: an NLFG using LUT-based linear approximation for
// activations other than ReLU. Own choices: 16 segments, the 2.6 slope format,
// the table-write port and 8 parallel lanes.
module flexml_nlfg
  import tv_pkg::*;
(
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      lut_we_i,
  input  logic [3:0]                lut_idx_i,
  input  logic [7:0]                lut_slope_i,
  input  logic [7:0]                lut_offs_i,
  input  logic                      valid_i,
  input  logic [ARR-1:0][WBITS-1:0] x_i,
  output logic                      valid_o,
  output logic [ARR-1:0][WBITS-1:0] y_o
);
  logic signed [7:0] slope [16];
  logic signed [7:0] offs  [16];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 16; i++) begin slope[i] <= '0; offs[i] <= '0; end
    end else if (lut_we_i) begin
      slope[lut_idx_i] <= lut_slope_i;
      offs[lut_idx_i]  <= lut_offs_i;
    end
  end

  function automatic logic [7:0] pwl(logic signed [7:0] x,
                                     logic signed [7:0] m,
                                     logic signed [7:0] b);
    logic signed [15:0] p;
    logic signed [15:0] y;
    p = x * m;
    y = (p >>> 6) + 16'(b);
    if (y > 16'sd127)       return 8'h7f;
    else if (y < -16'sd128) return 8'h80;
    else                    return y[7:0];
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o <= 1'b0;
      y_o     <= '0;
    end else begin
      valid_o <= valid_i;
      for (int l = 0; l < ARR; l++) begin
        logic [3:0] s;
        s = x_i[l][7:4] ^ 4'b1000;     // segment 0 = most negative inputs
        y_o[l] <= pwl(x_i[l], slope[s], offs[s]);
      end
    end
  end
endmodule
