// flexml_weight_l1 -- FlexML weight L1 memory, 64 kB as two 32 kB ping-pong
// banks, each built from 8 internal 64-bit wide sub-banks.
//
// A row is 8 lanes of 64 bits (one lane per sub-bank, 64 weight bytes).
// Port A (accelerator core) reads a whole row: in the C|K dataflow all 64
// bytes are unicast to the 64 PEs; in the OX|K dataflow the core uses one
// 64-bit lane (one weight per PE row, multicast along the row). Port B (DMA)
// writes one 64-bit lane per cycle, addressed by a lane address
// {row, lane}. Row bit [RAW-1] selects the ping-pong bank; when both ports hit
// the same bank, port A wins and b_gnt_o is low.
//
// Timing: synchronous read, row data one cycle after the request.
//
// From the paper: 64 kB in two 32 kB ping-pong banks, 8 internal banks able to
// unicast 64 weight words per cycle. The paper also says the OX|K dataflow
// provides 8 words "using 2 internal banks", which would mean 32-bit
// sub-banks, while 64 unicast bytes from 8 banks means 64-bit sub-banks; this
// design follows the second statement and reads one 64-bit lane for OX|K.
module flexml_weight_l1 #(
  parameter int unsigned ROWS = 1024,          // rows of 8 x 64 bit, both banks
  parameter int unsigned RAW  = $clog2(ROWS)
) (
  input  logic              clk_i,
  input  logic              a_req_i,
  input  logic [RAW-1:0]    a_row_i,
  output logic [8*64-1:0]   a_rdata_o,
  input  logic              b_req_i,
  input  logic [RAW+2:0]    b_addr_i,          // {row, lane}
  input  logic [63:0]       b_wdata_i,
  output logic              b_gnt_o
);
  logic [63:0] mem [8][ROWS];
  logic [RAW-1:0] b_row;
  logic [2:0]     b_lane;

  assign b_row   = b_addr_i[RAW+2:3];
  assign b_lane  = b_addr_i[2:0];
  assign b_gnt_o = b_req_i && !(a_req_i && a_row_i[RAW-1] == b_row[RAW-1]);

  always_ff @(posedge clk_i) begin
    if (a_req_i)
      for (int l = 0; l < 8; l++) a_rdata_o[l*64 +: 64] <= mem[l][a_row_i];
    if (b_gnt_o) mem[b_lane][b_row] <= b_wdata_i;
  end
endmodule
