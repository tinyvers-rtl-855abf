// flexml_sparsity_mem -- FlexML sparsity index memory, 2 x 2 kB ping-pong.
//
// Holds, for every block of 8 output channels (filter kernels), a bit mask
// over the input channels: bit c = 1 means channel c of this block is pruned
// and its computation is skipped. One 32-bit word covers 32 input channels.
// Port A is read by the control unit, port B written by the DMA engine.
// Address bit [AW-1] selects the ping-pong bank; on a same-bank collision
// port A wins and b_gnt_o is low.
//
// Timing: synchronous read, data one cycle after the request.
//
// From the paper: 2 x 2 kB size, bit-encoded indices of pruned channel groups,
// fetched once per filter-kernel block. Own choices: 32-bit words and
// "1 = pruned" (the paper's figure prints 0101 / 1010 / 0000 entries and says
// a channel is skipped "if one present").
module flexml_sparsity_mem #(
  parameter int unsigned DEPTH = 1024,         // 32-bit words, both banks
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          a_req_i,
  input  logic [AW-1:0] a_addr_i,
  output logic [31:0]   a_rdata_o,
  input  logic          b_req_i,
  input  logic [AW-1:0] b_addr_i,
  input  logic [31:0]   b_wdata_i,
  output logic          b_gnt_o
);
  logic [31:0] mem [DEPTH];
  assign b_gnt_o = b_req_i && !(a_req_i && a_addr_i[AW-1] == b_addr_i[AW-1]);
  always_ff @(posedge clk_i) begin
    if (a_req_i) a_rdata_o <= mem[a_addr_i];
    if (b_gnt_o) mem[b_addr_i] <= b_wdata_i;
  end
endmodule
