// flexml_instr_mem -- FlexML instruction memory holding ucode instructions.
//
// One word is one 128-bit layer-wise ucode instruction (tv_pkg::ucode_t). The
// control unit reads it (port A); the DMA engine fills it from L2 one 32-bit
// beat at a time (port B, beat address {instr, beat}, beat 0 = bits 31:0).
// Port A has priority; a port B write in the same cycle is still accepted
// because the array has separate read and write ports.
//
// Timing: synchronous read, instruction one cycle after the request.
//
// From the paper: an instruction memory the control unit fetches ucode from.
// Its size and word width are not given; 64 instructions of 128 bits is this
// design's choice.
module flexml_instr_mem
  import tv_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             a_req_i,
  input  logic [AW-1:0]    a_addr_i,
  output ucode_t           a_rdata_o,
  input  logic             b_we_i,
  input  logic [AW+1:0]    b_addr_i,
  input  logic [31:0]      b_wdata_i
);
  logic [3:0][31:0] mem [DEPTH];
  always_ff @(posedge clk_i) begin
    if (a_req_i) a_rdata_o <= ucode_t'(mem[a_addr_i]);
    if (b_we_i)  mem[b_addr_i[AW+1:2]][b_addr_i[1:0]] <= b_wdata_i;
  end
endmodule
