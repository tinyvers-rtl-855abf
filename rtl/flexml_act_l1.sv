// flexml_act_l1 -- FlexML activation L1 memory, 64 kB as two 32 kB ping-pong
// banks of 64-bit words.
//
// Port A belongs to the accelerator core (reads inputs, writes outputs), port
// B to the DMA engine (fills inputs from L2, drains outputs to L2). Each bank
// is a single-port SRAM; address bit [AW-1] selects the bank. While the core
// works in one bank the DMA can fill or drain the other (double buffering).
// When both ports address the same bank in the same cycle, port A wins and
// port B is held off (b_gnt_o = 0) and must retry.
//
// Timing: synchronous read, data one cycle after the granted request; writes
// happen at the rising edge of the granted request.
//
// From the paper: 64 kB, two 32 kB banks used in a ping-pong manner, 8-word
// (64-bit) multicast reads. Own choices: the two-port arrangement, the
// port A priority, and no byte enables (whole words are written).
module flexml_act_l1 #(
  parameter int unsigned DEPTH = 8192,           // 64-bit words, both banks
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk_i,
  // port A: accelerator core
  input  logic          a_req_i,
  input  logic          a_we_i,
  input  logic [AW-1:0] a_addr_i,
  input  logic [63:0]   a_wdata_i,
  output logic [63:0]   a_rdata_o,
  // port B: DMA
  input  logic          b_req_i,
  input  logic          b_we_i,
  input  logic [AW-1:0] b_addr_i,
  input  logic [63:0]   b_wdata_i,
  output logic          b_gnt_o,
  output logic [63:0]   b_rdata_o
);
  localparam int unsigned BD = DEPTH / 2;

  logic [63:0] bank0 [BD];
  logic [63:0] bank1 [BD];

  assign b_gnt_o = b_req_i && !(a_req_i && a_addr_i[AW-1] == b_addr_i[AW-1]);

  // each bank sees at most one request per cycle
  logic          r0_req, r1_req, r0_we, r1_we, sel0_a, sel1_a;
  logic [AW-2:0] r0_addr, r1_addr;
  logic [63:0]   r0_wd, r1_wd;
  always_comb begin
    sel0_a = a_req_i && !a_addr_i[AW-1];
    sel1_a = a_req_i &&  a_addr_i[AW-1];
    r0_req = sel0_a || (b_gnt_o && !b_addr_i[AW-1]);
    r1_req = sel1_a || (b_gnt_o &&  b_addr_i[AW-1]);
    r0_we  = sel0_a ? a_we_i : b_we_i;
    r1_we  = sel1_a ? a_we_i : b_we_i;
    r0_addr = sel0_a ? a_addr_i[AW-2:0] : b_addr_i[AW-2:0];
    r1_addr = sel1_a ? a_addr_i[AW-2:0] : b_addr_i[AW-2:0];
    r0_wd  = sel0_a ? a_wdata_i : b_wdata_i;
    r1_wd  = sel1_a ? a_wdata_i : b_wdata_i;
  end

  logic [63:0] q0, q1;
  always_ff @(posedge clk_i) begin
    if (r0_req) begin
      if (r0_we) bank0[r0_addr] <= r0_wd;
      else       q0 <= bank0[r0_addr];
    end
    if (r1_req) begin
      if (r1_we) bank1[r1_addr] <= r1_wd;
      else       q1 <= bank1[r1_addr];
    end
  end

  // remember which bank each port read
  logic a_bank_q, b_bank_q;
  always_ff @(posedge clk_i) begin
    if (a_req_i && !a_we_i) a_bank_q <= a_addr_i[AW-1];
    if (b_gnt_o && !b_we_i) b_bank_q <= b_addr_i[AW-1];
  end
  assign a_rdata_o = a_bank_q ? q1 : q0;
  assign b_rdata_o = b_bank_q ? q1 : q0;

endmodule
