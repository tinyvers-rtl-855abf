// tcdm_xbar -- logarithmic TCDM interconnect between the SoC's masters and
// the eight banks of the shared L2.
//
// Every master presents a 32-bit TCDM request (req, we, byte address, wdata,
// byte enables) and holds it until gnt. The byte address selects the region
// (offsets 0x70000-0x7FFFF: LP memory, else main), the bank within the region
// (address bits 3:2, word interleaving) and the row. Each bank grants one
// master per cycle; competing masters are served round robin, so a master
// that loses waits (stalls) and is served within NM cycles. Read data
// returns to the granted master with r_valid one cycle after the grant, which
// gives single-cycle access to L2 when there is no conflict.
//
// From the paper: a logarithmic interconnect giving single-cycle access to
// the shared L2 (TCDM). Own choices: the number of masters, the address map
// and round-robin arbitration.
module tcdm_xbar #(
  parameter int unsigned NM = 3,
  parameter int unsigned RW = 15
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NM-1:0]       m_req_i,
  input  logic [NM-1:0]       m_we_i,
  input  logic [NM-1:0][31:0] m_addr_i,
  input  logic [NM-1:0][31:0] m_wdata_i,
  input  logic [NM-1:0][3:0]  m_be_i,
  output logic [NM-1:0]       m_gnt_o,
  output logic [NM-1:0]       m_rvalid_o,
  output logic [NM-1:0][31:0] m_rdata_o,
  // towards l2_mem
  output logic [7:0]          b_req_o,
  output logic [7:0]          b_we_o,
  output logic [7:0][RW-1:0]  b_row_o,
  output logic [7:0][31:0]    b_wdata_o,
  output logic [7:0][3:0]     b_be_o,
  input  logic [7:0][31:0]    b_rdata_i,
  output logic [31:0]         conflicts_o    // cycles a request waited
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0][2:0]    m_bank;
  logic [NM-1:0][RW-1:0] m_row;
  logic [7:0][MW-1:0]    rr;          // round-robin pointer per bank
  logic [7:0][MW-1:0]    win;
  logic [7:0]            any;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      logic lp;
      lp = m_addr_i[m][18:16] == 3'b111;
      m_bank[m] = {lp, m_addr_i[m][3:2]};
      m_row[m]  = lp ? RW'(m_addr_i[m][15:4]) : RW'(m_addr_i[m][18:4]);
    end
  end

  always_comb begin
    m_gnt_o = '0;
    for (int b = 0; b < 8; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int k = 0; k < NM; k++) begin
        int m;
        m = (int'(rr[b]) + k) % NM;
        if (!any[b] && m_req_i[m] && m_bank[m] == 3'(b)) begin
          any[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      b_req_o[b]   = any[b];
      b_we_o[b]    = m_we_i[win[b]];
      b_row_o[b]   = m_row[win[b]];
      b_wdata_o[b] = m_wdata_i[win[b]];
      b_be_o[b]    = m_be_i[win[b]];
      if (any[b]) m_gnt_o[win[b]] = 1'b1;
    end
  end

  // response routing
  logic [NM-1:0]      rd_q;
  logic [NM-1:0][2:0] bank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; bank_q <= '0; rr <= '0; conflicts_o <= '0;
    end else begin
      for (int m = 0; m < NM; m++) begin
        rd_q[m]   <= m_gnt_o[m] && !m_we_i[m];
        bank_q[m] <= m_bank[m];
      end
      for (int b = 0; b < 8; b++)
        if (any[b]) rr[b] <= MW'((int'(win[b]) + 1) % NM);
      conflicts_o <= conflicts_o + 32'($countones(m_req_i & ~m_gnt_o));
    end
  end

  always_comb
    for (int m = 0; m < NM; m++) begin
      m_rvalid_o[m] = rd_q[m];
      m_rdata_o[m]  = b_rdata_i[bank_q[m]];
    end
endmodule
