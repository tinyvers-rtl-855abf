// tinyvers -- TinyVers SoC top: FlexML accelerator, shared L2 with its TCDM
// interconnect, and the wake-up controller with its power-domain sequencing.
//
// What is inside:
//  * flexml     -- the ML accelerator, programmed over APB, reaching L2 through
//                  its own DMA engine (TCDM master 2);
//  * tcdm_xbar  -- the logarithmic interconnect (masters: 0 host core data
//                  port, 1 uDMA, 2 FlexML DMA) to the eight L2 banks;
//  * l2_mem     -- 448 kB data-acq. memory + 64 kB LP data-acq. memory;
//  * wuc        -- wake-up controller on the always-on clock, producing the
//                  clock-enable, isolation, reset and power-switch controls of
//                  the six switchable domains.
// What is outside, as ports: the RISC-V host core (its TCDM data port and APB
// accesses), the uDMA with its peripherals (its L2 port), boot ROM, eMRAM and
// its controller, JTAG, the power switches, isolation cells and level shifters
// themselves (driven by the pd_* outputs).
//
// Power-domain effects modelled here: the FlexML logic is held in reset by
// the logic domain's reset, its and the host's L2 requests are clamped to
// zero while the logic domain is isolated, the uDMA requests while the uDMA
// domain is isolated, and each L2 region reports power only with both switch
// groups of its domain closed.
//
// Clocks: clk_soc_i for the core logic, clk_aon_i for the wake-up controller.
// The WuC outputs are level signals that change only during power sequencing,
// while the domains they control are gated; no synchroniser is modelled.
module tinyvers
  import tv_pkg::*;
(
  input  logic           clk_soc_i,
  input  logic           clk_aon_i,
  input  logic           rst_ni,
  // host core data port (TCDM master 0)
  input  logic           host_req_i,
  input  logic           host_we_i,
  input  logic [31:0]    host_addr_i,
  input  logic [31:0]    host_wdata_i,
  input  logic [3:0]     host_be_i,
  output logic           host_gnt_o,
  output logic           host_rvalid_o,
  output logic [31:0]    host_rdata_o,
  // uDMA L2 port (TCDM master 1)
  input  logic           udma_req_i,
  input  logic           udma_we_i,
  input  logic [31:0]    udma_addr_i,
  input  logic [31:0]    udma_wdata_i,
  input  logic [3:0]     udma_be_i,
  output logic           udma_gnt_o,
  output logic           udma_rvalid_o,
  output logic [31:0]    udma_rdata_o,
  // APB from the host to FlexML (core clock)
  input  logic           ml_psel_i,
  input  logic           ml_penable_i,
  input  logic           ml_pwrite_i,
  input  logic [11:0]    ml_paddr_i,
  input  logic [31:0]    ml_pwdata_i,
  output logic [31:0]    ml_prdata_o,
  output logic           ml_pready_o,
  output logic           ml_irq_o,
  // APB from the host to the WuC (always-on clock)
  input  logic           wuc_psel_i,
  input  logic           wuc_penable_i,
  input  logic           wuc_pwrite_i,
  input  logic [7:0]     wuc_paddr_i,
  input  logic [31:0]    wuc_pwdata_i,
  output logic [31:0]    wuc_prdata_o,
  output logic           wuc_pready_o,
  input  logic           ext_wake_i,
  // power-domain controls
  output logic [NPD-1:0] pd_clk_en_o,
  output logic [NPD-1:0] pd_iso_o,
  output logic [NPD-1:0] pd_rst_no,
  output logic [NPD-1:0] pd_sw1_o,
  output logic [NPD-1:0] pd_sw2_o,
  output pmode_e         mode_o,
  output logic           wake_irq_o,
  output logic [31:0]    l2_conflicts_o
);

  // ---------------- wake-up controller ----------------
  wuc u_wuc (
    .clk_i(clk_aon_i), .rst_ni,
    .psel_i(wuc_psel_i), .penable_i(wuc_penable_i), .pwrite_i(wuc_pwrite_i),
    .paddr_i(wuc_paddr_i), .pwdata_i(wuc_pwdata_i),
    .prdata_o(wuc_prdata_o), .pready_o(wuc_pready_o),
    .ext_wake_i,
    .pd_clk_en_o, .pd_iso_o, .pd_rst_no, .pd_sw1_o, .pd_sw2_o,
    .mode_o, .wake_irq_o
  );

  logic logic_rst_n, logic_iso, udma_iso, pwr_main, pwr_lp;
  assign logic_rst_n = rst_ni & pd_rst_no[PD_LOGIC];
  assign logic_iso   = pd_iso_o[PD_LOGIC];
  assign udma_iso    = pd_iso_o[PD_UDMA];
  assign pwr_main    = pd_sw1_o[PD_DACQ]  & pd_sw2_o[PD_DACQ];
  assign pwr_lp      = pd_sw1_o[PD_LPMEM] & pd_sw2_o[PD_LPMEM];

  // ---------------- FlexML ----------------
  logic        ml_req, ml_we, ml_gnt, ml_rvalid;
  logic [31:0] ml_addr, ml_wdata, ml_rdata;

  flexml u_flexml (
    .clk_i(clk_soc_i), .rst_ni(logic_rst_n),
    .psel_i(ml_psel_i), .penable_i(ml_penable_i), .pwrite_i(ml_pwrite_i),
    .paddr_i(ml_paddr_i), .pwdata_i(ml_pwdata_i),
    .prdata_o(ml_prdata_o), .pready_o(ml_pready_o),
    .tcdm_req_o(ml_req), .tcdm_we_o(ml_we), .tcdm_addr_o(ml_addr),
    .tcdm_wdata_o(ml_wdata), .tcdm_gnt_i(ml_gnt), .tcdm_rvalid_i(ml_rvalid),
    .tcdm_rdata_i(ml_rdata), .irq_o(ml_irq_o)
  );

  // ---------------- TCDM interconnect and L2 ----------------
  localparam int unsigned NM = 3;
  localparam int unsigned RW = 15;
  logic [NM-1:0]       m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][31:0] m_addr, m_wdata, m_rdata;
  logic [NM-1:0][3:0]  m_be;
  logic [7:0]          b_req, b_we;
  logic [7:0][RW-1:0]  b_row;
  logic [7:0][31:0]    b_wdata, b_rdata;
  logic [7:0][3:0]     b_be;

  // isolation cells: requests from a powered-down domain are clamped to 0
  assign m_req   = {ml_req & ~logic_iso, udma_req_i & ~udma_iso,
                    host_req_i & ~logic_iso};
  assign m_we    = {ml_we, udma_we_i, host_we_i};
  assign m_addr  = {ml_addr, udma_addr_i, host_addr_i};
  assign m_wdata = {ml_wdata, udma_wdata_i, host_wdata_i};
  assign m_be    = {4'hF, udma_be_i, host_be_i};

  tcdm_xbar #(.NM(NM), .RW(RW)) u_xbar (
    .clk_i(clk_soc_i), .rst_ni,
    .m_req_i(m_req), .m_we_i(m_we), .m_addr_i(m_addr), .m_wdata_i(m_wdata),
    .m_be_i(m_be), .m_gnt_o(m_gnt), .m_rvalid_o(m_rvalid), .m_rdata_o(m_rdata),
    .b_req_o(b_req), .b_we_o(b_we), .b_row_o(b_row), .b_wdata_o(b_wdata),
    .b_be_o(b_be), .b_rdata_i(b_rdata), .conflicts_o(l2_conflicts_o)
  );

  l2_mem #(.RW(RW)) u_l2 (
    .clk_i(clk_soc_i), .pwr_main_i(pwr_main), .pwr_lp_i(pwr_lp),
    .req_i(b_req), .we_i(b_we), .row_i(b_row), .wdata_i(b_wdata),
    .be_i(b_be), .rdata_o(b_rdata)
  );

  assign host_gnt_o    = m_gnt[0];
  assign host_rvalid_o = m_rvalid[0];
  assign host_rdata_o  = m_rdata[0];
  assign udma_gnt_o    = m_gnt[1];
  assign udma_rvalid_o = m_rvalid[1];
  assign udma_rdata_o  = m_rdata[1];
  assign ml_gnt        = m_gnt[2];
  assign ml_rvalid     = m_rvalid[2];
  assign ml_rdata      = m_rdata[2];

endmodule
