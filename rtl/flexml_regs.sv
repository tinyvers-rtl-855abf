// flexml_regs -- FlexML control registers on the APB bus.
//
// The host core programs the accelerator through these memory-mapped
// registers (word offsets from the accelerator's APB base):
//   0x00 CTRL      write: bit0 start the control unit, bit1 start a DMA job
//   0x04 STATUS    read : bit0 core busy, bit1 DMA busy, bit2 core done
//                         (sticky), bit3 DMA done (sticky); write 1 clears
//                         the sticky bits
//   0x08 DMA_L2    L2 byte address of the DMA job
//   0x0C DMA_L1    L1 address of the DMA job (word / lane / beat address)
//   0x10 DMA_LEN   number of L1 words to move
//   0x14 DMA_CFG   bits1:0 target (0 act, 1 weight, 2 sparsity, 3 instr),
//                  bit2 direction (1 = activation L1 to L2)
//   0x18 NLFG      write: bits3:0 segment, 15:8 slope, 23:16 offset (one
//                  look-up-table entry of the non-linear function generator)
//   0x1C CNT_MAC   read : MAC cycles issued by the control unit
//   0x20 CNT_SKIP  read : channels skipped through structured sparsity
//   0x24 CNT_ROWSK read : all-zero deconvolution rows skipped
// irq_o is high while the sticky core-done bit is set.
//
// Timing: APB with zero wait states (pready always high); start pulses are
// one cycle long, issued in the access phase of the write.
//
// From the paper: DMA control registers reached over APB. The register map is
// this design's own.
module flexml_regs (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [11:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        start_core_o,
  output logic        start_dma_o,
  input  logic        core_busy_i,
  input  logic        core_done_i,
  input  logic        dma_busy_i,
  input  logic        dma_done_i,
  output logic [31:0] dma_l2_o,
  output logic [15:0] dma_l1_o,
  output logic [15:0] dma_len_o,
  output logic [1:0]  dma_tgt_o,
  output logic        dma_to_l2_o,
  output logic        lut_we_o,
  output logic [3:0]  lut_idx_o,
  output logic [7:0]  lut_slope_o,
  output logic [7:0]  lut_offs_o,
  input  logic [31:0] cnt_mac_i,
  input  logic [31:0] cnt_skip_i,
  input  logic [31:0] cnt_rowskip_i,
  output logic        irq_o
);
  logic wr;
  logic core_done_q, dma_done_q;
  assign wr       = psel_i && penable_i && pwrite_i;
  assign pready_o = 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dma_l2_o <= '0; dma_l1_o <= '0; dma_len_o <= '0; dma_tgt_o <= '0;
      dma_to_l2_o <= 1'b0; core_done_q <= 1'b0; dma_done_q <= 1'b0;
      lut_idx_o <= '0; lut_slope_o <= '0; lut_offs_o <= '0;
    end else begin
      if (core_done_i) core_done_q <= 1'b1;
      if (dma_done_i)  dma_done_q  <= 1'b1;
      if (wr) begin
        unique case (paddr_i[7:2])
          6'h01: begin
            if (pwdata_i[2]) core_done_q <= 1'b0;
            if (pwdata_i[3]) dma_done_q  <= 1'b0;
          end
          6'h02: dma_l2_o  <= pwdata_i;
          6'h03: dma_l1_o  <= pwdata_i[15:0];
          6'h04: dma_len_o <= pwdata_i[15:0];
          6'h05: begin dma_tgt_o <= pwdata_i[1:0]; dma_to_l2_o <= pwdata_i[2]; end
          6'h06: begin
            lut_idx_o   <= pwdata_i[3:0];
            lut_slope_o <= pwdata_i[15:8];
            lut_offs_o  <= pwdata_i[23:16];
          end
          default: ;
        endcase
      end
    end
  end

  assign start_core_o = wr && paddr_i[7:2] == 6'h00 && pwdata_i[0];
  assign start_dma_o  = wr && paddr_i[7:2] == 6'h00 && pwdata_i[1];

  // the LUT write happens the cycle after the register captured the entry
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) lut_we_o <= 1'b0;
    else         lut_we_o <= wr && paddr_i[7:2] == 6'h06;
  end

  always_comb begin
    unique case (paddr_i[7:2])
      6'h01: prdata_o = {28'd0, dma_done_q, core_done_q, dma_busy_i, core_busy_i};
      6'h02: prdata_o = dma_l2_o;
      6'h03: prdata_o = {16'd0, dma_l1_o};
      6'h04: prdata_o = {16'd0, dma_len_o};
      6'h05: prdata_o = {29'd0, dma_to_l2_o, dma_tgt_o};
      6'h07: prdata_o = cnt_mac_i;
      6'h08: prdata_o = cnt_skip_i;
      6'h09: prdata_o = cnt_rowskip_i;
      default: prdata_o = '0;
    endcase
  end

  assign irq_o = core_done_q;
endmodule
