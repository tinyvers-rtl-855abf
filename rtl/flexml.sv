// flexml -- the FlexML accelerator of TinyVers: an 8x8 precision-scalable PE
// array with private L1 memories, an L0 input FIFO, a control unit running
// layer-wise ucode, a DMA engine to the shared L2, a non-linear function
// generator and a max-pooling unit.
//
// The host programs the accelerator over APB (flexml_regs): it first moves
// ucode, weights, sparsity indices and input activations from L2 into the
// private memories with DMA jobs, then starts the control unit, waits for the
// done interrupt and moves the outputs back to L2 with another DMA job.
//
// Datapath wiring done here (stage 1 of the control unit's pipeline):
//  * OX|K layers: PE column c takes tap c of the L0 FIFO; PE row r takes byte
//    r of the selected 64-bit weight lane.
//  * C|K layers: PE column c takes byte c of the activation word read this
//    cycle (bypassing the L0 FIFO); PE (r, c) takes byte r*8+c of the weight
//    row.
//  * The L0 FIFO shift byte is picked from the activation word; for
//    deconvolution loads a realignment register keeps the previous word so
//    that 8 bytes can start at a 4-byte offset.
//  * Activation L1 write data: the bottom PE row (OX|K write-back), the row
//    adder-tree outputs (C|K), the max-pooling unit or the NLFG.
//
// Interfaces: APB slave (12-bit offsets), 32-bit TCDM master to L2, irq_o.
// From the paper: the block set and sizes (8x8 array, 2x32 kB weight and
// activation L1, 2x2 kB sparsity memory, 16x8 bit L0, NLFG, max pool, DMA,
// control registers). The instruction memory size and all interfaces are
// this design's choices.
module flexml
  import tv_pkg::*;
#(
  parameter int unsigned ACT_DEPTH = 8192,   // 64 kB activation L1
  parameter int unsigned WGT_ROWS  = 1024,   // 64 kB weight L1
  parameter int unsigned SP_DEPTH  = 1024,   // 4 kB sparsity index memory
  parameter int unsigned IM_DEPTH  = 64      // ucode instructions
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // APB slave
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [11:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  // TCDM master towards the shared L2
  output logic        tcdm_req_o,
  output logic        tcdm_we_o,
  output logic [31:0] tcdm_addr_o,
  output logic [31:0] tcdm_wdata_o,
  input  logic        tcdm_gnt_i,
  input  logic        tcdm_rvalid_i,
  input  logic [31:0] tcdm_rdata_i,
  output logic        irq_o
);
  localparam int unsigned IM_AW = $clog2(IM_DEPTH);

  // ---------------- registers ----------------
  logic        start_core, start_dma, core_busy, core_done, dma_busy, dma_done;
  logic [31:0] dma_l2;
  logic [15:0] dma_l1, dma_len;
  logic [1:0]  dma_tgt;
  logic        dma_to_l2;
  logic        lut_we;
  logic [3:0]  lut_idx;
  logic [7:0]  lut_slope, lut_offs;
  logic [31:0] cnt_mac, cnt_skip, cnt_rowskip;

  flexml_regs u_regs (
    .clk_i, .rst_ni, .psel_i, .penable_i, .pwrite_i, .paddr_i, .pwdata_i,
    .prdata_o, .pready_o,
    .start_core_o(start_core), .start_dma_o(start_dma),
    .core_busy_i(core_busy), .core_done_i(core_done),
    .dma_busy_i(dma_busy), .dma_done_i(dma_done),
    .dma_l2_o(dma_l2), .dma_l1_o(dma_l1), .dma_len_o(dma_len),
    .dma_tgt_o(dma_tgt), .dma_to_l2_o(dma_to_l2),
    .lut_we_o(lut_we), .lut_idx_o(lut_idx), .lut_slope_o(lut_slope),
    .lut_offs_o(lut_offs),
    .cnt_mac_i(cnt_mac), .cnt_skip_i(cnt_skip), .cnt_rowskip_i(cnt_rowskip),
    .irq_o
  );

  // ---------------- DMA ----------------
  logic        d_act_req, d_act_we, d_act_gnt, d_wgt_req, d_wgt_gnt;
  logic        d_sp_req, d_sp_gnt, d_im_we;
  logic [12:0] d_act_addr, d_wgt_addr;
  logic [63:0] d_act_wdata, d_act_rdata, d_wgt_wdata;
  logic [9:0]  d_sp_addr;
  logic [31:0] d_sp_wdata, d_im_wdata;
  logic [7:0]  d_im_addr;

  flexml_dma u_dma (
    .clk_i, .rst_ni, .start_i(start_dma),
    .l2_addr_i(dma_l2), .l1_addr_i(dma_l1), .len_i(dma_len),
    .target_i(dma_tgt), .to_l2_i(dma_to_l2),
    .busy_o(dma_busy), .done_o(dma_done),
    .tcdm_req_o, .tcdm_we_o, .tcdm_addr_o, .tcdm_wdata_o,
    .tcdm_gnt_i, .tcdm_rvalid_i, .tcdm_rdata_i,
    .act_req_o(d_act_req), .act_we_o(d_act_we), .act_addr_o(d_act_addr),
    .act_wdata_o(d_act_wdata), .act_gnt_i(d_act_gnt), .act_rdata_i(d_act_rdata),
    .wgt_req_o(d_wgt_req), .wgt_addr_o(d_wgt_addr), .wgt_wdata_o(d_wgt_wdata),
    .wgt_gnt_i(d_wgt_gnt),
    .sp_req_o(d_sp_req), .sp_addr_o(d_sp_addr), .sp_wdata_o(d_sp_wdata),
    .sp_gnt_i(d_sp_gnt),
    .im_we_o(d_im_we), .im_addr_o(d_im_addr), .im_wdata_o(d_im_wdata)
  );

  // ---------------- control unit ----------------
  logic              im_req;
  logic [IM_AW-1:0]  im_addr;
  ucode_t            im_rdata, ins;
  logic              a_req, a_we;
  logic [12:0]       a_addr;
  logic [1:0]        a_wsel;
  logic              w_req;
  logic [9:0]        w_row;
  logic [2:0]        w_lane;
  logic              sp_req;
  logic [9:0]        sp_addr;
  logic [31:0]       sp_rdata;
  logic              f_lo, f_hi, f_dec, f_sh, f_doff, f_ctrl;
  logic [2:0]        f_bsel;
  logic              acc_en, acc_clr, pe_zero, out_load, out_shift;
  logic              mp_valid, mp_half, nl_valid, ck;
  pe_op_e            op;

  flexml_ctrl #(.IM_AW(IM_AW)) u_ctrl (
    .clk_i, .rst_ni, .start_i(start_core), .busy_o(core_busy), .done_o(core_done),
    .im_req_o(im_req), .im_addr_o(im_addr), .im_rdata_i(im_rdata),
    .a_req_o(a_req), .a_we_o(a_we), .a_addr_o(a_addr), .a_wsel_o(a_wsel),
    .w_req_o(w_req), .w_row_o(w_row), .w_lane_o(w_lane),
    .sp_req_o(sp_req), .sp_addr_o(sp_addr), .sp_rdata_i(sp_rdata),
    .f_load_lo_o(f_lo), .f_load_hi_o(f_hi), .f_load_dec_o(f_dec),
    .f_shift_o(f_sh), .f_bsel_o(f_bsel), .f_doff_o(f_doff), .f_ctrl_o(f_ctrl),
    .pe_acc_en_o(acc_en), .pe_acc_clr_o(acc_clr), .pe_zero_o(pe_zero),
    .pe_out_load_o(out_load), .pe_out_shift_o(out_shift),
    .mp_valid_o(mp_valid), .mp_half_o(mp_half), .nl_valid_o(nl_valid),
    .ins_o(ins), .ck_o(ck), .op_o(op),
    .cnt_mac_o(cnt_mac), .cnt_skip_o(cnt_skip), .cnt_rowskip_o(cnt_rowskip)
  );

  // ---------------- memories ----------------
  logic [63:0]     a_rdata, a_wdata;
  logic [8*64-1:0] w_rdata;

  flexml_act_l1 #(.DEPTH(ACT_DEPTH)) u_act (
    .clk_i,
    .a_req_i(a_req), .a_we_i(a_we), .a_addr_i(a_addr[$clog2(ACT_DEPTH)-1:0]),
    .a_wdata_i(a_wdata), .a_rdata_o(a_rdata),
    .b_req_i(d_act_req), .b_we_i(d_act_we),
    .b_addr_i(d_act_addr[$clog2(ACT_DEPTH)-1:0]),
    .b_wdata_i(d_act_wdata), .b_gnt_o(d_act_gnt), .b_rdata_o(d_act_rdata)
  );

  flexml_weight_l1 #(.ROWS(WGT_ROWS)) u_wgt (
    .clk_i,
    .a_req_i(w_req), .a_row_i(w_row[$clog2(WGT_ROWS)-1:0]), .a_rdata_o(w_rdata),
    .b_req_i(d_wgt_req), .b_addr_i(d_wgt_addr[$clog2(WGT_ROWS)+2:0]),
    .b_wdata_i(d_wgt_wdata), .b_gnt_o(d_wgt_gnt)
  );

  flexml_sparsity_mem #(.DEPTH(SP_DEPTH)) u_sp (
    .clk_i,
    .a_req_i(sp_req), .a_addr_i(sp_addr[$clog2(SP_DEPTH)-1:0]), .a_rdata_o(sp_rdata),
    .b_req_i(d_sp_req), .b_addr_i(d_sp_addr[$clog2(SP_DEPTH)-1:0]),
    .b_wdata_i(d_sp_wdata), .b_gnt_o(d_sp_gnt)
  );

  flexml_instr_mem #(.DEPTH(IM_DEPTH)) u_im (
    .clk_i,
    .a_req_i(im_req), .a_addr_i(im_addr), .a_rdata_o(im_rdata),
    .b_we_i(d_im_we), .b_addr_i(d_im_addr[IM_AW+1:0]), .b_wdata_i(d_im_wdata)
  );

  // ---------------- L0 FIFO and PE array ----------------
  logic [63:0]                 a_prev;    // realignment register
  logic [127:0]                pair;
  logic [ARR-1:0][WBITS-1:0]   fifo_word, taps, col_act, row_wgt, col_out, row_q;
  logic [ARR-1:0][ARR-1:0][WBITS-1:0] all_wgt;
  logic                        deconv;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) a_prev <= '0;
    else         a_prev <= a_rdata;
  end

  assign deconv    = ins.ltype == LT_DECONV;
  assign pair      = {a_rdata, a_prev};
  assign fifo_word = f_doff ? pair[95:32] : pair[63:0];

  flexml_input_fifo u_l0 (
    .clk_i, .rst_ni,
    .word_i(f_dec ? fifo_word : a_rdata),
    .in_byte_i(a_rdata[8*f_bsel +: 8]),
    .load_lo_i(f_lo), .load_hi_i(f_hi), .load_dec_i(f_dec), .shift_i(f_sh),
    .deconv_i(deconv), .ctrl_i(f_ctrl), .stride_i(ins.stride),
    .tap_o(taps)
  );

  always_comb begin
    col_act = pe_zero ? '0 : (ck ? a_rdata : taps);
    row_wgt = pe_zero ? '0 : w_rdata[64*w_lane +: 64];
    all_wgt = pe_zero ? '0 : w_rdata;
  end

  flexml_pe_array u_array (
    .clk_i, .rst_ni, .ck_i(ck),
    .col_act_i(col_act), .row_wgt_i(row_wgt), .all_wgt_i(all_wgt),
    .prec_i(ins.prec), .op_i(op), .acc_en_i(acc_en), .acc_clr_i(acc_clr),
    .shift_i(ins.shift), .relu_i(ins.relu),
    .out_load_i(out_load), .out_shift_i(out_shift),
    .col_out_o(col_out), .row_q_o(row_q)
  );

  // ---------------- post-processing ----------------
  logic                      mp_out_valid, nl_out_valid;
  logic [ARR-1:0][WBITS-1:0] mp_y, nl_y;

  flexml_maxpool u_pool (
    .clk_i, .rst_ni, .valid_i(mp_valid), .half_i(mp_half),
    .row_a_i(a_prev), .row_b_i(a_rdata),
    .valid_o(mp_out_valid), .y_o(mp_y)
  );

  flexml_nlfg u_nlfg (
    .clk_i, .rst_ni, .lut_we_i(lut_we), .lut_idx_i(lut_idx),
    .lut_slope_i(lut_slope), .lut_offs_i(lut_offs),
    .valid_i(nl_valid), .x_i(a_rdata),
    .valid_o(nl_out_valid), .y_o(nl_y)
  );

  always_comb begin
    unique case (a_wsel)
      2'd0:    a_wdata = col_out;
      2'd1:    a_wdata = row_q;
      2'd2:    a_wdata = mp_y;
      default: a_wdata = nl_y;
    endcase
  end

endmodule
