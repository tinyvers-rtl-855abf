// flexml_ctrl -- FlexML control unit: fetches layer-wise ucode instructions
// and sequences the memories, the L0 FIFO, the PE array and the
// post-processing units for one layer after another.
//
// How it works. After start_i the unit reads instruction 0 from the
// instruction memory, decodes it, runs the layer's loop nest and moves to the
// next instruction until it meets LT_END, then pulses done_o. Every cycle the
// loop FSM issues one micro-operation (uop) in stage 0, where it reads the
// memories (synchronous SRAMs). The uop is carried to stage 1, where the read
// data is used (FIFO loads/shifts, MACs, write-back), and to stage 2 for the
// pooling / NLFG units, which add a register. Activation L1 port A is shared
// by stage-0 reads and stage-1/2 writes; the FSM inserts idle cycles so the
// two never meet (checked by an assertion).
//
// Loop nests (k-block outermost; the paper's figure orders y, x, k):
//  * LT_CONV (OX|K): for kt, oy, ox-tile, c, fy: load the L0 FIFO with 16
//    input bytes (two 64-bit reads), then Fx MAC cycles; between MACs the
//    FIFO shifts in `dil` new bytes (one of the shifts shares the MAC cycle).
//    After all c, fy, fx: capture results and write the 8x8 tile back in 8
//    cycles (one output channel per cycle).
//  * LT_DECONV: the input is upsampled by 2 with zeros in between. Rows of
//    the upsampled input that are all zero are skipped; a row is loaded once
//    as 8 words spread with zero padding (FIFO deconvolution mode) and the
//    Ctrl phase alternates between MACs, the FIFO advancing two entries after
//    each odd tap.
//  * LT_DENSE / LT_SVM_L1 / LT_SVM_L2 (C|K): for kt, channel block: one
//    64-bit input word (8 channels, multicast) and one 512-bit weight row
//    (64 unicast weights) per cycle; the row adder trees then give 8 outputs
//    written as one word.
//  * LT_POOL: 2x2 max pooling, 4 reads per output word.
//  * LT_ACT: NLFG applied word by word.
// Blockwise structured sparsity (ins.sparse): before each channel word of a
// k-block the unit fetches a 32-bit sparsity index word; a set bit skips the
// whole channel (conv: input channel c; C|K: channel block c) and its weights
// are absent from the weight memory (weights are stored compressed).
//
// Data layout (this design's own convention): activations are stored
// [channel][row][x] with x packed 8 per 64-bit word and each row padded by two
// extra words (row stride IX/8+2 words); conv weights are one 64-bit lane per
// (k-block, kept channel, fy, fx) holding the 8 kernels of the block; C|K
// weights are one 512-bit row per (k-block, kept channel block) with byte
// r*8+c for output r, input c.
//
// From the paper: ucode fields, fetch/decode/deploy behaviour, OX|K and C|K
// dataflows, 8-cycle write-back, L0 load of 8 words then single-word shifts,
// programmable stride/dilation, deconvolution zero skipping, sparsity index
// fetch per kernel block with bit-wise skip. Own choices: the pipeline, the
// loop order, the data layout, and the cycle overheads (two load cycles per
// (c, fy), one zeroing cycle per tile, one idle cycle after write-back).
module flexml_ctrl
  import tv_pkg::*;
#(
  parameter int unsigned IM_AW = 6
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 start_i,
  output logic                 busy_o,
  output logic                 done_o,
  // instruction memory
  output logic                 im_req_o,
  output logic [IM_AW-1:0]     im_addr_o,
  input  ucode_t               im_rdata_i,
  // activation L1 port A
  output logic                 a_req_o,
  output logic                 a_we_o,
  output logic [12:0]          a_addr_o,
  output logic [1:0]           a_wsel_o,    // 0 col_out, 1 row_q, 2 pool, 3 nlfg
  // weight L1 port A
  output logic                 w_req_o,
  output logic [9:0]           w_row_o,
  output logic [2:0]           w_lane_o,    // stage-1 lane for OX|K
  // sparsity memory port A
  output logic                 sp_req_o,
  output logic [9:0]           sp_addr_o,
  input  logic [31:0]          sp_rdata_i,
  // L0 FIFO (stage 1)
  output logic                 f_load_lo_o,
  output logic                 f_load_hi_o,
  output logic                 f_load_dec_o,
  output logic                 f_shift_o,
  output logic [2:0]           f_bsel_o,
  output logic                 f_doff_o,    // deconv load realignment (4 bytes)
  output logic                 f_ctrl_o,
  // PE array (stage 1)
  output logic                 pe_acc_en_o,
  output logic                 pe_acc_clr_o,
  output logic                 pe_zero_o,
  output logic                 pe_out_load_o,
  output logic                 pe_out_shift_o,
  // post-processing (stage 1)
  output logic                 mp_valid_o,
  output logic                 mp_half_o,
  output logic                 nl_valid_o,
  // layer configuration
  output ucode_t               ins_o,
  output logic                 ck_o,
  output pe_op_e               op_o,
  // event counters for observation
  output logic [31:0]          cnt_mac_o,     // MAC cycles issued
  output logic [31:0]          cnt_skip_o,    // channels skipped by sparsity
  output logic [31:0]          cnt_rowskip_o  // all-zero deconv rows skipped
);

  typedef struct packed {
    logic        rd;      logic [12:0] ra;
    logic        wrd;     logic [12:0] wl;
    logic        sprd;    logic [9:0]  spa;
    logic        ld_lo, ld_hi, ld_dec, fsh;
    logic [2:0]  bsel;
    logic        doff, ctrl;
    logic        mac, zero, oload, wrcol, wrrow;
    logic        mp, mphalf, nl, ppwr;
    logic [12:0] wa;
  } uop_t;

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_DEC, S_SETUP, S_TILE, S_CCHK, S_SPRD, S_SPWT,
    S_FY, S_LD1, S_LD2, S_MAC, S_SH, S_CKMAC, S_WBL, S_WB, S_WROW, S_BUB,
    S_NEXT, S_PRA0, S_PRB0, S_PRA1, S_PRB1, S_PB1, S_PB2, S_ARD, S_AB1,
    S_AB2, S_DONE
  } state_e;

  state_e state;
  ucode_t ins;
  uop_t   u0, u1, u2;

  logic [IM_AW-1:0] pc;
  logic [9:0]  kt, c, cidx;
  logic [7:0]  y, xt;
  logic [3:0]  fy, fx, sh, t;
  logic [7:0]  p;
  logic [12:0] wbase;
  logic [31:0] spmask;
  logic        sploaded;
  logic [11:0] i;

  // ---------------- derived layer dimensions ----------------
  logic        is_conv, is_dec, is_ck, is_pool, is_act;
  logic [15:0] rw, ox, oxt, orw, oy, kt_n, ct, cend, spw, fxfy;
  logic [15:0] oxw_p, orw_p, oy_p;
  always_comb begin
    is_dec  = ins.ltype == LT_DECONV;
    is_conv = ins.ltype == LT_CONV || is_dec;
    is_ck   = ins.ltype inside {LT_DENSE, LT_SVM_L1, LT_SVM_L2};
    is_pool = ins.ltype == LT_POOL;
    is_act  = ins.ltype == LT_ACT;
    rw   = 16'(ins.ix[7:3]) + 16'd2;
    if (is_dec) begin
      ox = 16'(2 * 16'(ins.ix)) - 16'(ins.fx) + 16'd1;
      oy = 16'(2 * 16'(ins.iy)) - 16'(ins.fy) + 16'd1;
    end else begin
      ox = ((16'(ins.ix) - (16'(ins.fx) - 16'd1) * 16'(ins.dil) - 16'd1)
            >> (ins.stride == 2'd2)) + 16'd1;
      oy = ((16'(ins.iy) - (16'(ins.fy) - 16'd1) * 16'(ins.dil) - 16'd1)
            >> (ins.stride == 2'd2)) + 16'd1;
    end
    oxt  = (ox + 16'd7) >> 3;
    orw  = oxt + 16'd2;
    kt_n = 16'(ins.k[9:3]);
    ct   = (16'(ins.c) + 16'd7) >> 3;
    cend = is_ck ? ct : 16'(ins.c);
    spw  = (cend + 16'd31) >> 5;
    fxfy = 16'(ins.fx) * 16'(ins.fy);
    oxw_p = 16'(ins.ix[7:4]);
    orw_p = oxw_p + 16'd2;
    oy_p  = 16'(ins.iy[7:1]);
  end

  // input row base of the current (c, fy) in conv / deconv
  logic [15:0] in_row, rowbase, word0, x_in0;
  always_comb begin
    if (is_dec) in_row = (16'(y) + 16'(fy)) >> 1;
    else        in_row = (ins.stride == 2'd2 ? 16'(y) << 1 : 16'(y))
                         + 16'(fy) * 16'(ins.dil);
    rowbase = 16'(ins.in_ptr) + (16'(c) * 16'(ins.iy) + in_row) * rw;
    if (is_dec) begin
      word0 = 16'(xt) >> 1;
      x_in0 = '0;
    end else begin
      word0 = (ins.stride == 2'd2) ? 16'(xt) << 1 : 16'(xt);
      x_in0 = word0 << 3;
    end
  end

  logic last_fx, dec_row_zero, ch_pruned;
  assign last_fx      = (fx == ins.fx - 4'd1);
  assign dec_row_zero = is_dec && ((y[0] ^ fy[0]) == 1'b1);
  assign ch_pruned    = ins.sparse && spmask[c[4:0]];

  // ---------------- stage-0 micro-operation ----------------
  logic [15:0] pool_a;
  always_comb begin
    u0 = '0;
    pool_a = 16'(ins.in_ptr) + (16'(c) * 16'(ins.iy) + (16'(y) << 1)) * rw
             + (16'(xt) << 1);
    unique case (state)
      S_TILE: u0.zero = 1'b1;
      S_SPRD: begin
        u0.sprd = 1'b1;
        u0.spa  = 10'(16'(ins.sp_ptr) + 16'(kt) * spw + 16'(c[9:5]));
      end
      S_LD1: begin
        u0.rd = 1'b1; u0.ra = 13'(rowbase + word0);
        u0.ld_lo = !is_dec;
      end
      S_LD2: begin
        u0.rd = 1'b1; u0.ra = 13'(rowbase + word0 + 16'd1);
        u0.ld_hi = !is_dec; u0.ld_dec = is_dec; u0.doff = xt[0];
      end
      S_MAC: begin
        u0.mac  = 1'b1;
        u0.wrd  = 1'b1;
        u0.wl   = 13'(16'(wbase) + (16'(cidx) * 16'(ins.fy) + 16'(fy))
                      * 16'(ins.fx) + 16'(fx));
        u0.ctrl = is_dec & fx[0];
        if (is_dec) u0.fsh = fx[0] && !last_fx;
        else if (!last_fx) begin
          u0.fsh  = 1'b1;
          u0.rd   = 1'b1;
          u0.ra   = 13'(rowbase + ((x_in0 + 16'(p)) >> 3));
          u0.bsel = 3'(p);
        end
      end
      S_SH: begin
        u0.fsh = 1'b1; u0.rd = 1'b1;
        u0.ra = 13'(rowbase + ((x_in0 + 16'(p)) >> 3));
        u0.bsel = 3'(p);
      end
      S_CKMAC: begin
        u0.mac = 1'b1;
        u0.rd  = 1'b1; u0.ra = 13'(16'(ins.in_ptr) + 16'(c));
        u0.wrd = 1'b1; u0.wl = 13'(16'(wbase) + (16'(cidx) << 3));
      end
      S_WBL:  u0.oload = 1'b1;
      S_WB: begin
        u0.wrcol = 1'b1;
        u0.wa = 13'(16'(ins.out_ptr)
                + ((16'(kt) * 16'd8 + 16'd7 - 16'(t)) * oy + 16'(y)) * orw
                + 16'(xt));
      end
      S_WROW: begin
        u0.wrrow = 1'b1;
        u0.wa = 13'(16'(ins.out_ptr) + 16'(kt));
      end
      S_PRA0: begin u0.rd = 1'b1; u0.ra = 13'(pool_a); end
      S_PRB0: begin
        u0.rd = 1'b1; u0.ra = 13'(pool_a + rw);
        u0.mp = 1'b1; u0.mphalf = 1'b0;
      end
      S_PRA1: begin u0.rd = 1'b1; u0.ra = 13'(pool_a + 16'd1); end
      S_PRB1: begin
        u0.rd = 1'b1; u0.ra = 13'(pool_a + rw + 16'd1);
        u0.mp = 1'b1; u0.mphalf = 1'b1; u0.ppwr = 1'b1;
        u0.wa = 13'(16'(ins.out_ptr) + (16'(c) * oy_p + 16'(y)) * orw_p
                + 16'(xt));
      end
      S_ARD: begin
        u0.rd = 1'b1; u0.ra = 13'(16'(ins.in_ptr) + 16'(i));
        u0.nl = 1'b1; u0.ppwr = 1'b1;
        u0.wa = 13'(16'(ins.out_ptr) + 16'(i));
      end
      default: ;
    endcase
  end

  // ---------------- loop FSM ----------------
  logic [15:0] oy_l, ox_l;   // loop bounds: output rows, x tiles / words
  assign oy_l = is_pool ? oy_p : oy;
  assign ox_l = is_pool ? oxw_p : oxt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state <= S_IDLE; ins <= '0; pc <= '0;
      kt <= '0; c <= '0; cidx <= '0; y <= '0; xt <= '0; fy <= '0; fx <= '0;
      sh <= '0; t <= '0; p <= '0; wbase <= '0; spmask <= '0; sploaded <= 1'b0;
      i <= '0; cnt_mac_o <= '0; cnt_skip_o <= '0; cnt_rowskip_o <= '0;
    end else begin
      if (u0.mac) cnt_mac_o <= cnt_mac_o + 32'd1;
      unique case (state)
        S_IDLE:  if (start_i) begin pc <= '0; state <= S_FETCH; end
        S_FETCH: state <= S_DEC;
        S_DEC: begin ins <= im_rdata_i; state <= S_SETUP; end
        S_SETUP: begin
          kt <= '0; y <= '0; xt <= '0; c <= '0; i <= '0;
          wbase <= ins.w_ptr;
          if (ins.ltype == LT_END)          state <= S_DONE;
          else if (is_conv || is_ck)        state <= S_TILE;
          else if (is_pool)                 state <= S_PRA0;
          else if (is_act)                  state <= S_ARD;
          else begin pc <= pc + 1'b1;       state <= S_FETCH; end
        end
        S_TILE: begin
          c <= '0; cidx <= '0; sploaded <= 1'b0; state <= S_CCHK;
        end
        S_CCHK: begin
          if (16'(c) == cend)
            state <= is_ck ? S_WROW : S_WBL;
          else if (ins.sparse && !sploaded)
            state <= S_SPRD;
          else if (ch_pruned) begin
            cnt_skip_o <= cnt_skip_o + 32'd1;
            c <= c + 10'd1;
            if (c[4:0] == 5'd31) sploaded <= 1'b0;
          end else if (is_ck)
            state <= S_CKMAC;
          else begin
            fy <= '0; state <= S_FY;
          end
        end
        S_SPRD: state <= S_SPWT;
        S_SPWT: begin spmask <= sp_rdata_i; sploaded <= 1'b1; state <= S_CCHK; end
        S_FY: begin
          if (fy == ins.fy) begin
            cidx <= cidx + 10'd1; c <= c + 10'd1;
            if (c[4:0] == 5'd31) sploaded <= 1'b0;
            state <= S_CCHK;
          end else if (dec_row_zero) begin
            cnt_rowskip_o <= cnt_rowskip_o + 32'd1;
            fy <= fy + 4'd1;
          end else state <= S_LD1;
        end
        S_LD1: state <= S_LD2;
        S_LD2: begin fx <= '0; p <= 8'd16; state <= S_MAC; end
        S_MAC: begin
          if (!is_dec && !last_fx) p <= p + 8'd1;
          if (last_fx) begin
            fy <= fy + 4'd1; state <= S_FY;
          end else if (!is_dec && ins.dil > 4'd1) begin
            sh <= 4'd1; state <= S_SH;
          end else fx <= fx + 4'd1;
        end
        S_SH: begin
          p <= p + 8'd1;
          if (sh == ins.dil - 4'd1) begin fx <= fx + 4'd1; state <= S_MAC; end
          else sh <= sh + 4'd1;
        end
        S_CKMAC: begin
          cidx <= cidx + 10'd1; c <= c + 10'd1;
          if (c[4:0] == 5'd31) sploaded <= 1'b0;
          state <= S_CCHK;
        end
        S_WBL: begin t <= '0; state <= S_WB; end
        S_WB: begin
          t <= t + 4'd1;
          if (t == 4'(ARR - 1)) state <= S_BUB;
        end
        S_WROW: state <= S_BUB;
        S_BUB: state <= S_NEXT;
        S_NEXT: begin
          state <= S_TILE;
          if (is_ck) begin
            wbase <= wbase + 13'(16'(cidx) << 3);
            kt <= kt + 10'd1;
            if (16'(kt) == kt_n - 16'd1) begin pc <= pc + 1'b1; state <= S_FETCH; end
          end else if (16'(xt) != oxt - 16'd1) xt <= xt + 8'd1;
          else begin
            xt <= '0;
            if (16'(y) != oy - 16'd1) y <= y + 8'd1;
            else begin
              y <= '0;
              wbase <= wbase + 13'(16'(cidx) * fxfy);
              kt <= kt + 10'd1;
              if (16'(kt) == kt_n - 16'd1) begin pc <= pc + 1'b1; state <= S_FETCH; end
            end
          end
        end
        S_PRA0: state <= S_PRB0;
        S_PRB0: state <= S_PRA1;
        S_PRA1: state <= S_PRB1;
        S_PRB1: state <= S_PB1;
        S_PB1:  state <= S_PB2;
        S_PB2: begin
          state <= S_PRA0;
          if (16'(xt) != ox_l - 16'd1) xt <= xt + 8'd1;
          else begin
            xt <= '0;
            if (16'(y) != oy_l - 16'd1) y <= y + 8'd1;
            else begin
              y <= '0;
              if (16'(c) != 16'(ins.c) - 16'd1) c <= c + 10'd1;
              else begin pc <= pc + 1'b1; state <= S_FETCH; end
            end
          end
        end
        S_ARD: state <= S_AB1;
        S_AB1: state <= S_AB2;
        S_AB2: begin
          if (i == ins.cnt - 12'd1) begin pc <= pc + 1'b1; state <= S_FETCH; end
          else begin i <= i + 12'd1; state <= S_ARD; end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin u1 <= '0; u2 <= '0; end
    else begin u1 <= u0; u2 <= u1; end
  end

  // ---------------- outputs ----------------
  assign busy_o    = state != S_IDLE;
  assign done_o    = state == S_DONE;
  assign im_req_o  = state == S_FETCH;
  assign im_addr_o = pc;

  logic wr1, wr2;
  assign wr1 = u1.wrcol | u1.wrrow;
  assign wr2 = u2.ppwr;
  assign a_req_o  = u0.rd | wr1 | wr2;
  assign a_we_o   = wr1 | wr2;
  assign a_addr_o = wr1 ? u1.wa : (wr2 ? u2.wa : u0.ra);
  assign a_wsel_o = u1.wrcol ? 2'd0 : u1.wrrow ? 2'd1 :
                    (ins.ltype == LT_POOL) ? 2'd2 : 2'd3;

  assign w_req_o  = u0.wrd;
  assign w_row_o  = u0.wl[12:3];
  assign w_lane_o = u1.wl[2:0];
  assign sp_req_o  = u0.sprd;
  assign sp_addr_o = u0.spa;

  assign f_load_lo_o  = u1.ld_lo;
  assign f_load_hi_o  = u1.ld_hi;
  assign f_load_dec_o = u1.ld_dec;
  assign f_shift_o    = u1.fsh;
  assign f_bsel_o     = u1.bsel;
  assign f_doff_o     = u1.doff;
  assign f_ctrl_o     = u1.ctrl;

  assign pe_acc_en_o    = u1.mac | u1.zero;
  assign pe_acc_clr_o   = u1.zero;
  assign pe_zero_o      = u1.zero;
  assign pe_out_load_o  = u1.oload;
  assign pe_out_shift_o = u1.wrcol;
  assign mp_valid_o = u1.mp;
  assign mp_half_o  = u1.mphalf;
  assign nl_valid_o = u1.nl;

  assign ins_o = ins;
  assign ck_o  = is_ck;
  assign op_o  = (ins.ltype == LT_SVM_L1) ? PE_L1 :
                 (ins.ltype == LT_SVM_L2) ? PE_L2 : PE_MAC;

  // a stage-0 read never meets a stage-1/2 write on activation port A
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   !(u0.rd && (wr1 || wr2)));
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(wr1 && wr2));

endmodule
