// flexml_dma -- FlexML DMA engine: moves data between the shared L2 memory
// and the accelerator's private memories.
//
// One job at a time, programmed through the control registers: an L2 byte
// address, an L1 address, a length and a target. Targets: 0 activation L1
// (64-bit words, either direction), 1 weight L1 (64-bit lanes, L2 to L1),
// 2 sparsity index memory (32-bit words), 3 instruction memory (32-bit
// beats). The L2 side is a 32-bit TCDM master port (req/gnt, response one
// cycle after the grant with r_valid); a 64-bit L1 word takes two L2 beats,
// low half first at the lower address. The L1 side retries while the target
// bank is busy with the core (ping-pong collision, gnt low), so a job can run
// into one bank while the core computes from the other.
//
// Timing: start_i is a one-cycle pulse; busy_o stays high until the last
// write is accepted; done_o pulses once. L2-to-L1 moves need about 5 cycles
// per 64-bit word, L1-to-L2 moves about 4.
//
// From the paper: a DMA engine, an FSM controlling the (un)loading of the
// private memories via HWPE streamers (two sources, one sink) on the TCDM.
// Own choices: a single sequential channel, the register interface, the
// word order and the absence of burst overlap.
module flexml_dma (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [31:0] l2_addr_i,
  input  logic [15:0] l1_addr_i,
  input  logic [15:0] len_i,       // L1 words (64-bit for targets 0/1)
  input  logic [1:0]  target_i,
  input  logic        to_l2_i,     // 1: activation L1 -> L2
  output logic        busy_o,
  output logic        done_o,
  // TCDM master
  output logic        tcdm_req_o,
  output logic        tcdm_we_o,
  output logic [31:0] tcdm_addr_o,
  output logic [31:0] tcdm_wdata_o,
  input  logic        tcdm_gnt_i,
  input  logic        tcdm_rvalid_i,
  input  logic [31:0] tcdm_rdata_i,
  // activation L1 port B
  output logic        act_req_o,
  output logic        act_we_o,
  output logic [12:0] act_addr_o,
  output logic [63:0] act_wdata_o,
  input  logic        act_gnt_i,
  input  logic [63:0] act_rdata_i,
  // weight L1 port B
  output logic        wgt_req_o,
  output logic [12:0] wgt_addr_o,
  output logic [63:0] wgt_wdata_o,
  input  logic        wgt_gnt_i,
  // sparsity memory port B
  output logic        sp_req_o,
  output logic [9:0]  sp_addr_o,
  output logic [31:0] sp_wdata_o,
  input  logic        sp_gnt_i,
  // instruction memory port B
  output logic        im_we_o,
  output logic [7:0]  im_addr_o,
  output logic [31:0] im_wdata_o
);
  typedef enum logic [3:0] {
    D_IDLE, D_RD0, D_RW0, D_RD1, D_RW1, D_WL1,
    D_L1RD, D_L1WT, D_WR0, D_WR1, D_DONE
  } dstate_e;

  dstate_e     st;
  logic [31:0] l2a;
  logic [15:0] l1a, left;
  logic [1:0]  tgt;
  logic [63:0] buf_q;
  logic        wide;

  assign wide = (tgt == 2'd0) || (tgt == 2'd1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st <= D_IDLE; l2a <= '0; l1a <= '0; left <= '0; tgt <= '0; buf_q <= '0;
    end else begin
      unique case (st)
        D_IDLE: if (start_i) begin
          l2a <= l2_addr_i; l1a <= l1_addr_i; left <= len_i; tgt <= target_i;
          if (len_i == '0)  st <= D_DONE;
          else if (to_l2_i) st <= D_L1RD;
          else              st <= D_RD0;
        end
        D_RD0: if (tcdm_gnt_i) st <= D_RW0;
        D_RW0: if (tcdm_rvalid_i) begin
          buf_q[31:0] <= tcdm_rdata_i;
          st <= wide ? D_RD1 : D_WL1;
        end
        D_RD1: if (tcdm_gnt_i) st <= D_RW1;
        D_RW1: if (tcdm_rvalid_i) begin buf_q[63:32] <= tcdm_rdata_i; st <= D_WL1; end
        D_WL1: begin
          if ((tgt == 2'd0 && act_gnt_i) || (tgt == 2'd1 && wgt_gnt_i) ||
              (tgt == 2'd2 && sp_gnt_i) || tgt == 2'd3) begin
            l1a  <= l1a + 16'd1;
            l2a  <= l2a + (wide ? 32'd8 : 32'd4);
            left <= left - 16'd1;
            st   <= (left == 16'd1) ? D_DONE : D_RD0;
          end
        end
        D_L1RD: if (act_gnt_i) st <= D_L1WT;
        D_L1WT: begin buf_q <= act_rdata_i; st <= D_WR0; end
        D_WR0: if (tcdm_gnt_i) st <= D_WR1;
        D_WR1: if (tcdm_gnt_i) begin
          l1a  <= l1a + 16'd1;
          l2a  <= l2a + 32'd8;
          left <= left - 16'd1;
          st   <= (left == 16'd1) ? D_DONE : D_L1RD;
        end
        D_DONE: st <= D_IDLE;
        default: st <= D_IDLE;
      endcase
    end
  end

  assign busy_o = st != D_IDLE;
  assign done_o = st == D_DONE;

  always_comb begin
    tcdm_req_o   = st inside {D_RD0, D_RD1, D_WR0, D_WR1};
    tcdm_we_o    = st inside {D_WR0, D_WR1};
    tcdm_addr_o  = (st == D_RD1 || st == D_WR1) ? l2a + 32'd4 : l2a;
    tcdm_wdata_o = (st == D_WR1) ? buf_q[63:32] : buf_q[31:0];
  end

  assign act_req_o   = (st == D_WL1 && tgt == 2'd0) || st == D_L1RD;
  assign act_we_o    = st == D_WL1;
  assign act_addr_o  = l1a[12:0];
  assign act_wdata_o = buf_q;
  assign wgt_req_o   = st == D_WL1 && tgt == 2'd1;
  assign wgt_addr_o  = l1a[12:0];
  assign wgt_wdata_o = buf_q;
  assign sp_req_o    = st == D_WL1 && tgt == 2'd2;
  assign sp_addr_o   = l1a[9:0];
  assign sp_wdata_o  = buf_q[31:0];
  assign im_we_o     = st == D_WL1 && tgt == 2'd3;
  assign im_addr_o   = l1a[7:0];
  assign im_wdata_o  = buf_q[31:0];

endmodule
