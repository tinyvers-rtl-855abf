// wuc -- wake-up controller (WuC) of TinyVers, in the always-on domain.
//
// The WuC switches the SoC between its five power modes by powering its six
// switchable domains up and down in a fixed order. It is built as a
// hierarchy of FSMs:
//  * the top-level FSM walks the chain
//      POWER_ON - POWER_LOGIC_L1 - POWER_MRAM - POWER_UDMA - POWER_L2 - POWER_OFF
//    towards POWER_OFF when the host orders a low-power mode, and back
//    towards POWER_ON on a wake-up event. In each middle state it asks the
//    domains of that group (logic + L1; eMRAM; uDMA; shared L2 + LP L2) to
//    go to the state the target mode needs, and waits until they are there;
//  * one bottom-level FSM per domain (wuc_pd_fsm) sequences clock gating,
//    isolation, reset and the two power-switch groups of that domain.
// A real-time counter (wuc_rtc) with millisecond resolution produces the
// timed wake-up; an external wake pin can wake the SoC too.
//
// Domain states per mode (on = 1), from the paper's power-mode table:
//                 logic L1  L2   LP-L2 MRAM uDMA
//   Boot           1     1   1    1     1    1
//   Active         1     1   1    1    0/1   1
//   Data acq.      0     0   1    1     0    1
//   LP data acq.   0     0   0    1     0    1
//   Deep sleep     0     0   0    0     0    0
// (the always-on domain is never switched).
//
// Host interface: APB slave on the always-on clock:
//   0x00 CMD      write: bits2:0 power mode to enter (Data acq., LP data acq.
//                 or deep sleep), bit8 go
//   0x04 WAKE     bit0 wake into Boot (else Active), bit1 eMRAM on in Active,
//                 bit2 RTC wake enable, bit3 external wake enable
//   0x08 RTC_CMP  wake-up time in ms after entering the low-power mode
//   0x0C STATUS   read: bits2:0 top state, bits8:3 domains on, bits11:9 mode
//   0x10 RTC      read: milliseconds counted
// wake_irq_o pulses when the SoC is back in POWER_ON after a wake-up.
//
// Timing: with SETTLE = 1 a domain needs 6 cycles, and the top FSM one
// extra cycle per group; a wake-up from deep sleep into Active with the
// eMRAM off takes 23 always-on clock cycles, with the eMRAM on 29.
//
// From the paper: RTC with ms granularity programmed by the host, five power
// modes and their domain table, the top-level and bottom-level state chains.
// Own choices: the register map, the wake sources, SETTLE and the exact
// timing (the paper measures 788 us at 33 kHz, about 26 cycles).
module wuc
  import tv_pkg::*;
#(
  parameter int unsigned PRESCALE = 33,
  parameter int unsigned SETTLE   = 1
) (
  input  logic           clk_i,          // always-on clock
  input  logic           rst_ni,
  input  logic           psel_i,
  input  logic           penable_i,
  input  logic           pwrite_i,
  input  logic [7:0]     paddr_i,
  input  logic [31:0]    pwdata_i,
  output logic [31:0]    prdata_o,
  output logic           pready_o,
  input  logic           ext_wake_i,
  output logic [NPD-1:0] pd_clk_en_o,
  output logic [NPD-1:0] pd_iso_o,
  output logic [NPD-1:0] pd_rst_no,
  output logic [NPD-1:0] pd_sw1_o,
  output logic [NPD-1:0] pd_sw2_o,
  output pmode_e         mode_o,
  output logic           wake_irq_o
);
  typedef enum logic [2:0] {
    T_ON = 3'd0, T_LOGIC = 3'd1, T_MRAM = 3'd2, T_UDMA = 3'd3, T_L2 = 3'd4,
    T_OFF = 3'd5
  } top_e;

  function automatic logic [NPD-1:0] mode_vec(pmode_e m, logic mram);
    unique case (m)
      PM_BOOT:        return 6'b111111;
      PM_ACTIVE:      return {1'b1, mram, 4'b1111};
      PM_DATA_ACQ:    return 6'b101100;
      PM_LP_DATA_ACQ: return 6'b101000;
      default:        return 6'b000000;
    endcase
  endfunction

  function automatic logic [NPD-1:0] group_of(top_e s);
    unique case (s)
      T_LOGIC: return 6'b000011;
      T_MRAM:  return 6'b010000;
      T_UDMA:  return 6'b100000;
      T_L2:    return 6'b001100;
      default: return 6'b000000;
    endcase
  endfunction

  // ---------------- registers ----------------
  logic        wr, go;
  logic [2:0]  cmd_mode;
  logic        wake_boot, wake_mram, wake_rtc_en, wake_ext_en;
  logic [23:0] rtc_cmp, rtc_ms;
  assign wr       = psel_i && penable_i && pwrite_i;
  assign pready_o = 1'b1;
  assign go       = wr && paddr_i[7:2] == 6'h00 && pwdata_i[8];
  assign cmd_mode = pwdata_i[2:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wake_boot <= 1'b0; wake_mram <= 1'b0; wake_rtc_en <= 1'b0;
      wake_ext_en <= 1'b0; rtc_cmp <= '0;
    end else if (wr) begin
      if (paddr_i[7:2] == 6'h01) begin
        wake_boot <= pwdata_i[0]; wake_mram <= pwdata_i[1];
        wake_rtc_en <= pwdata_i[2]; wake_ext_en <= pwdata_i[3];
      end
      if (paddr_i[7:2] == 6'h02) rtc_cmp <= pwdata_i[23:0];
    end
  end

  // ---------------- top-level FSM ----------------
  top_e           st;
  logic           up;          // walking towards POWER_ON
  logic [NPD-1:0] tgt;         // domains to be on in the target mode
  logic [NPD-1:0] pd_on, pd_off, on_req, off_req;
  logic           rtc_match, wake_ev, group_done;
  pmode_e         mode_q;

  assign wake_ev = (wake_rtc_en && rtc_match) || (wake_ext_en && ext_wake_i);

  always_comb begin
    on_req  = group_of(st) & tgt & ~pd_on;
    off_req = group_of(st) & ~tgt & ~pd_off;
    group_done = ((group_of(st) & tgt & ~pd_on) == '0) &&
                 ((group_of(st) & ~tgt & ~pd_off) == '0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st <= T_ON; up <= 1'b1; tgt <= '1; mode_q <= PM_BOOT; wake_irq_o <= 1'b0;
    end else begin
      wake_irq_o <= 1'b0;
      unique case (st)
        T_ON: if (go && cmd_mode inside {PM_DATA_ACQ, PM_LP_DATA_ACQ, PM_DEEP_SLEEP}) begin
          tgt    <= mode_vec(pmode_e'(cmd_mode), 1'b0);
          mode_q <= pmode_e'(cmd_mode);
          up     <= 1'b0;
          st     <= T_LOGIC;
        end
        T_OFF: if (wake_ev) begin
          tgt    <= mode_vec(wake_boot ? PM_BOOT : PM_ACTIVE, wake_mram);
          up     <= 1'b1;
          st     <= T_L2;
        end
        default: if (group_done) begin
          if (up) begin
            st <= top_e'(st - 3'd1);
            if (st == T_LOGIC) begin
              wake_irq_o <= 1'b1;
              mode_q     <= wake_boot ? PM_BOOT : PM_ACTIVE;
            end
          end else st <= top_e'(st + 3'd1);
        end
      endcase
    end
  end
  assign mode_o = mode_q;

  // ---------------- bottom-level FSMs ----------------
  for (genvar d = 0; d < NPD; d++) begin : g_pd
    wuc_pd_fsm #(.SETTLE(SETTLE)) u_pd (
      .clk_i, .rst_ni,
      .on_i(on_req[d]), .off_i(off_req[d]),
      .clk_en_o(pd_clk_en_o[d]), .iso_o(pd_iso_o[d]), .rst_no(pd_rst_no[d]),
      .sw1_o(pd_sw1_o[d]), .sw2_o(pd_sw2_o[d]),
      .on_o(pd_on[d]), .off_o(pd_off[d])
    );
  end

  // ---------------- RTC ----------------
  wuc_rtc #(.PRESCALE(PRESCALE)) u_rtc (
    .clk_i, .rst_ni,
    .en_i(st == T_OFF), .clear_i(go),
    .cmp_i(rtc_cmp), .ms_o(rtc_ms), .match_o(rtc_match)
  );

  always_comb begin
    unique case (paddr_i[7:2])
      6'h01: prdata_o = {28'd0, wake_ext_en, wake_rtc_en, wake_mram, wake_boot};
      6'h02: prdata_o = {8'd0, rtc_cmp};
      6'h03: prdata_o = {20'd0, mode_q, pd_on, st};
      6'h04: prdata_o = {8'd0, rtc_ms};
      default: prdata_o = '0;
    endcase
  end
endmodule
