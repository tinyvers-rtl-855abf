// wuc_pd_fsm -- bottom-level power-domain sequencer of the wake-up controller.
//
// One instance per switchable power domain. It walks a chain of seven states
//   POWER_ON - CLK_ENABLE - ISOLATE - RESET - SWITCH_POWER_2 -
//   SWITCH_POWER_1 - POWER_OFF
// one step per SETTLE cycles: towards POWER_OFF while off_i is high, towards
// POWER_ON while on_i is high, and stays put otherwise (the self-loops at the
// two ends). The outputs follow the position in the chain:
//   clk_en_o  high only in POWER_ON (clock gated from CLK_ENABLE down)
//   iso_o     high from ISOLATE down (isolation cells clamp the outputs)
//   rst_no    low from RESET down (domain held in reset)
//   sw2_o     high from SWITCH_POWER_2 up (second group of power switches)
//   sw1_o     high from SWITCH_POWER_1 up (first group of power switches)
// so powering down stops the clock, isolates, resets and then opens the two
// switch groups one after the other; powering up is the exact reverse, with
// the supply ramped in two steps to limit in-rush current.
//
// Timing: SETTLE cycles per step; a full power-up or power-down takes
// 6 x SETTLE cycles. on_o / off_o flag the two end states.
//
// From the paper: the state names and their chain order, with transitions
// between neighbours and self-loops at the end states (wake-up controller
// figure). The signal asserted in each state, the two-step switch meaning and
// the step time are this design's reading of the state names.
module wuc_pd_fsm #(
  parameter int unsigned SETTLE = 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic on_i,
  input  logic off_i,
  output logic clk_en_o,
  output logic iso_o,
  output logic rst_no,
  output logic sw1_o,
  output logic sw2_o,
  output logic on_o,
  output logic off_o
);
  typedef enum logic [2:0] {
    POWER_ON = 3'd0, CLK_ENABLE = 3'd1, ISOLATE = 3'd2, RESET = 3'd3,
    SWITCH_POWER_2 = 3'd4, SWITCH_POWER_1 = 3'd5, POWER_OFF = 3'd6
  } pd_state_e;

  localparam int unsigned CW = (SETTLE > 1) ? $clog2(SETTLE) : 1;
  pd_state_e     st;
  logic [CW-1:0] cnt;

  // the domain comes out of reset powered (boot mode: everything on)
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st <= POWER_ON; cnt <= '0;
    end else if ((off_i && st != POWER_OFF) || (on_i && st != POWER_ON)) begin
      if (cnt == CW'(SETTLE - 1)) begin
        cnt <= '0;
        st  <= off_i ? pd_state_e'(st + 3'd1) : pd_state_e'(st - 3'd1);
      end else cnt <= cnt + 1'b1;
    end else cnt <= '0;
  end

  assign clk_en_o = st == POWER_ON;
  assign iso_o    = st >= ISOLATE;
  assign rst_no   = st < RESET;
  assign sw2_o    = st <= SWITCH_POWER_2;
  assign sw1_o    = st <= SWITCH_POWER_1;
  assign on_o     = st == POWER_ON;
  assign off_o    = st == POWER_OFF;

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(on_i && off_i));
endmodule
