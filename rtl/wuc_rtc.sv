// wuc_rtc -- real-time counter of the wake-up controller (always-on domain).
//
// A prescaler divides the always-on clock down to a 1 ms tick; a millisecond
// counter then counts ticks while enabled. When the count reaches the
// programmed compare value, match_o pulses for one cycle (a wake-up event)
// and the counter stops. clear_i restarts both prescaler and counter.
//
// Timing: with PRESCALE = 33 and a 33 kHz clock one tick is 1 ms (33 cycles);
// match_o rises CMP x PRESCALE cycles after the clear.
//
// From the paper: an RTC the host programs with millisecond granularity,
// driving the wake-up controller's FSMs; the 33 kHz always-on clock. The
// prescaler, the compare-and-stop behaviour and the widths are this design's.
module wuc_rtc #(
  parameter int unsigned PRESCALE = 33     // AON cycles per millisecond
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        clear_i,
  input  logic [23:0] cmp_i,               // wake-up time in ms
  output logic [23:0] ms_o,
  output logic        match_o
);
  localparam int unsigned PW = $clog2(PRESCALE + 1);
  logic [PW-1:0] pre;
  logic          fired;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pre <= '0; ms_o <= '0; fired <= 1'b0; match_o <= 1'b0;
    end else begin
      match_o <= 1'b0;
      if (clear_i) begin
        pre <= '0; ms_o <= '0; fired <= 1'b0;
      end else if (en_i && !fired) begin
        if (pre == PW'(PRESCALE - 1)) begin
          pre  <= '0;
          ms_o <= ms_o + 24'd1;
          if (ms_o + 24'd1 == cmp_i) begin
            match_o <= 1'b1;
            fired   <= 1'b1;
          end
        end else pre <= pre + 1'b1;
      end
    end
  end
endmodule
