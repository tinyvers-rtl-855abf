// tb_wuc_rtc -- self-checking test of the millisecond real-time counter.
// With the default prescaler of 33 always-on clock cycles per millisecond
// (33 kHz clock), programs random wake-up times of 1..20 ms and checks that
// match_o pulses exactly cmp*33 cycles after enabling, once, and that the
// ms count stops there; also checks that clear restarts the count and that
// the counter holds while disabled.
module tb_wuc_rtc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, clr, match;
  logic [23:0] cmp, ms;
  wuc_rtc dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .clear_i(clr),
               .cmp_i(cmp), .ms_o(ms), .match_o(match));

  task automatic chk(string s, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int n, pulses;
    en = 0; clr = 0; cmp = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk); clr = 1; cmp = 24'(1 + $urandom % 20);
      @(negedge clk); clr = 0; en = 1;
      n = 0; pulses = 0;
      while (!match && n < 40000) begin @(negedge clk); n++; end
      chk("latency", n, cmp * 33);
      chk("ms", ms, cmp);
      repeat (100) begin @(negedge clk); pulses += match; end
      chk("once", pulses, 0);
      chk("stopped", ms, cmp);
      // hold while disabled
      @(negedge clk); clr = 1; cmp = 24'd5;
      @(negedge clk); clr = 0; en = 1;
      repeat (40) @(negedge clk);
      en = 0;
      repeat (200) @(negedge clk);
      chk("hold", ms, 1);
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
