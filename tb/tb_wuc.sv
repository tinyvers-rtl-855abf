// tb_wuc -- self-checking test of the wake-up controller on its own.
// For each low-power mode (data acquisition, LP data acquisition, deep
// sleep) and each wake target (active with eMRAM off / on, boot) it orders
// the mode over APB, waits for the top-level FSM to reach Power OFF, checks
// the six domains against the power-mode table, wakes by the external pin
// or by the RTC after a random number of ms, and checks the domains again.
// The wake-up latency into Active with the eMRAM off must stay within the
// 788 us at 33 kHz (26 always-on cycles) of the silicon, and is checked
// exactly against this design's 23 cycles from deep sleep (+6 with the eMRAM
// or into Boot, -6 per L2 domain still on); the RTC wake must come exactly
// cmp*33 cycles after the mode was entered (the counter starts at Power OFF).
// Also checks that a command for a non-low-power mode is ignored.
module tb_wuc;
  import tv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic psel, pen, pwr, pready, ext, irq;
  logic [7:0] paddr;
  logic [31:0] pwdata, prdata;
  logic [NPD-1:0] ce, iso, rn, s1, s2;
  pmode_e mode;
  wuc dut (.clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(pen), .pwrite_i(pwr),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .ext_wake_i(ext), .pd_clk_en_o(ce), .pd_iso_o(iso), .pd_rst_no(rn),
    .pd_sw1_o(s1), .pd_sw2_o(s2), .mode_o(mode), .wake_irq_o(irq));

  task automatic chk(string s, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask
  task automatic wr(int a, int d);
    @(negedge clk); psel = 1; pen = 0; pwr = 1; paddr = 8'(a); pwdata = d;
    @(negedge clk); pen = 1;
    @(negedge clk); psel = 0; pen = 0; pwr = 0;
  endtask
  function automatic logic [5:0] on_vec(pmode_e m, bit mram);
    case (m)
      PM_BOOT: return 6'b111111;
      PM_ACTIVE: return {1'b1, mram, 4'b1111};
      PM_DATA_ACQ: return 6'b101100;
      PM_LP_DATA_ACQ: return 6'b101000;
      default: return 6'b000000;
    endcase
  endfunction
  task automatic chk_dom(string s, logic [5:0] v);
    chk({s, " sw"}, {s1, s2}, {v, v});
    chk({s, " iso"}, iso, 6'(~v));
    chk({s, " rst"}, rn, v);
    chk({s, " clk"}, ce, v);
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int n, cmpms;
    pmode_e lp, tgt;
    bit mram, boot, use_rtc;
    psel = 0; pen = 0; pwr = 0; paddr = 0; pwdata = 0; ext = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk_dom("reset", on_vec(PM_BOOT, 0));
    wr(32'h00, 32'h100 | PM_ACTIVE);                 // not a low-power mode: ignored
    repeat (20) @(negedge clk);
    chk_dom("ignored", on_vec(PM_BOOT, 0));
    for (int t = 0; t < 18; t++) begin
      lp = pmode_e'(PM_DATA_ACQ + t % 3);
      mram = t[2]; boot = (t % 6 == 5); use_rtc = t[0];
      cmpms = 1 + $urandom % 3;
      wr(32'h04, {28'd0, !use_rtc, use_rtc, mram, boot});
      wr(32'h08, cmpms);
      wr(32'h00, 32'h100 | lp);
      n = 0;
      while (dut.st != 3'd5 && n < 200) begin @(negedge clk); n++; end
      chk("mode", mode, lp);
      chk_dom("low", on_vec(lp, 0));
      n = 0;
      if (!use_rtc) begin repeat (5) @(negedge clk); ext = 1; end
      else begin
        // from Power OFF the RTC counts cmp ms
        while (!dut.rtc_match && n < 100000) begin @(negedge clk); n++; end
        chk("rtc time", n, cmpms * 33);
      end
      n = 0;
      while (!irq && n < 1000) begin @(negedge clk); n++; end
      ext = 0;
      // eMRAM off: within the silicon's 26 cycles; eMRAM (or boot) adds one
      // domain sequence of 6 cycles
      chk("latency", n, 23 + ((mram || boot) ? 6 : 0)
                        - (lp == PM_DATA_ACQ ? 12 : lp == PM_LP_DATA_ACQ ? 6 : 0));
      checks++;
      if (!(mram || boot) && n > 26) begin failures++; $display("FAIL latency %0d", n); end
      tgt = boot ? PM_BOOT : PM_ACTIVE;
      @(negedge clk);
      chk("wake mode", mode, tgt);
      chk_dom("woken", on_vec(tgt, mram));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
