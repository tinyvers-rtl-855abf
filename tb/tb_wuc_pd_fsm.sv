// tb_wuc_pd_fsm -- self-checking test of one power-domain sequencing FSM.
// Walks the domain from Power ON to Power OFF and back, and checks after
// every step the control outputs of the state reached: clock enable only in
// Power ON, isolation from Isolate on, reset from Reset on, switch group 2
// open from Switch Power 1 on, switch group 1 open only in Power OFF. With
// SETTLE = 1 each step takes one cycle, so the full walk takes 6 cycles each
// way; also checks that the FSM holds when neither request is given and
// that it reverses in the middle of a walk.
module tb_wuc_pd_fsm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic on, off, clk_en, iso, rst_o, sw1, sw2, is_on, is_off;
  wuc_pd_fsm dut (.clk_i(clk), .rst_ni(rst_n), .on_i(on), .off_i(off),
    .clk_en_o(clk_en), .iso_o(iso), .rst_no(rst_o), .sw1_o(sw1), .sw2_o(sw2),
    .on_o(is_on), .off_o(is_off));

  // expected {clk_en, iso, rst_n, sw2, sw1} in states 0..6
  function automatic logic [4:0] exp_of(int s);
    return {s == 0, s >= 2, s < 3, s <= 4, s <= 5};
  endfunction

  task automatic chk_state(int s);
    checks++;
    if ({clk_en, iso, rst_o, sw2, sw1} !== exp_of(s) || is_on !== (s == 0) || is_off !== (s == 6)) begin
      failures++;
      $display("FAIL state %0d outputs %b", s, {clk_en, iso, rst_o, sw2, sw1});
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int s;
    on = 0; off = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk_state(0);
    for (int rep = 0; rep < 50; rep++) begin
      int stop;
      stop = (rep % 2) ? 6 : 1 + $urandom % 5;
      s = 0;
      off = 1;
      while (s < stop) begin @(negedge clk); s++; chk_state(s); end
      off = 0;
      repeat (3) @(negedge clk);
      chk_state(s);                          // holds without a request
      on = 1;
      while (s > 0) begin @(negedge clk); s--; chk_state(s); end
      @(negedge clk); chk_state(0);         // stays on
      on = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
