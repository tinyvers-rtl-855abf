// tb_flexml_input_fifo -- self-checking test of the L0 FIFO.
// Normal mode: loads 16 random bytes as two words, then shifts random bytes
// in and checks the eight taps against a 16-entry model queue, at stride 1
// (tap j = entry j) and stride 2 (tap j = entry 2j). Deconvolution mode:
// loads one word a..h spread with zeros and checks the tap pattern of the
// three cycles "a 0 b 0 c 0 d 0", "0 b 0 c 0 d 0 e", "b 0 c 0 d 0 e 0"
// (phase 0, phase 1, then phase 0 after a double shift).
module tb_flexml_input_fifo;
  import tv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [ARR-1:0][WBITS-1:0] word, tap;
  logic [7:0] inb;
  logic lo, hi, dec_ld, sh, dec, ctrl;
  logic [1:0] stride;
  logic [7:0] q [16];
  flexml_input_fifo dut (.clk_i(clk), .rst_ni(rst_n), .word_i(word), .in_byte_i(inb),
    .load_lo_i(lo), .load_hi_i(hi), .load_dec_i(dec_ld), .shift_i(sh), .deconv_i(dec),
    .ctrl_i(ctrl), .stride_i(stride), .tap_o(tap));

  task automatic chk_taps(string s, logic [7:0] e [8]);
    checks++;
    for (int j = 0; j < 8; j++)
      if (tap[j] !== e[j]) begin
        failures++; $display("FAIL %s tap %0d got %h exp %h", s, j, tap[j], e[j]); break;
      end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [7:0] e [8];
    lo = 0; hi = 0; dec_ld = 0; sh = 0; dec = 0; ctrl = 0; stride = 1; word = '0; inb = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      stride = (rep % 2) ? 2'd2 : 2'd1;
      for (int h = 0; h < 2; h++) begin
        @(negedge clk); lo = (h == 0); hi = (h == 1);
        for (int i = 0; i < 8; i++) begin word[i] = 8'($urandom); q[h*8+i] = word[i]; end
      end
      @(negedge clk); lo = 0; hi = 0;
      for (int s = 0; s < 6; s++) begin
        for (int j = 0; j < 8; j++) e[j] = q[stride == 2 ? 2*j : j];
        chk_taps("normal", e);
        sh = 1; inb = 8'($urandom);
        for (int i = 0; i < 15; i++) q[i] = q[i+1];
        q[15] = inb;
        @(negedge clk); sh = 0;
      end
      // deconvolution: word a..h
      dec = 1; dec_ld = 1;
      for (int i = 0; i < 8; i++) word[i] = 8'(1 + $urandom % 255);
      @(negedge clk); dec_ld = 0; ctrl = 0;
      for (int j = 0; j < 8; j++) e[j] = (j % 2) ? 8'h00 : word[j/2];
      chk_taps("deconv a0b0", e);
      ctrl = 1; #1;
      for (int j = 0; j < 8; j++) e[j] = (j % 2) ? word[(j+1)/2] : 8'h00;
      chk_taps("deconv 0b0c", e);
      @(negedge clk); sh = 1;
      @(negedge clk); sh = 0; ctrl = 0; #1;
      for (int j = 0; j < 8; j++) e[j] = (j % 2) ? 8'h00 : word[j/2 + 1];
      chk_taps("deconv b0c0", e);
      @(negedge clk); dec = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
