// tb_flexml_maxpool -- self-checking test of the 2x2 max-pooling unit.
// Feeds two halves of random signed rows (lanes 0-3 then 4-7 of the
// output word) and checks the pooled word, and that valid_o pulses exactly
// one cycle after the second half and never after the first.
module tb_flexml_maxpool;
  import tv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid, half, vout;
  logic [ARR-1:0][WBITS-1:0] ra, rb, y;
  flexml_maxpool dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid),
    .half_i(half), .row_a_i(ra), .row_b_i(rb), .valid_o(vout), .y_o(y));

  function automatic int smax(int a, int b); return a > b ? a : b; endfunction

  task automatic chk(string s, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [ARR-1:0][WBITS-1:0] exp;
    valid = 0; half = 0; ra = '0; rb = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        valid = 1; half = h[0];
        for (int i = 0; i < ARR; i++) begin ra[i] = 8'($urandom); rb[i] = 8'($urandom); end
        for (int i = 0; i < ARR/2; i++)
          exp[h*4+i] = 8'(smax(smax($signed(ra[2*i]), $signed(ra[2*i+1])),
                               smax($signed(rb[2*i]), $signed(rb[2*i+1]))));
        @(negedge clk);
        valid = 0;
        chk("valid", vout, h);
      end
      chk("y", y, exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
