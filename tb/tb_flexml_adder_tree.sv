// tb_flexml_adder_tree -- self-checking test of the row adder tree.
// Applies random 32-bit vectors (including large values that wrap) to the
// eight inputs and compares the combinational sum with a sum computed here.
module tb_flexml_adder_tree;
  import tv_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [ARR-1:0][ACCBITS-1:0] in;
  logic [ACCBITS-1:0] sum;
  flexml_adder_tree dut (.in_i(in), .sum_o(sum));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [31:0] exp;
    for (int t = 0; t < 2000; t++) begin
      exp = 0;
      for (int i = 0; i < ARR; i++) begin
        in[i] = (t % 2) ? $urandom : $urandom % 1000 - 500;
        exp += in[i];
      end
      @(posedge clk);
      checks++;
      if (sum !== exp) begin
        failures++;
        $display("FAIL sum %h exp %h", sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
