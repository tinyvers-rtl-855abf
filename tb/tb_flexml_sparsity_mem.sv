// tb_flexml_sparsity_mem -- self-checking test of the sparsity index memory.
// Writes random 32-bit prune masks through the DMA port while the control
// unit port reads, and checks read data (one cycle later) against a model
// and the ping-pong grant rule. Runs at 32 words.
module tb_flexml_sparsity_mem;
  localparam int DEPTH = 32, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_req, b_req, b_gnt;
  logic [AW-1:0] a_addr, b_addr;
  logic [31:0] a_rd, b_wd;
  logic [31:0] model [DEPTH];
  flexml_sparsity_mem #(.DEPTH(DEPTH)) dut (.clk_i(clk), .a_req_i(a_req), .a_addr_i(a_addr),
    .a_rdata_o(a_rd), .b_req_i(b_req), .b_addr_i(b_addr), .b_wdata_i(b_wd), .b_gnt_o(b_gnt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic ea; logic [31:0] xa;
    a_req = 0; b_req = 0; a_addr = 0; b_addr = 0; b_wd = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); b_req = 1; b_addr = AW'(i); b_wd = $urandom; model[i] = b_wd;
    end
    @(negedge clk); b_req = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a_req = 1'($urandom); a_addr = AW'($urandom);
      b_req = 1'($urandom); b_addr = AW'($urandom); b_wd = $urandom;
      #1;
      checks++;
      if (b_gnt !== (b_req && !(a_req && a_addr[AW-1] == b_addr[AW-1]))) begin
        failures++; $display("FAIL gnt");
      end
      ea = a_req; xa = model[a_addr];
      if (b_gnt) model[b_addr] = b_wd;
      @(negedge clk);
      a_req = 0; b_req = 0;
      if (ea) begin
        checks++;
        if (a_rd !== xa) begin failures++; $display("FAIL read %h exp %h", a_rd, xa); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
