// tb_flexml_act_l1 -- self-checking test of the two-bank activation memory.
// Issues random reads and writes on the core port (A) and the DMA port (B)
// at the same time and checks: read data one cycle after a read against a
// model array; that B is granted exactly when it does not hit the bank A
// uses (ping-pong: one bank computes while the other is filled); and that
// both ports can be served in one cycle when they use different banks.
// Runs at a reduced depth of 64 words per bank-pair.
module tb_flexml_act_l1;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, parallel = 0;
  logic a_req, a_we, b_req, b_we, b_gnt;
  logic [AW-1:0] a_addr, b_addr;
  logic [63:0] a_wd, a_rd, b_wd, b_rd;
  logic [63:0] model [DEPTH];
  flexml_act_l1 #(.DEPTH(DEPTH)) dut (.clk_i(clk), .a_req_i(a_req), .a_we_i(a_we),
    .a_addr_i(a_addr), .a_wdata_i(a_wd), .a_rdata_o(a_rd), .b_req_i(b_req),
    .b_we_i(b_we), .b_addr_i(b_addr), .b_wdata_i(b_wd), .b_gnt_o(b_gnt), .b_rdata_o(b_rd));

  task automatic chk(string s, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", s, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic ea, eb; logic [63:0] xa, xb;
    a_req = 0; b_req = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wd = 0; b_wd = 0;
    // initialise through both ports
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); a_req = 1; a_we = 1; a_addr = AW'(i); a_wd = {$urandom, $urandom}; model[i] = a_wd;
    end
    @(negedge clk); a_req = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      a_req = 1'($urandom); a_we = 1'($urandom); a_addr = AW'($urandom); a_wd = {$urandom, $urandom};
      b_req = 1'($urandom); b_we = 1'($urandom); b_addr = AW'($urandom); b_wd = {$urandom, $urandom};
      #1;
      chk("gnt", b_gnt, b_req && !(a_req && a_addr[AW-1] == b_addr[AW-1]));
      ea = a_req && !a_we; xa = model[a_addr];
      eb = b_gnt && !b_we; xb = model[b_addr];
      if (a_req && b_gnt) parallel++;
      if (a_req && a_we) model[a_addr] = a_wd;
      if (b_gnt && b_we) model[b_addr] = b_wd;
      @(negedge clk);
      a_req = 0; b_req = 0;
      if (ea) chk("a_rd", a_rd, xa);
      if (eb) chk("b_rd", b_rd, xb);
    end
    checks++;
    if (parallel == 0) begin failures++; $display("FAIL no parallel access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
