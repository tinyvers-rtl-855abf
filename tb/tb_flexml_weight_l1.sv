// tb_flexml_weight_l1 -- self-checking test of the weight memory.
// Fills random lanes through the DMA port while the core port reads whole
// rows of eight 64-bit lanes, and checks every row read one cycle later
// against a model, the grant rule (a DMA write is held off only when the
// core reads the same ping-pong half) and that writes to the other half go
// through while the core reads. Runs at 16 rows.
module tb_flexml_weight_l1;
  localparam int ROWS = 16, RAW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, parallel = 0;
  logic a_req, b_req, b_gnt;
  logic [RAW-1:0] a_row;
  logic [RAW+2:0] b_addr;
  logic [511:0] a_rd;
  logic [63:0] b_wd;
  logic [63:0] model [ROWS][8];
  flexml_weight_l1 #(.ROWS(ROWS)) dut (.clk_i(clk), .a_req_i(a_req), .a_row_i(a_row),
    .a_rdata_o(a_rd), .b_req_i(b_req), .b_addr_i(b_addr), .b_wdata_i(b_wd), .b_gnt_o(b_gnt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic ea; logic [511:0] xa;
    a_req = 0; b_req = 0; a_row = 0; b_addr = 0; b_wd = 0;
    for (int i = 0; i < ROWS*8; i++) begin
      @(negedge clk); b_req = 1; b_addr = (RAW+3)'(i); b_wd = {$urandom, $urandom};
      model[i/8][i%8] = b_wd;
    end
    @(negedge clk); b_req = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a_req = 1'($urandom); a_row = RAW'($urandom);
      b_req = 1'($urandom); b_addr = (RAW+3)'($urandom); b_wd = {$urandom, $urandom};
      #1;
      checks++;
      if (b_gnt !== (b_req && !(a_req && a_row[RAW-1] == b_addr[RAW+2]))) begin
        failures++; $display("FAIL gnt");
      end
      ea = a_req;
      for (int l = 0; l < 8; l++) xa[l*64 +: 64] = model[a_row][l];
      if (a_req && b_gnt) parallel++;
      if (b_gnt) model[b_addr[RAW+2:3]][b_addr[2:0]] = b_wd;
      @(negedge clk);
      a_req = 0; b_req = 0;
      if (ea) begin
        checks++;
        if (a_rd !== xa) begin failures++; $display("FAIL row read"); end
      end
    end
    checks++;
    if (parallel == 0) begin failures++; $display("FAIL no parallel access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
