// tb_flexml_instr_mem -- self-checking test of the ucode memory.
// Writes random 128-bit instructions as four 32-bit beats (beat 0 = bits
// 31:0) at the default depth of 64 entries, reads them back one cycle after
// the request and checks them field by field through the ucode struct.
module tb_flexml_instr_mem;
  import tv_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_req, b_we;
  logic [5:0] a_addr;
  logic [7:0] b_addr;
  logic [31:0] b_wd;
  ucode_t rd;
  logic [127:0] model [64];
  flexml_instr_mem dut (.clk_i(clk), .a_req_i(a_req), .a_addr_i(a_addr), .a_rdata_o(rd),
    .b_we_i(b_we), .b_addr_i(b_addr), .b_wdata_i(b_wd));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    ucode_t u;
    a_req = 0; b_we = 0; a_addr = 0; b_addr = 0; b_wd = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < 64; i++) begin
        model[i] = {$urandom, $urandom, $urandom, $urandom};
        for (int k = 0; k < 4; k++) begin
          @(negedge clk); b_we = 1; b_addr = 8'(i*4+k); b_wd = model[i][32*k +: 32];
        end
      end
      @(negedge clk); b_we = 0;
      for (int t = 0; t < 200; t++) begin
        @(negedge clk); a_req = 1; a_addr = 6'($urandom);
        u = ucode_t'(model[a_addr]);
        @(negedge clk); a_req = 0;
        checks++;
        if (rd !== u || rd.ltype !== u.ltype || rd.cnt !== u.cnt || rd.k !== u.k) begin
          failures++; $display("FAIL instr %0d", a_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
