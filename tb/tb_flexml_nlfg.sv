// tb_flexml_nlfg -- self-checking test of the non-linear function generator.
// Loads a random 16-segment piecewise-linear table through the LUT write
// port, then applies random inputs on all eight lanes and compares the
// output, one cycle later, with y = sat8(((slope*x) >>> 6) + offset) of the
// segment selected by the top four bits of x. Also loads a hard-sigmoid-like
// table and checks a few known points.
module tb_flexml_nlfg;
  import tv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, vi, vo;
  logic [3:0] idx;
  logic [7:0] sl, of;
  logic [ARR-1:0][WBITS-1:0] x, y;
  int m[16], b[16];
  flexml_nlfg dut (.clk_i(clk), .rst_ni(rst_n), .lut_we_i(we), .lut_idx_i(idx),
    .lut_slope_i(sl), .lut_offs_i(of), .valid_i(vi), .x_i(x), .valid_o(vo), .y_o(y));

  function automatic int ref_y(int xv);
    int s, v;
    s = (xv + 128) / 16;            // segment 0 = most negative inputs
    v = ((xv * m[s]) >>> 6) + b[s];
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  task automatic load(int i, int mm, int bb);
    @(negedge clk); we = 1; idx = 4'(i); sl = 8'(mm); of = 8'(bb); m[i] = mm; b[i] = bb;
    @(negedge clk); we = 0;
  endtask

  task automatic chk(string s, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int xv[ARR];
    we = 0; vi = 0; idx = 0; sl = 0; of = 0; x = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < 16; i++)
        if (rep == 0) load(i, int'($signed(8'($urandom))), int'($signed(8'($urandom))));
        else if (i < 6) load(i, 0, -64);                 // flat low part
        else if (i > 9) load(i, 0, 63);                  // flat high part
        else load(i, 32, 0);                              // slope 1/2 around 0
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        vi = 1;
        for (int l = 0; l < ARR; l++) begin
          xv[l] = int'($signed(8'($urandom)));
          x[l] = 8'(xv[l]);
        end
        @(negedge clk);
        vi = 0;
        chk("valid", vo, 1);
        for (int l = 0; l < ARR; l++) chk("y", $signed(y[l]), ref_y(xv[l]));
        if (rep == 1) begin
          chk("sig", $signed(y[0]), xv[0] < -32 ? -64 : xv[0] >= 32 ? 63 : xv[0] >>> 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
