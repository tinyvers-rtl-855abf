// tb_flexml_pe -- self-checking test of one FlexML processing element.
// Drives random activation/weight pairs in every precision (INT8, INT4,
// INT2) and SVM mode (L1 and L2 distance), accumulates runs of 1..12 terms
// and compares the accumulator, the requantised output (shift, ReLU,
// saturation) and the neighbour shift path against a model computed here.
// One term is accumulated per cycle: checked by reading the accumulator
// exactly one cycle after each enable.
module tb_flexml_pe;
  import tv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] act, wgt, nb, out, q;
  prec_e prec; pe_op_e op;
  logic acc_en, acc_clr, relu, out_load, out_shift;
  logic [4:0] shift;
  logic [31:0] acc;

  flexml_pe dut (.clk_i(clk), .rst_ni(rst_n), .act_i(act), .wgt_i(wgt),
    .prec_i(prec), .op_i(op), .acc_en_i(acc_en), .acc_clr_i(acc_clr),
    .shift_i(shift), .relu_i(relu), .out_load_i(out_load),
    .out_shift_i(out_shift), .nb_i(nb), .out_o(out), .q_o(q), .acc_o(acc));

  function automatic int sx(int v, int bits);
    v = v & ((1 << bits) - 1);
    return (v >= (1 << (bits-1))) ? v - (1 << bits) : v;
  endfunction

  function automatic int term(int a, int w, prec_e p, pe_op_e o);
    int s, d, r;
    if (o == PE_L1) begin d = sx(a,8) - sx(w,8); return d < 0 ? -d : d; end
    if (o == PE_L2) begin
      d = sx(a,8) - sx(w,8);
      r = (d + 1 + 512) / 2 - 256;   // floor((d+1)/2)
      if (r > 127) r = 127;
      return r * r;
    end
    s = 0;
    case (p)
      PREC_INT4: for (int i = 0; i < 2; i++) s += sx(a >> (4*i), 4) * sx(w >> (4*i), 4);
      PREC_INT2: for (int i = 0; i < 4; i++) s += sx(a >> (2*i), 2) * sx(w >> (2*i), 2);
      default:   s = sx(a,8) * sx(w,8);
    endcase
    return s;
  endfunction

  function automatic int rq(int v, int sh, bit rl, prec_e p);
    int s, hi, lo;
    s = v >>> sh;
    if (rl && s < 0) s = 0;
    hi = (p == PREC_INT4) ? 7 : (p == PREC_INT2) ? 1 : 127;
    lo = -hi - 1;
    if (s > hi) s = hi;
    if (s < lo) s = lo;
    return s & 8'hff;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model, n;
    act = 0; wgt = 0; nb = 0; prec = PREC_INT8; op = PE_MAC; acc_en = 0;
    acc_clr = 0; relu = 0; out_load = 0; out_shift = 0; shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 600; run++) begin
      op   = pe_op_e'(($urandom % 4 == 0) ? 1 + $urandom % 2 : 0);
      prec = prec_e'($urandom % 3);
      n    = 1 + $urandom % 12;
      model = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        act = 8'($urandom); wgt = 8'($urandom);
        acc_en = 1; acc_clr = (i == 0);
        model = (i == 0) ? term(act, wgt, prec, op) : model + term(act, wgt, prec, op);
        @(negedge clk);
        acc_en = 0;
        check("acc", acc, model);   // visible one cycle after the enable
      end
      shift = 5'($urandom % 10); relu = 1'($urandom);
      #1 check("q", q, rq(model, shift, relu, prec));
      out_load = 1;
      @(negedge clk); out_load = 0;
      check("out", out, rq(model, shift, relu, prec));
      nb = 8'($urandom); out_shift = 1;
      @(negedge clk); out_shift = 0;
      check("nb", out, nb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
