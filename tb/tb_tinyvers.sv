// tb_tinyvers -- end-to-end test of the TinyVers SoC at its default sizes.
//
// Acting as the host core and the uDMA, the test:
//  1. writes input activations, weights, sparsity masks and a ucode program
//     into the shared L2 through the host's TCDM port;
//  2. programs FlexML over APB: four DMA jobs move the data into the
//     activation, weight, sparsity and instruction memories, the NLFG table
//     is loaded, and the control unit runs a twelve-instruction program:
//       conv 3x3 INT8 (OX|K), conv with blockwise structured sparsity,
//       deconvolution, conv stride 2 at INT4, conv dilation 2 at INT2,
//       dense (C|K), dense with sparsity, SVM L1 and SVM L2 kernels,
//       2x2 max pooling of the first conv result, NLFG on the dense result;
//  3. moves the activation memory back to L2 with a DMA job, reads it through
//     the host port and compares every valid output byte with a reference
//     model computed here from the same data;
//  4. takes the SoC through the power modes with the wake-up controller
//     (data acquisition with the uDMA writing L2 while the logic is off and
//     the host is isolated; LP data acquisition using only the LP L2 part;
//     deep sleep with everything off), waking by the external pin and by the
//     millisecond RTC, and checks every domain against the power-mode table
//     and the wake-up latency against 788 us at 33 kHz (26 always-on
//     cycles).
// Each mechanism is counted; one that never happened counts as a failure.
module tb_tinyvers;
  import tv_pkg::*;

  logic clk = 0, aon = 0, rst_n = 0;
  always #5 clk = ~clk;
  always #40 aon = ~aon;
  int checks = 0, failures = 0;

  // ---------------- DUT ----------------
  logic        host_req, host_we, host_gnt, host_rvalid;
  logic [31:0] host_addr, host_wdata, host_rdata;
  logic [3:0]  host_be;
  logic        udma_req, udma_we, udma_gnt, udma_rvalid;
  logic [31:0] udma_addr, udma_wdata, udma_rdata;
  logic        ml_psel, ml_pen, ml_pwr, ml_pready, ml_irq;
  logic [11:0] ml_paddr;
  logic [31:0] ml_pwdata, ml_prdata;
  logic        w_psel, w_pen, w_pwr, w_pready, ext_wake, wake_irq;
  logic [7:0]  w_paddr;
  logic [31:0] w_pwdata, w_prdata, conflicts;
  logic [NPD-1:0] clk_en, iso, prst_n, sw1, sw2;
  pmode_e mode;

  tinyvers dut (
    .clk_soc_i(clk), .clk_aon_i(aon), .rst_ni(rst_n),
    .host_req_i(host_req), .host_we_i(host_we), .host_addr_i(host_addr),
    .host_wdata_i(host_wdata), .host_be_i(host_be), .host_gnt_o(host_gnt),
    .host_rvalid_o(host_rvalid), .host_rdata_o(host_rdata),
    .udma_req_i(udma_req), .udma_we_i(udma_we), .udma_addr_i(udma_addr),
    .udma_wdata_i(udma_wdata), .udma_be_i(4'hF), .udma_gnt_o(udma_gnt),
    .udma_rvalid_o(udma_rvalid), .udma_rdata_o(udma_rdata),
    .ml_psel_i(ml_psel), .ml_penable_i(ml_pen), .ml_pwrite_i(ml_pwr),
    .ml_paddr_i(ml_paddr), .ml_pwdata_i(ml_pwdata), .ml_prdata_o(ml_prdata),
    .ml_pready_o(ml_pready), .ml_irq_o(ml_irq),
    .wuc_psel_i(w_psel), .wuc_penable_i(w_pen), .wuc_pwrite_i(w_pwr),
    .wuc_paddr_i(w_paddr), .wuc_pwdata_i(w_pwdata), .wuc_prdata_o(w_prdata),
    .wuc_pready_o(w_pready), .ext_wake_i(ext_wake),
    .pd_clk_en_o(clk_en), .pd_iso_o(iso), .pd_rst_no(prst_n),
    .pd_sw1_o(sw1), .pd_sw2_o(sw2), .mode_o(mode), .wake_irq_o(wake_irq),
    .l2_conflicts_o(conflicts)
  );

  // ---------------- mechanism counters ----------------
  typedef enum int {
    M_CONV, M_SPARSE_SKIP, M_DECONV_ROWSKIP, M_STRIDE2, M_DILATION, M_INT4,
    M_INT2, M_DENSE, M_SVM_L1, M_SVM_L2, M_POOL, M_NLFG, M_DMA_IN, M_DMA_OUT,
    M_L2_CONFLICT, M_DATA_ACQ, M_LP_DATA_ACQ, M_DEEP_SLEEP, M_ISOLATION,
    M_EXT_WAKE, M_RTC_WAKE, M_IRQ, M_NUM
  } mech_e;
  int mech [M_NUM];

  task automatic chk(string s, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s got %0d (%h) exp %0d (%h)", s, got, got, exp, exp);
    end
  endtask

  // ---------------- bus tasks ----------------
  task automatic host_write(int addr, logic [31:0] d);
    @(negedge clk); host_req = 1; host_we = 1; host_addr = addr; host_wdata = d; host_be = 4'hF;
    do @(posedge clk); while (!host_gnt);
    @(negedge clk); host_req = 0; host_we = 0;
  endtask

  task automatic host_read(int addr, output logic [31:0] d);
    @(negedge clk); host_req = 1; host_we = 0; host_addr = addr; host_be = 4'hF;
    do @(posedge clk); while (!host_gnt);
    @(negedge clk); host_req = 0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  task automatic ml_write(int a, logic [31:0] d);
    @(negedge clk); ml_psel = 1; ml_pen = 0; ml_pwr = 1; ml_paddr = 12'(a); ml_pwdata = d;
    @(negedge clk); ml_pen = 1;
    @(negedge clk); ml_psel = 0; ml_pen = 0; ml_pwr = 0;
  endtask

  task automatic ml_read(int a, output logic [31:0] d);
    @(negedge clk); ml_psel = 1; ml_pen = 0; ml_pwr = 0; ml_paddr = 12'(a);
    @(negedge clk); ml_pen = 1; #1 d = ml_prdata;
    @(negedge clk); ml_psel = 0; ml_pen = 0;
  endtask

  task automatic wuc_write(int a, logic [31:0] d);
    @(negedge aon); w_psel = 1; w_pen = 0; w_pwr = 1; w_paddr = 8'(a); w_pwdata = d;
    @(negedge aon); w_pen = 1;
    @(negedge aon); w_psel = 0; w_pen = 0; w_pwr = 0;
  endtask

  task automatic wuc_read(int a, output logic [31:0] d);
    @(negedge aon); w_psel = 1; w_pen = 0; w_pwr = 0; w_paddr = 8'(a);
    @(negedge aon); w_pen = 1; #1 d = w_prdata;
    @(negedge aon); w_psel = 0; w_pen = 0;
  endtask

  // DMA job: target 0 act, 1 weight, 2 sparsity, 3 instr
  task automatic dma(int l2, int l1, int len, int tgt, bit to_l2);
    logic [31:0] st;
    ml_write(32'h08, l2); ml_write(32'h0C, l1); ml_write(32'h10, len);
    ml_write(32'h14, {29'd0, to_l2, 2'(tgt)});
    ml_write(32'h00, 32'h2);
    do ml_read(32'h04, st); while (!st[3]);
    ml_write(32'h04, 32'h8);
    if (to_l2) mech[M_DMA_OUT]++; else mech[M_DMA_IN]++;
  endtask

  // ---------------- reference data ----------------
  localparam int ACT_WORDS = 8192;
  localparam int L2_IN  = 32'h0_1000;   // activation image
  localparam int L2_W   = 32'h1_0000;   // weight lanes
  localparam int L2_SP  = 32'h2_0000;   // sparsity words
  localparam int L2_IM  = 32'h0_0000;   // ucode
  localparam int L2_OUT = 32'h4_0000;   // activation memory copied back
  localparam int LP_BASE = 32'h7_0000;

  logic [63:0] img  [ACT_WORDS];        // activation memory, model
  logic [63:0] wimg [2048];             // weight lanes
  logic [31:0] spimg [4];
  ucode_t      prog [16];
  int          nprog = 0;
  logic [7:0]  vmask [ACT_WORDS];       // bytes to compare per word
  int nl_m [16], nl_b [16];

  function automatic int sx(int v, int bits);
    v = v & ((1 << bits) - 1);
    return (v >= (1 << (bits-1))) ? v - (1 << bits) : v;
  endfunction

  function automatic int term(int a, int w, int p, int op);
    int s, d;
    if (op == 1) begin d = sx(a,8) - sx(w,8); return d < 0 ? -d : d; end
    if (op == 2) begin
      d = sx(a,8) - sx(w,8);
      d = (d + 1 + 512) / 2 - 256;
      if (d > 127) d = 127;
      return d * d;
    end
    s = 0;
    if (p == 1)      for (int i = 0; i < 2; i++) s += sx(a >> (4*i), 4) * sx(w >> (4*i), 4);
    else if (p == 2) for (int i = 0; i < 4; i++) s += sx(a >> (2*i), 2) * sx(w >> (2*i), 2);
    else             s = sx(a,8) * sx(w,8);
    return s;
  endfunction

  function automatic int rq(int v, int sh, bit rl, int p);
    int s, hi;
    s = v >>> sh;
    if (rl && s < 0) s = 0;
    hi = (p == 1) ? 7 : (p == 2) ? 1 : 127;
    if (s > hi) s = hi;
    if (s < -hi - 1) s = -hi - 1;
    return s & 8'hff;
  endfunction

  function automatic int getb(int word, int b);
    return int'(img[word][8*b +: 8]);
  endfunction

  task automatic setb(int word, int b, int v);
    img[word][8*b +: 8] = 8'(v);
    vmask[word][b] = 1'b1;
  endtask

  function automatic int nlfg(int x);
    int s, v;
    x = sx(x, 8);
    s = (x + 128) / 16;
    v = ((x * nl_m[s]) >>> 6) + nl_b[s];
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v & 8'hff;
  endfunction

  // fill an input tensor [c][y][word] with random bytes (padding bytes zero)
  task automatic fill_in(int ptr, int c, int iy, int ix);
    int rw;
    rw = ix / 8 + 2;
    for (int w = 0; w < c*iy*rw; w++) begin
      img[ptr + w] = '0;
      for (int b = 0; b < 8; b++)
        if ((w % rw) * 8 + b < ix) img[ptr + w][8*b +: 8] = 8'($urandom);
    end
  endtask

  function automatic ucode_t mk(layer_e lt, int ix, int iy, int c, int k, int fx, int fy,
                                int inp, int wp, int outp, int spp, bit sparse,
                                int stride, int dil, int sh, bit relu, int p, int cnt);
    ucode_t u;
    u = '0;
    u.ltype = lt; u.ix = 8'(ix); u.iy = 8'(iy); u.c = 10'(c); u.k = 10'(k);
    u.fx = 4'(fx); u.fy = 4'(fy); u.in_ptr = 13'(inp); u.w_ptr = 13'(wp);
    u.out_ptr = 13'(outp); u.sp_ptr = 10'(spp); u.sparse = sparse;
    u.stride = 2'(stride); u.dil = 4'(dil); u.shift = 5'(sh); u.relu = relu;
    u.prec = prec_e'(p); u.cnt = 12'(cnt);
    return u;
  endfunction

  // conv / deconv layer (3x3): weights generated here, model output into img
  int wv [16][8][3][3];
  task automatic conv_layer(bit dec, int inp, int ix, int iy, int c, int k,
                            int wp, int outp, int spp, bit sparse, int stride,
                            int dil, int sh, bit relu, int p);
    int rw, ox, oy, oxt, orw, lane, acc, xs, ys, a;
    bit pruned [2][8];
    rw = ix / 8 + 2;
    if (dec) begin ox = 2*ix - 2; oy = 2*iy - 2; end
    else begin
      ox = ((ix - 2*dil - 1) >> (stride == 2)) + 1;
      oy = ((iy - 2*dil - 1) >> (stride == 2)) + 1;
    end
    oxt = (ox + 7) / 8; orw = oxt + 2;
    lane = wp;
    for (int kt = 0; kt < k/8; kt++) begin
      if (sparse) begin
        spimg[spp + kt] = $urandom & ((1 << c) - 1);
        spimg[spp + kt][0] = 1'b1;       // at least one channel pruned
        spimg[spp + kt][1] = 1'b0;       // at least one kept
      end
      for (int ci = 0; ci < c; ci++) begin
        pruned[kt][ci] = sparse && spimg[spp + kt][ci];
        for (int fy = 0; fy < 3; fy++)
          for (int fx = 0; fx < 3; fx++)
            for (int r = 0; r < 8; r++)
              wv[kt*8+r][ci][fy][fx] = pruned[kt][ci] ? 0 : int'($urandom & 8'hff);
        if (!pruned[kt][ci])
          for (int fy = 0; fy < 3; fy++)
            for (int fx = 0; fx < 3; fx++) begin
              for (int r = 0; r < 8; r++) wimg[lane][8*r +: 8] = 8'(wv[kt*8+r][ci][fy][fx]);
              lane++;
            end
      end
    end
    prog[nprog++] = mk(dec ? LT_DECONV : LT_CONV, ix, iy, c, k, 3, 3, inp, wp, outp,
                       spp, sparse, stride, dil, sh, relu, p, 0);
    for (int kk = 0; kk < k; kk++)
      for (int y = 0; y < oy; y++)
        for (int x = 0; x < ox; x++) begin
          acc = 0;
          for (int ci = 0; ci < c; ci++)
            for (int fy = 0; fy < 3; fy++)
              for (int fx = 0; fx < 3; fx++) begin
                if (dec) begin
                  ys = y + fy; xs = x + fx;
                  if (ys % 2 == 1 || xs % 2 == 1) continue;
                  ys /= 2; xs /= 2;
                end else begin
                  ys = y * stride + fy * dil; xs = x * stride + fx * dil;
                end
                a = getb(inp + (ci*iy + ys)*rw + xs/8, xs % 8);
                acc += term(a, wv[kk][ci][fy][fx], p, 0);
              end
          setb(outp + (kk*oy + y)*orw + x/8, x % 8, rq(acc, sh, relu, p));
        end
  endtask

  // dense / SVM layer (C|K)
  int cw [16][64];
  task automatic ck_layer(layer_e lt, int inp, int c, int k, int wp, int outp, int spp,
                          bit sparse, int sh, bit relu, int p);
    int ct, row, acc, op;
    bit pr [2][8];
    ct = c / 8; row = wp / 8;
    op = (lt == LT_SVM_L1) ? 1 : (lt == LT_SVM_L2) ? 2 : 0;
    for (int kt = 0; kt < k/8; kt++) begin
      if (sparse) begin
        spimg[spp + kt] = $urandom & ((1 << ct) - 1);
        spimg[spp + kt][2] = 1'b1;
        spimg[spp + kt][0] = 1'b0;
      end
      for (int cb = 0; cb < ct; cb++) begin
        pr[kt][cb] = sparse && spimg[spp + kt][cb];
        for (int r = 0; r < 8; r++)
          for (int j = 0; j < 8; j++)
            cw[kt*8+r][cb*8+j] = pr[kt][cb] ? 0 : int'($urandom & 8'hff);
        if (!pr[kt][cb]) begin
          for (int r = 0; r < 8; r++)
            for (int j = 0; j < 8; j++) wimg[row*8 + r][8*j +: 8] = 8'(cw[kt*8+r][cb*8+j]);
          row++;
        end
      end
    end
    prog[nprog++] = mk(lt, 0, 0, c, k, 1, 1, inp, wp, outp, spp, sparse, 1, 1, sh, relu, p, 0);
    for (int kk = 0; kk < k; kk++) begin
      acc = 0;
      for (int ci = 0; ci < c; ci++)
        if (!(sparse && pr[kk/8][ci/8]))
          acc += term(getb(inp + ci/8, ci % 8), cw[kk][ci], p, op);
      setb(outp + kk/8, kk % 8, rq(acc, sh, relu, p));
    end
  endtask

  task automatic pool_layer(int inp, int ix, int iy, int c, int outp);
    int rw, orw, m, v;
    rw = ix/8 + 2; orw = ix/16 + 2;
    prog[nprog++] = mk(LT_POOL, ix, iy, c, 0, 2, 2, inp, 0, outp, 0, 0, 2, 1, 0, 0, 0, 0);
    for (int ci = 0; ci < c; ci++)
      for (int y = 0; y < iy/2; y++)
        for (int x = 0; x < ix/2; x++) begin
          m = -1000;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              v = sx(getb(inp + (ci*iy + 2*y + dy)*rw + (2*x + dx)/8, (2*x + dx) % 8), 8);
              if (v > m) m = v;
            end
          setb(outp + (ci*(iy/2) + y)*orw + x/8, x % 8, m);
        end
  endtask

  task automatic act_layer(int inp, int outp, int cnt);
    prog[nprog++] = mk(LT_ACT, 0, 0, 0, 0, 1, 1, inp, 0, outp, 0, 0, 1, 1, 0, 0, 0, cnt);
    for (int w = 0; w < cnt; w++)
      for (int b = 0; b < 8; b++) setb(outp + w, b, nlfg(getb(inp + w, b)));
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ml_irq) mech[M_IRQ] <= 1;

  // ---------------- power-mode helpers ----------------
  // expected on-vector {uDMA, MRAM, LP, DACQ, L1, LOGIC}
  function automatic logic [5:0] mode_on(pmode_e m, bit mram);
    case (m)
      PM_BOOT:        return 6'b111111;
      PM_ACTIVE:      return {1'b1, mram, 4'b1111};
      PM_DATA_ACQ:    return 6'b101100;
      PM_LP_DATA_ACQ: return 6'b101000;
      default:        return 6'b000000;
    endcase
  endfunction

  task automatic chk_domains(string s, logic [5:0] on);
    chk({s, " sw1"}, sw1, on);
    chk({s, " sw2"}, sw2, on);
    chk({s, " iso"}, iso, 6'(~on));
    chk({s, " rst"}, prst_n, on);
    chk({s, " clk"}, clk_en, on);
  endtask

  task automatic wait_off();
    logic [31:0] st;
    int n = 0;
    do begin wuc_read(32'h0C, st); n++; end while (st[2:0] != 3'd5 && n < 200);
    chk("reached off", st[2:0], 5);
  endtask

  // wake by the external pin, or by the RTC already programmed; the latency
  // is counted from the wake event to the wake interrupt
  task automatic wake_and_measure(bit ext, string s);
    int n = 0;
    if (ext) begin @(negedge aon); ext_wake = 1; end
    else begin
      int w = 0;
      while (!dut.u_wuc.rtc_match && w < 100000) begin @(negedge aon); w++; end
      chk("rtc wake time", w > 60, 1);
    end
    while (!wake_irq && n < 1000) begin @(negedge aon); n++; end
    ext_wake = 0;
    $display("%s: wake-up latency %0d always-on cycles (%0d us at 33 kHz)", s, n, n * 1000 / 33);
    checks++;
    if (n > 26) begin failures++; $display("FAIL %s wake latency %0d > 26", s, n); end
    @(negedge aon);
    chk({s, " mode"}, mode, PM_ACTIVE);
    chk_domains({s, " active"}, mode_on(PM_ACTIVE, 1'b0));
    if (ext) mech[M_EXT_WAKE]++; else mech[M_RTC_WAKE]++;
  endtask

  // ---------------- main ----------------
  initial begin
    logic [31:0] d, cm, cs, cr;
    host_req = 0; host_we = 0; host_addr = 0; host_wdata = 0; host_be = 0;
    udma_req = 0; udma_we = 0; udma_addr = 0; udma_wdata = 0;
    ml_psel = 0; ml_pen = 0; ml_pwr = 0; ml_paddr = 0; ml_pwdata = 0;
    w_psel = 0; w_pen = 0; w_pwr = 0; w_paddr = 0; w_pwdata = 0; ext_wake = 0;
    for (int i = 0; i < M_NUM; i++) mech[i] = 0;
    for (int i = 0; i < ACT_WORDS; i++) begin img[i] = '0; vmask[i] = '0; end
    for (int i = 0; i < 2048; i++) wimg[i] = '0;
    for (int i = 0; i < 4; i++) spimg[i] = '0;
    repeat (3) @(posedge aon);
    rst_n = 1;
    @(negedge aon);
    chk_domains("boot", mode_on(PM_BOOT, 1'b0));

    // ---- build the network and its reference results ----
    for (int i = 0; i < 16; i++) begin
      nl_m[i] = int'($signed(8'($urandom))); nl_b[i] = int'($signed(8'($urandom)));
    end
    fill_in(0,   8, 6, 18);      // conv input, row stride 4 words: 0..191
    fill_in(200, 2, 4, 8);       // deconv input, row stride 3: 200..223
    fill_in(240, 2, 5, 34);      // stride-2 input, row stride 6: 240..299
    fill_in(300, 2, 6, 20);      // dilation input, row stride 4: 300..347
    for (int w = 400; w < 420; w++) img[w] = {$urandom, $urandom};   // dense / SVM inputs
    //         dec inp  ix  iy c  k   wp   outp  sp sparse stride dil sh relu prec
    conv_layer(0, 0,   18, 6, 8, 8,  0,   4096, 0, 0, 1, 1, 6, 1, 0);   // conv INT8 + ReLU
    conv_layer(0, 0,   18, 6, 8, 16, 80,  4224, 0, 1, 1, 1, 7, 0, 0);   // sparse conv
    conv_layer(1, 200, 8,  4, 2, 8,  300, 4480, 0, 0, 1, 1, 5, 0, 0);   // deconv
    conv_layer(0, 240, 34, 5, 2, 8,  320, 4672, 0, 0, 2, 1, 2, 0, 1);   // stride 2, INT4
    conv_layer(0, 300, 20, 6, 2, 8,  340, 4736, 0, 0, 1, 2, 1, 0, 2);   // dilation 2, INT2
    ck_layer(LT_DENSE,  400, 32, 16, 400, 4800, 0, 0, 8, 0, 0);
    ck_layer(LT_DENSE,  404, 64, 8,  464, 4802, 2, 1, 8, 1, 0);
    ck_layer(LT_SVM_L1, 412, 16, 8,  528, 4803, 0, 0, 4, 0, 0);
    ck_layer(LT_SVM_L2, 412, 16, 8,  544, 4804, 0, 0, 9, 0, 0);
    pool_layer(4096, 16, 4, 8, 4810);
    act_layer(4800, 4860, 2);
    prog[nprog++] = mk(LT_END, 0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0);

    // ---- load L2 through the host port ----
    for (int w = 0; w < 420; w++) begin
      host_write(L2_IN + 8*w, img[w][31:0]); host_write(L2_IN + 8*w + 4, img[w][63:32]);
    end
    for (int l = 0; l < 600; l++) begin
      host_write(L2_W + 8*l, wimg[l][31:0]); host_write(L2_W + 8*l + 4, wimg[l][63:32]);
    end
    for (int i = 0; i < 4; i++) host_write(L2_SP + 4*i, spimg[i]);
    for (int i = 0; i < nprog; i++)
      for (int b = 0; b < 4; b++) host_write(L2_IM + 16*i + 4*b, prog[i][32*b +: 32]);

    // ---- DMA into the private memories, NLFG table ----
    dma(L2_IN, 0, 420, 0, 0);
    dma(L2_W, 0, 600, 1, 0);
    dma(L2_SP, 0, 4, 2, 0);
    dma(L2_IM, 0, 4*nprog, 3, 0);
    for (int i = 0; i < 16; i++)
      ml_write(32'h18, {8'd0, 8'(nl_b[i]), 8'(nl_m[i]), 4'd0, 4'(i)});

    // ---- run the program ----
    ml_write(32'h00, 32'h1);
    begin
      int n = 0;
      do begin ml_read(32'h04, d); n++; end while (!d[2] && n < 400000);
    end
    chk("core done", d[2], 1);
    ml_read(32'h1C, cm); ml_read(32'h20, cs); ml_read(32'h24, cr);
    $display("MAC cycles %0d, sparsity skips %0d, deconv row skips %0d", cm, cs, cr);
    if (cs > 0) mech[M_SPARSE_SKIP]++;
    if (cr > 0) mech[M_DECONV_ROWSKIP]++;
    ml_write(32'h04, 32'h4);

    // ---- copy results back while the host competes for L2 ----
    fork
      dma(L2_OUT, 4096, 4880 - 4096, 0, 1);
      repeat (300) host_read(L2_OUT + 16, d);
    join
    if (conflicts > 0) mech[M_L2_CONFLICT]++;
    begin
      int f0;
      f0 = failures;
      for (int w = 4096; w < 4880; w++)
        if (vmask[w] != 0) begin
          logic [31:0] lo, hi;
          logic [63:0] got;
          host_read(L2_OUT + 8*(w - 4096), lo);
          host_read(L2_OUT + 8*(w - 4096) + 4, hi);
          got = {hi, lo};
          for (int b = 0; b < 8; b++)
            if (vmask[w][b]) chk($sformatf("act[%0d].%0d", w, b), got[8*b +: 8], img[w][8*b +: 8]);
        end
      if (failures == f0) begin
        mech[M_CONV]++; mech[M_STRIDE2]++; mech[M_DILATION]++; mech[M_INT4]++;
        mech[M_INT2]++; mech[M_DENSE]++; mech[M_SVM_L1]++; mech[M_SVM_L2]++;
        mech[M_POOL]++; mech[M_NLFG]++;
      end
    end

    // ---- power modes ----
    // data acquisition: logic, L1 and eMRAM off; the uDMA keeps writing L2
    wuc_write(32'h04, 32'h8);               // wake into Active, eMRAM off, by the pin
    wuc_write(32'h00, 32'h100 | PM_DATA_ACQ);
    wait_off();
    chk("mode dacq", mode, PM_DATA_ACQ);
    chk_domains("dacq", mode_on(PM_DATA_ACQ, 1'b0));
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); udma_req = 1; udma_we = 1; udma_addr = 32'h5_0000 + 4*i; udma_wdata = 32'hA000 + i;
      do @(posedge clk); while (!udma_gnt);
      @(negedge clk); udma_req = 0; udma_we = 0;
    end
    // the host is isolated: its request is never granted
    @(negedge clk); host_req = 1; host_we = 0; host_addr = 32'h5_0000;
    repeat (5) begin @(posedge clk); chk("isolated host", host_gnt, 0); end
    @(negedge clk); host_req = 0;
    mech[M_ISOLATION]++;
    mech[M_DATA_ACQ]++;
    wake_and_measure(1, "data acq.");
    for (int i = 0; i < 16; i++) begin host_read(32'h5_0000 + 4*i, d); chk("dacq data", d, 32'hA000 + i); end

    // LP data acquisition: only the 64 kB LP part of L2 and the uDMA stay on
    wuc_write(32'h00, 32'h100 | PM_LP_DATA_ACQ);
    wait_off();
    chk("mode lp", mode, PM_LP_DATA_ACQ);
    chk_domains("lp", mode_on(PM_LP_DATA_ACQ, 1'b0));
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); udma_req = 1; udma_we = 1; udma_addr = LP_BASE + 4*i; udma_wdata = 32'hB000 + i;
      do @(posedge clk); while (!udma_gnt);
      @(negedge clk); udma_req = 0; udma_we = 0;
    end
    mech[M_LP_DATA_ACQ]++;
    wake_and_measure(1, "LP data acq.");
    for (int i = 0; i < 16; i++) begin host_read(LP_BASE + 4*i, d); chk("lp data", d, 32'hB000 + i); end

    // deep sleep, timed wake-up after 2 ms by the RTC
    wuc_write(32'h04, 32'h4);
    wuc_write(32'h08, 2);
    wuc_write(32'h00, 32'h100 | PM_DEEP_SLEEP);
    wait_off();
    chk("mode deep", mode, PM_DEEP_SLEEP);
    chk_domains("deep", mode_on(PM_DEEP_SLEEP, 1'b0));
    mech[M_DEEP_SLEEP]++;
    wake_and_measure(0, "deep sleep");
    wuc_read(32'h10, d);
    chk("rtc ms", d, 2);

    for (int i = 0; i < M_NUM; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism %-18s %0d", m.name(), mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", m.name()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
