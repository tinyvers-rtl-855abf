// tv_pkg -- types and constants shared by the TinyVers SoC RTL.
//
// Holds the FlexML accelerator's array geometry (8x8 PEs, 8-bit words), its
// precision, dataflow and layer-type encodings, the layout of one microcode
// (ucode) instruction, and the power-mode / power-domain encodings used by the
// wake-up controller. The array size, word size, L0 depth, memory sizes and the
// five power modes follow the paper; every encoding and bit width of the
// instruction is this design's own choice (the paper prints only the field
// names Layer Type, IX, IY, C, K, Fx, Fy, Input pointer, Weight pointer, ...).
package tv_pkg;

  // ---- FlexML geometry -----------------------------------------------------
  localparam int unsigned ARR      = 8;    // PE array is ARR x ARR
  localparam int unsigned WBITS    = 8;    // one activation / weight word
  localparam int unsigned ACCBITS  = 32;   // PE accumulator
  localparam int unsigned L0_DEPTH = 16;   // input FIFO, 16 x 8 bit

  // ---- precision (symmetric for weights and activations) -------------------
  typedef enum logic [1:0] {
    PREC_INT8 = 2'd0,
    PREC_INT4 = 2'd1,
    PREC_INT2 = 2'd2
  } prec_e;

  // ---- operation performed by a PE ----------------------------------------
  typedef enum logic [1:0] {
    PE_MAC = 2'd0,   // acc += sum of packed products a*w
    PE_L1  = 2'd1,   // acc += |a - w|          (Laplacian-kernel SVM)
    PE_L2  = 2'd2    // acc += round(a - w)^2   (RBF-kernel SVM)
  } pe_op_e;

  // ---- layer types held in the ucode "Layer Type" field --------------------
  typedef enum logic [3:0] {
    LT_CONV   = 4'd0,  // CNN / TCN, OX|K dataflow
    LT_DECONV = 4'd1,  // deconvolution, OX|K with zero-interleaved L0
    LT_DENSE  = 4'd2,  // FC / RNN gates, C|K dataflow
    LT_SVM_L1 = 4'd3,  // L1 norm, C|K dataflow
    LT_SVM_L2 = 4'd4,  // squared L2 norm, C|K dataflow
    LT_POOL   = 4'd5,  // 2x2 max pooling
    LT_ACT    = 4'd6,  // non-linear function (NLFG) applied in place
    LT_END    = 4'd15  // end of program
  } layer_e;

  // ---- one ucode instruction (128 bits) ------------------------------------
  // Pointers are 64-bit word addresses in the L1 memories; their MSB selects
  // the ping-pong half (bank 0 / bank 1).
  typedef struct packed {
    layer_e      ltype;     // 4
    logic [7:0]  ix;        // input width  (multiple of 8 for OX|K layers)
    logic [7:0]  iy;        // input height
    logic [9:0]  c;         // input channels, in 8-bit words (packed lanes)
    logic [9:0]  k;         // output channels (multiple of 8)
    logic [3:0]  fx;        // filter width
    logic [3:0]  fy;        // filter height
    logic [12:0] in_ptr;    // activation L1 word address of the input
    logic [12:0] w_ptr;     // weight L1 lane address (row = w_ptr[12:3])
    logic [12:0] out_ptr;   // activation L1 word address of the output
    logic [9:0]  sp_ptr;    // sparsity index memory word address
    logic        sparse;    // blockwise structured sparsity on
    logic [1:0]  stride;    // 1 or 2
    logic [3:0]  dil;       // dilation 1..8
    logic [4:0]  shift;     // requantisation right shift
    logic        relu;      // ReLU before requantisation
    prec_e       prec;      // INT8 / INT4 / INT2
    logic [3:0]  rsvd;      // pads the word to 128 bits
    logic [11:0] cnt;       // POOL/ACT: number of 64-bit words to process
  } ucode_t;

  localparam int unsigned UCODE_BITS = $bits(ucode_t);

  // Normalisation of a 32-bit sum: arithmetic right shift, optional ReLU,
  // saturation to the range of the selected precision (overflow control).
  function automatic logic [WBITS-1:0] requant(logic signed [ACCBITS-1:0] v,
                                               logic [4:0] sh, logic relu,
                                               prec_e p);
    logic signed [ACCBITS-1:0] s, hi, lo;
    s = v >>> sh;
    if (relu && s < 0) s = '0;
    unique case (p)
      PREC_INT4: begin hi = 32'sd7;   lo = -32'sd8;   end
      PREC_INT2: begin hi = 32'sd1;   lo = -32'sd2;   end
      default:   begin hi = 32'sd127; lo = -32'sd128; end
    endcase
    if (s > hi)      return hi[WBITS-1:0];
    else if (s < lo) return lo[WBITS-1:0];
    else             return s[WBITS-1:0];
  endfunction

  // ---- power management ----------------------------------------------------
  // The five power modes of the SoC and its six switchable power domains.
  typedef enum logic [2:0] {
    PM_BOOT        = 3'd0,
    PM_ACTIVE      = 3'd1,
    PM_DATA_ACQ    = 3'd2,
    PM_LP_DATA_ACQ = 3'd3,
    PM_DEEP_SLEEP  = 3'd4
  } pmode_e;

  localparam int unsigned NPD   = 6;
  localparam int unsigned PD_LOGIC = 0;  // RISC-V, FlexML logic, interconnect
  localparam int unsigned PD_L1    = 1;  // FlexML L1 memories
  localparam int unsigned PD_DACQ  = 2;  // shared L2 (outside the LP part)
  localparam int unsigned PD_LPMEM = 3;  // 64 kB LP data-acquisition L2
  localparam int unsigned PD_MRAM  = 4;  // eMRAM
  localparam int unsigned PD_UDMA  = 5;  // uDMA and peripherals

endpackage
