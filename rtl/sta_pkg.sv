// sta_pkg: types and constants shared by the N:M sparse Transformer accelerator.
//
// The default configuration is the 2:8 accelerator with 1024 multipliers:
// N:M = 2:8, H = M/N = 4 engines (heads), each an R x C = 8 x 16 array of
// processing elements with an N-wide MAC (4*8*16*2 = 1024 multipliers).
// The 2:8 sparsity, the 16-bit fixed-point operands and the 32-bit partial
// sums follow the paper; the split of the 128 PEs per engine into 8 rows by
// 16 columns, the memory depths and the instruction format are this design's
// own choices.  Modules take these values as parameter defaults so that a
// smaller array can be built for simulation.
package sta_pkg;

  // Sparsity and array shape.
  localparam int unsigned N_DEF  = 2;
  localparam int unsigned M_DEF  = 8;
  localparam int unsigned H_DEF  = M_DEF / N_DEF;   // N*H = M
  localparam int unsigned R_DEF  = 8;
  localparam int unsigned C_DEF  = 16;

  // Number formats: operands are signed 16-bit with 8 fraction bits,
  // partial sums are signed 32-bit (16 fraction bits).
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned FRAC   = 8;

  // Softmax: P lanes, Q-bit outputs (one integer bit, Q-1 fraction bits).
  localparam int unsigned SM_P_DEF   = 16;
  localparam int unsigned SM_Q_DEF   = 16;
  localparam int unsigned EXP_W      = 24;   // e^x, unsigned, 12 fraction bits
  localparam int unsigned EXP_FRAC   = 12;

  // External bus beat width used by the DMA.
  localparam int unsigned EXT_W = 128;

  // Memory depths (words).
  localparam int unsigned WMEM_DEPTH_DEF = 8192;
  localparam int unsigned IMEM_DEPTH_DEF = 2048;
  localparam int unsigned TMEM_DEPTH_DEF = 4096;
  localparam int unsigned IBUF_DEPTH_DEF = 256;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ---------------------------------------------------------------- ISA
  localparam int unsigned INSTR_W = 128;
  localparam int unsigned AF_W    = 14;   // address / length field width

  typedef enum logic [3:0] {
    OP_END     = 4'd0,
    OP_LOAD    = 4'd1,   // external memory -> on-chip memory
    OP_STORE   = 4'd2,   // on-chip memory -> external memory
    OP_MATMUL  = 4'd3,   // sparse-dense or dense-dense MatMul with fused vector ops
    OP_SOFTMAX = 4'd4
  } opcode_e;

  typedef enum logic [1:0] {
    MEM_WEIGHT = 2'd0,
    MEM_INPUT  = 2'd1,
    MEM_INTER  = 2'd2
  } mem_e;

  // Field use per opcode:
  //   LOAD/STORE : mem, a = on-chip word address, c = number of words,
  //                ext = external beat address
  //   MATMUL     : sparse, bias_en, res_en, relu_en, qshift,
  //                a = west base (weight memory if sparse, intermediate
  //                memory if dense), b = north base (input memory),
  //                c = number of groups G, d = bias word (weight memory),
  //                e = residual base (input memory), f = destination base
  //                (intermediate memory, or input memory if to_imem)
  //   SOFTMAX    : a = source word, b = destination word, c = words
  typedef struct packed {
    opcode_e          op;
    mem_e             mem;
    logic             sparse;
    logic             bias_en;
    logic             res_en;
    logic             relu_en;
    logic [4:0]       qshift;
    logic [AF_W-1:0]  a;
    logic [AF_W-1:0]  b;
    logic [AF_W-1:0]  c;
    logic [AF_W-1:0]  d;
    logic [AF_W-1:0]  e;
    logic [AF_W-1:0]  f;
    logic [23:0]      ext;
    logic             to_imem;  // MATMUL: write the result to the input memory
    logic [3:0]       pad;
  } instr_t;

  // Configuration of the vector unit for one MatMul.
  typedef struct packed {
    logic       bias_en;
    logic       res_en;
    logic       relu_en;
    logic [4:0] qshift;
  } vec_cfg_t;

endpackage
