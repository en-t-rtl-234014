// ent_pkg: shared constants and types of the EN-T tensor engine.
//
// The numbers follow the evaluated configuration: INT8 operands, a 32x32
// array (S = 32), an accumulator of 16 + log2(S) bits and an encoded
// multiplicand of n + 1 = 9 bits (one sign bit and four 2-bit digits).
// The TCU selector, the SIMD configuration and the controller instruction
// are this design's own: the architecture fixes what the blocks do, not an
// instruction set.
package ent_pkg;

  // Operand width (INT8) and encoded multiplicand width (n + 1).
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ENC_W  = DATA_W + 1;

  // Array size of the benchmark SoC and accumulator width 16 + log2(S).
  localparam int unsigned ARRAY_S = 32;
  localparam int unsigned ACC_W   = 16 + $clog2(ARRAY_S);

  // Buffer geometry: one word holds ARRAY_S bytes.
  localparam int unsigned WORD_W    = ARRAY_S * DATA_W;
  localparam int unsigned GB_DEPTH  = 256 * 1024 / (WORD_W / 8);  // 256 KB
  localparam int unsigned ACT_DEPTH = 32 * 1024 / (WORD_W / 8);   // 32 KB
  localparam int unsigned WGT_DEPTH = 32 * 1024 / (WORD_W / 8);   // 32 KB
  localparam int unsigned GB_AW     = $clog2(GB_DEPTH);
  localparam int unsigned BUF_AW    = $clog2(ACT_DEPTH);

  // Digit codes of the encoded multiplicand: w in {0, 1, 2, -1}.
  typedef enum logic [1:0] {
    DIG_ZERO = 2'b00,
    DIG_ONE  = 2'b01,
    DIG_TWO  = 2'b10,
    DIG_MONE = 2'b11
  } digit_e;

  // Tensor computing unit microarchitecture placed in the SoC.
  typedef enum logic [2:0] {
    ARCH_MATRIX2D  = 3'd0,  // broadcast rows and columns, output stationary
    ARCH_ARRAY1D2D = 3'd1,  // multiplier planes with adder trees
    ARCH_SYS_OS    = 3'd2,  // systolic, output stationary
    ARCH_SYS_WS    = 3'd3,  // systolic, weight stationary
    ARCH_CUBE3D    = 3'd4   // two 8x8x8 cubes
  } tcu_arch_e;

  // True for the architectures that hold the weights and stream activation
  // rows; the others take one activation column with one weight row per step.
  function automatic bit arch_is_ws(tcu_arch_e a);
    return (a == ARCH_SYS_WS) || (a == ARCH_ARRAY1D2D);
  endfunction

  // SIMD engine settings applied to every output row of a tile.
  typedef struct packed {
    logic signed [15:0] scalar;    // added to every lane
    logic               relu;      // clamp negatives to zero
    logic [4:0]         shift;     // arithmetic right shift before INT8 saturation
    logic               pool;      // 2x1 max pooling over consecutive rows
  } simd_cfg_t;

  typedef enum logic [1:0] {
    OP_NOP      = 2'd0,
    OP_LOAD_ACT = 2'd1,  // global buffer -> activation buffer
    OP_LOAD_WGT = 2'd2,  // global buffer -> weight buffer
    OP_GEMM     = 2'd3   // one SxSxS tile: buffers -> TCU -> SIMD -> global buffer
  } opcode_e;

  typedef struct packed {
    opcode_e            op;
    logic [GB_AW-1:0]   gb_addr;   // LOAD: source; GEMM: destination of results
    logic [BUF_AW-1:0]  act_addr;  // LOAD_ACT destination; GEMM activation base
    logic [BUF_AW-1:0]  wgt_addr;  // LOAD_WGT destination; GEMM weight base
    logic [BUF_AW:0]    len;       // LOAD: number of words
    simd_cfg_t          simd;      // GEMM: post-processing
  } instr_t;

endpackage
