// puma_pkg: types and constants shared by the core, the tile and the node.
//
// It fixes the sizes of the main configuration (128x128 crossbars, two
// matrix-vector multiplication units per core, eight cores per tile, 138 tiles
// per node, 16 receive FIFOs of depth 2, 32-bit flits), the 16-bit fixed-point
// word, the opcodes of the core and tile instruction sets and the bit layout
// of the 7-byte (56-bit) instruction word.
//
// The sizes and the list of instructions follow the published configuration.
// The bit layout of the instruction word, the opcode numbers, the fixed-point
// format (Q8.8), the unified core address map and the flit layout are this
// design's own choices: the published description gives the operand list of
// every instruction but no encoding.
package puma_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WORD_W      = 16;   // 16-bit fixed point
  localparam int unsigned FRAC_BITS   = 8;    // Q8.8 (own choice)
  localparam int unsigned XBAR_DIM    = 128;  // crossbar rows = columns
  localparam int unsigned CELL_BITS   = 2;    // bits per memristor
  localparam int unsigned NUM_SLICES  = WORD_W / CELL_BITS; // 8 crossbars per MVMU
  localparam int unsigned NUM_MVMU    = 2;    // MVMUs per core
  localparam int unsigned RF_WORDS    = 2 * XBAR_DIM * NUM_MVMU; // 512 words = 1 KB
  localparam int unsigned INSTR_W     = 56;   // seven bytes
  localparam int unsigned CORE_IMEM_WORDS = 4096 / 7; // 4 KB of 7-byte instructions
  localparam int unsigned TILE_IMEM_WORDS = 8192 / 7; // 8 KB
  localparam int unsigned CORES_PER_TILE  = 8;
  localparam int unsigned SHMEM_WORDS = 32768;  // 64 KB of 16-bit words
  localparam int unsigned COUNT_W     = 8;      // attribute count width (own choice)
  localparam int unsigned NUM_FIFOS   = 16;
  localparam int unsigned FIFO_DEPTH  = 2;
  localparam int unsigned TILES_PER_NODE = 138;
  localparam int unsigned FLIT_W      = 32;
  localparam int unsigned CONC        = 4;      // tiles per router
  localparam int unsigned ADDR_W      = 10;     // core register address
  localparam int unsigned MADDR_W     = 16;     // shared memory address
  localparam int unsigned VW_W        = 11;     // vec-width field

  typedef logic [WORD_W-1:0] word_t;

  // ------------------------------------------------ core address map (own)
  //   0   .. 511  general purpose registers (register file)
  //   512 .. 767  XbarIn registers, 128 per MVMU
  //   768 .. 1023 XbarOut registers, 128 per MVMU
  localparam int unsigned XIN_BASE  = RF_WORDS;
  localparam int unsigned XOUT_BASE = RF_WORDS + XBAR_DIM * NUM_MVMU;

  // --------------------------------------------------------- core opcodes
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_MVM    = 5'd1,
    OP_ALU    = 5'd2,
    OP_ALUI   = 5'd3,
    OP_ALUINT = 5'd4,
    OP_SET    = 5'd5,
    OP_COPY   = 5'd6,
    OP_LOAD   = 5'd7,
    OP_STORE  = 5'd8,
    OP_JMP    = 5'd9,
    OP_BRN    = 5'd10,
    OP_HALT   = 5'd11,
    // tile instruction set
    OP_SEND   = 5'd12,
    OP_RECV   = 5'd13
  } opcode_e;

  // vector ALU operations (ALU and ALUimm)
  typedef enum logic [3:0] {
    AOP_ADD  = 4'd0,
    AOP_SUB  = 4'd1,
    AOP_MUL  = 4'd2,
    AOP_DIV  = 4'd3,
    AOP_SHL  = 4'd4,   // shift left by src2 (arithmetic shift right if negative)
    AOP_AND  = 4'd5,
    AOP_OR   = 4'd6,
    AOP_INV  = 4'd7,
    AOP_RELU = 4'd8,
    AOP_MIN  = 4'd9,
    AOP_MAX  = 4'd10,
    AOP_RND  = 4'd11,  // random vector
    AOP_SIG  = 4'd12,  // transcendental: looked up in the embedded ROM
    AOP_TANH = 4'd13,
    AOP_LOG  = 4'd14,
    AOP_EXP  = 4'd15
  } aluop_e;

  // scalar ALUint operations, and branch conditions (brnop)
  typedef enum logic [3:0] {
    SOP_ADD = 4'd0,
    SOP_SUB = 4'd1,
    SOP_EQ  = 4'd2,
    SOP_GT  = 4'd3,
    SOP_NE  = 4'd4
  } sop_e;

  // ------------------------------------------- instruction layout (own)
  // [55:51] opcode  [50:47] aluop/brnop/mask  [46:37] dest  [36:27] src1
  // [26:17] src2  (imm = [26:11], 16 bits)    [10:0] vec-width, or pc
  // mvm:   mask = [48:47], filter = src1, stride = src2
  // load:  dest, shared memory address = imm
  // store: count = dest[7:0], src1, shared memory address = imm
  // send:  memaddr = imm, fifo-id = src1[3:0], target = dest[7:0], vec-width
  // recv:  memaddr = imm, fifo-id = src1[3:0], count = dest[7:0], vec-width
  typedef struct packed {
    opcode_e            op;
    logic [3:0]         aop;
    logic [ADDR_W-1:0]  dest;
    logic [ADDR_W-1:0]  src1;
    logic [15:0]        imm;   // src2 = imm[15:6]
    logic [VW_W-1:0]    vw;
  } instr_t;

  function automatic logic [ADDR_W-1:0] src2_of(instr_t i);
    return i.imm[15:6];
  endfunction

  // ------------------------------------------------------ flit (own layout)
  // One flit carries one data word with its routing header.
  typedef struct packed {
    logic [3:0]  rsvd;
    logic [7:0]  dest;   // target tile
    logic [3:0]  fifo;   // receive FIFO at the target
    word_t       data;
  } flit_t;

  // --------------------------------------- host configuration port (own)
  // Used at configuration time to load instructions, crossbar weights and
  // input data, one word per cycle, into the tile selected by `tile`.
  typedef enum logic [1:0] {
    H_CORE_IMEM = 2'd0,   // core `core`, instruction `addr` <= data
    H_TILE_IMEM = 2'd1,   // tile instruction `addr` <= data
    H_WEIGHT    = 2'd2,   // core `core`, MVMU `mvmu`, W[row][col] <= data[15:0]
    H_SHMEM     = 2'd3    // shared memory `addr` <= data[15:0], valid, `count`
  } hkind_e;

  typedef struct packed {
    logic              we;
    hkind_e            kind;
    logic [7:0]        tile;
    logic [2:0]        core;
    logic              mvmu;
    logic [15:0]       addr;
    logic [6:0]        row;
    logic [6:0]        col;
    logic [COUNT_W-1:0] count;
    logic [INSTR_W-1:0] data;
  } host_cfg_t;

  // 16-bit saturation of a wide signed value
  function automatic word_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'h7fff;
    else if (v < -48'sd32768) return 16'h8000;
    else                      return v[15:0];
  endfunction

endpackage
