// vx_pkg: constants and types shared by the SIMT core, its caches and the
// texture unit.
//
// The default machine is the 4-wavefront x 4-thread core that is the
// baseline configuration of the design, with 32-bit scalar registers per
// thread (32 per thread, as in RV32I). The six GPU instructions (wspawn, tmc,
// split, join, bar, tex) share one opcode, RISC-V custom-0 (7'h0B), and are
// told apart by funct3; tex uses the R4 layout (rs3 in bits 31:27). The
// opcode and funct3 values, the CSR addresses and the fixed-point formats of
// the texture unit are this design's own choice.
package vx_pkg;

  // ---------------- machine size ----------------
  localparam int unsigned XLEN        = 32;
  localparam int unsigned NUM_REGS    = 32;
  localparam int unsigned NR_BITS     = 5;

  // ---------------- RISC-V opcodes ----------------
  typedef enum logic [6:0] {
    OPC_LUI    = 7'b0110111,
    OPC_AUIPC  = 7'b0010111,
    OPC_JAL    = 7'b1101111,
    OPC_JALR   = 7'b1100111,
    OPC_BRANCH = 7'b1100011,
    OPC_LOAD   = 7'b0000011,
    OPC_STORE  = 7'b0100011,
    OPC_OPIMM  = 7'b0010011,
    OPC_OP     = 7'b0110011,
    OPC_FENCE  = 7'b0001111,
    OPC_SYSTEM = 7'b1110011,
    OPC_GPU    = 7'b0001011   // custom-0: the GPU extension
  } opcode_e;

  // funct3 of the GPU extension
  localparam logic [2:0] GPU_TMC    = 3'd0;
  localparam logic [2:0] GPU_WSPAWN = 3'd1;
  localparam logic [2:0] GPU_SPLIT  = 3'd2;
  localparam logic [2:0] GPU_JOIN   = 3'd3;
  localparam logic [2:0] GPU_BAR    = 3'd4;
  localparam logic [2:0] GPU_TEX    = 3'd5;

  // ---------------- execution units ----------------
  typedef enum logic [2:0] {
    EX_ALU = 3'd0,
    EX_LSU = 3'd1,
    EX_CSR = 3'd2,
    EX_GPU = 3'd3,
    EX_TEX = 3'd4,
    EX_NOP = 3'd5
  } ex_unit_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_LUI, ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU
  } alu_op_e;

  typedef enum logic [2:0] {
    BR_NONE, BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JUMP
  } br_op_e;

  // decoded instruction, as produced by vx_decode
  typedef struct packed {
    ex_unit_e        unit;
    alu_op_e         alu_op;
    br_op_e          br_op;      // BR_JUMP: jal/jalr
    logic            is_jalr;
    logic            use_pc;     // operand A is the PC (auipc, jal)
    logic            use_imm;    // operand B is the immediate
    logic [2:0]      func3;      // load/store size, CSR op, GPU op
    logic            is_store;
    logic            wb;         // writes rd
    logic [NR_BITS-1:0] rd;
    logic [NR_BITS-1:0] rs1;
    logic [NR_BITS-1:0] rs2;
    logic [NR_BITS-1:0] rs3;
    logic            use_rs1;
    logic            use_rs2;
    logic            use_rs3;
    logic [31:0]     imm;
    logic            is_ctrl;    // keeps the wavefront stalled until execute
  } dec_instr_t;

  // ---------------- CSR addresses (own choice, user custom range) ----------------
  localparam logic [11:0] CSR_THREAD_ID  = 12'hCC0;
  localparam logic [11:0] CSR_WARP_ID    = 12'hCC1;
  localparam logic [11:0] CSR_CORE_ID    = 12'hCC2;
  localparam logic [11:0] CSR_TMASK      = 12'hCC4;
  localparam logic [11:0] CSR_NUM_THREADS= 12'hFC0;
  localparam logic [11:0] CSR_NUM_WARPS  = 12'hFC1;
  localparam logic [11:0] CSR_NUM_CORES  = 12'hFC2;
  localparam logic [11:0] CSR_CYCLE      = 12'hC00;
  // texture state CSRs: 12'h7C0 + index
  localparam logic [11:0] CSR_TEX_BASE   = 12'h7C0;
  localparam int unsigned TEX_CSR_ADDR   = 0;   // texture base address
  localparam int unsigned TEX_CSR_FORMAT = 1;   // 0: RGBA8888, 1: RGB565, 2: L8
  localparam int unsigned TEX_CSR_WRAP   = 2;   // 0: clamp, 1: repeat
  localparam int unsigned TEX_CSR_FILTER = 3;   // 0: point, 1: bilinear
  localparam int unsigned TEX_CSR_WIDTH  = 4;   // log2 of the width of mip level 0
  localparam int unsigned TEX_CSR_HEIGHT = 5;   // log2 of the height of mip level 0
  localparam int unsigned TEX_CSR_MIPOFF = 8;   // 8+lod: byte offset of mip level lod

  localparam int unsigned TEX_LOD_LEVELS = 8;   // mip levels with an offset CSR
  localparam int unsigned TEX_FRAC       = 20;  // fraction bits of u and v
  localparam int unsigned TEX_BLEND_BITS = 8;   // bilinear weight precision

  // texture formats
  localparam logic [1:0] TEX_FMT_RGBA8  = 2'd0;
  localparam logic [1:0] TEX_FMT_RGB565 = 2'd1;
  localparam logic [1:0] TEX_FMT_L8     = 2'd2;

endpackage
