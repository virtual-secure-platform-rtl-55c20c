// vsp_pkg: types and constants shared by the CAHP-Ruby pipeline.
//
// The processor has a 16-bit datapath, sixteen 16-bit registers and a
// Harvard split between an instruction ROM and a data RAM, as the paper
// describes. Instructions are 16 or 24 bits long, stored little-endian in
// the ROM. The paper defers the CAHPv3 bit-level encoding to a separate
// specification, so the encoding below is this design's own, shaped after
// RV32IC: bit 0 of the first byte tells the length (1 = 24-bit, 0 = 16-bit).
//
// 24-bit format (inst[23:0], inst[7:0] is the first byte):
//   [7:0] opcode  [11:8] rd (rs2 for stores and branches)
//   [15:12] rs1   [19:16] rs2 (register forms)  [23:16] imm8
//   JAL: [23:12] signed 12-bit byte offset from the JAL's own address.
// 16-bit format (inst[15:0]):
//   [3:0] opcode  [7:4] rd  [11:8] rs  [15:8] imm8
//   C.J: [15:4] signed 12-bit byte offset.  C.JR: jump to register rd.
// Immediates are sign-extended except those of ANDI/ORI/XORI and LUI.
// A jump whose offset is zero jumps to itself: the program's end marker.
package vsp_pkg;

  localparam int XLEN = 16;

  typedef logic [XLEN-1:0] word_t;
  typedef logic [3:0]      reg_t;

  // 24-bit opcodes (odd)
  localparam logic [7:0] OP_ADD  = 8'h01, OP_SUB  = 8'h03, OP_AND  = 8'h05,
                         OP_OR   = 8'h07, OP_XOR  = 8'h09, OP_SLL  = 8'h0B,
                         OP_SRL  = 8'h0D, OP_SRA  = 8'h0F, OP_SLT  = 8'h11,
                         OP_SLTU = 8'h13, OP_ADDI = 8'h15, OP_ANDI = 8'h19,
                         OP_ORI  = 8'h1B, OP_XORI = 8'h1D, OP_SLLI = 8'h1F,
                         OP_SRLI = 8'h21, OP_SRAI = 8'h23, OP_SLTI = 8'h25,
                         OP_SLTIU= 8'h27, OP_LUI  = 8'h29, OP_LW   = 8'h2B,
                         OP_LB   = 8'h2D, OP_LBU  = 8'h2F, OP_SW   = 8'h31,
                         OP_SB   = 8'h33, OP_BEQ  = 8'h35, OP_BNE  = 8'h37,
                         OP_BLT  = 8'h39, OP_BGE  = 8'h3B, OP_BLTU = 8'h3D,
                         OP_BGEU = 8'h3F, OP_JAL  = 8'h41, OP_JALR = 8'h43;

  // 16-bit opcodes (even)
  localparam logic [3:0] C_MV = 4'h0, C_ADD = 4'h2, C_SUB = 4'h4, C_AND = 4'h6,
                         C_LI = 4'h8, C_ADDI = 4'hA, C_J = 4'hC, C_JR = 4'hE;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR,
    ALU_SLL, ALU_SRL, ALU_SRA, ALU_SLT, ALU_SLTU, ALU_PASSB
  } alu_op_t;

  // Comparison flags of a - b produced by the ALU for the branch controller.
  typedef struct packed {
    logic eq;
    logic lt;   // signed
    logic ltu;  // unsigned
  } alu_flags_t;

  typedef enum logic [3:0] {
    BR_NONE, BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JAL, BR_JALR
  } br_t;

  typedef enum logic [2:0] {
    MEM_NONE, MEM_LW, MEM_LB, MEM_LBU, MEM_SW, MEM_SB
  } mem_op_t;

  // IF -> ID
  typedef struct packed {
    logic        valid;
    word_t       pc;
    logic [23:0] inst;
    logic        long24;   // 24-bit instruction
  } if_id_t;

  // ID -> Ex
  typedef struct packed {
    logic    valid;
    word_t   pc;
    alu_op_t alu_op;
    word_t   a;        // ALU operand a
    word_t   b;        // ALU operand b
    br_t     br;
    word_t   base;     // jump base (pc or rs1)
    word_t   offset;   // branch/jump offset
    mem_op_t mem_op;
    word_t   sdata;    // store data
    logic    wb;       // writes rd
    reg_t    rd;
  } id_ex_t;

  // Ex -> Mem
  typedef struct packed {
    logic    valid;
    word_t   res;      // ALU result or memory byte address
    mem_op_t mem_op;
    word_t   sdata;
    logic    wb;
    reg_t    rd;
  } ex_mem_t;

endpackage
