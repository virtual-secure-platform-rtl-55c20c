// id_stage: Instruction Decode stage.
//
// Decodes a 16- or 24-bit instruction (encoding in vsp_pkg) into the
// operands and controls of the Execution and Memory Access stages, and
// reads its source registers from the main register file.
//
// Hazards (the paper does not say how they are handled; this is this
// design's scheme): the value that the Memory Access stage writes back in
// this cycle is bypassed into the operands, since the register file only
// takes it at the clock edge. A source register written by the
// instruction now in the Execution stage is not ready yet: decode then
// stalls one cycle, holding IF/ID and sending a bubble to ID/Ex.
//
// Termination, as in the paper: a jump to its own address (JAL or C.J with
// offset 0) marks the end of the program; when decode sees one that is not
// being flushed it sets the termination flag, which stays set until reset
// and is brought out on a dedicated port.
//
// Undefined opcodes decode as no-operations (this design's choice).
//
// Interface: clk, rst, in (from IF/ID), flush (taken branch in Ex),
// ra1/ra2 to and rd1/rd2 from the register file, ex_* (destination of the
// instruction in Ex), mem_* (write-back of the instruction in Mem), out
// (to ID/Ex), stall, finished.
module id_stage
  import vsp_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  if_id_t in,
  input  logic   flush,
  output reg_t   ra1,
  output reg_t   ra2,
  input  word_t  rd1,
  input  word_t  rd2,
  input  logic   ex_wb,
  input  reg_t   ex_rd,
  input  logic   mem_wb,
  input  reg_t   mem_rd,
  input  word_t  mem_wd,
  output id_ex_t out,
  output logic   stall,
  output logic   bypass,
  output logic   finished
);

  logic [23:0] i;
  logic        use1, use2;
  word_t       v1, v2;
  word_t       simm8, zimm8;
  logic        self_jump;
  logic        byp1, byp2;

  always_comb begin
    i     = in.inst;
    simm8 = in.long24 ? word_t'($signed(i[23:16])) : word_t'($signed(i[15:8]));
    zimm8 = in.long24 ? word_t'(i[23:16]) : word_t'(i[15:8]);

    // source register fields
    if (in.long24) begin
      ra1 = i[15:12];
      ra2 = (i[7:0] == OP_SW || i[7:0] == OP_SB || (i[7:0] >= OP_BEQ && i[7:0] <= OP_BGEU))
            ? i[11:8] : i[19:16];
    end else begin
      ra1 = i[7:4];
      ra2 = i[11:8];
    end

    byp1 = mem_wb && (mem_rd == ra1) && (ra1 != '0);
    byp2 = mem_wb && (mem_rd == ra2) && (ra2 != '0);
    v1   = byp1 ? mem_wd : rd1;
    v2   = byp2 ? mem_wd : rd2;

    out        = '0;
    out.valid  = in.valid;
    out.pc     = in.pc;
    out.alu_op = ALU_ADD;
    out.a      = v1;
    out.b      = v2;
    out.br     = BR_NONE;
    out.base   = in.pc;
    out.mem_op = MEM_NONE;
    use1       = 1'b0;
    use2       = 1'b0;
    self_jump  = 1'b0;

    if (in.long24) begin
      out.rd = i[11:8];
      unique case (i[7:0])
        OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_SRA, OP_SLT, OP_SLTU: begin
          use1 = 1'b1; use2 = 1'b1; out.wb = 1'b1;
          unique case (i[7:0])
            OP_ADD:  out.alu_op = ALU_ADD;
            OP_SUB:  out.alu_op = ALU_SUB;
            OP_AND:  out.alu_op = ALU_AND;
            OP_OR:   out.alu_op = ALU_OR;
            OP_XOR:  out.alu_op = ALU_XOR;
            OP_SLL:  out.alu_op = ALU_SLL;
            OP_SRL:  out.alu_op = ALU_SRL;
            OP_SRA:  out.alu_op = ALU_SRA;
            OP_SLT:  out.alu_op = ALU_SLT;
            default: out.alu_op = ALU_SLTU;
          endcase
        end
        OP_ADDI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_ADD;  end
        OP_SLTI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_SLT;  end
        OP_SLTIU: begin use1 = 1'b1; out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_SLTU; end
        OP_ANDI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_AND;  end
        OP_ORI:   begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_OR;   end
        OP_XORI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_XOR;  end
        OP_SLLI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_SLL;  end
        OP_SRLI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_SRL;  end
        OP_SRAI:  begin use1 = 1'b1; out.wb = 1'b1; out.b = zimm8; out.alu_op = ALU_SRA;  end
        OP_LUI:   begin out.wb = 1'b1; out.b = {i[23:16], 8'h00}; out.alu_op = ALU_PASSB; end
        OP_LW, OP_LB, OP_LBU: begin
          use1 = 1'b1; out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_ADD;
          out.mem_op = (i[7:0] == OP_LW) ? MEM_LW : (i[7:0] == OP_LB) ? MEM_LB : MEM_LBU;
        end
        OP_SW, OP_SB: begin
          use1 = 1'b1; use2 = 1'b1; out.b = simm8; out.alu_op = ALU_ADD;
          out.sdata  = v2;
          out.mem_op = (i[7:0] == OP_SW) ? MEM_SW : MEM_SB;
        end
        OP_BEQ, OP_BNE, OP_BLT, OP_BGE, OP_BLTU, OP_BGEU: begin
          use1 = 1'b1; use2 = 1'b1; out.alu_op = ALU_SUB; out.offset = simm8;
          unique case (i[7:0])
            OP_BEQ:  out.br = BR_EQ;
            OP_BNE:  out.br = BR_NE;
            OP_BLT:  out.br = BR_LT;
            OP_BGE:  out.br = BR_GE;
            OP_BLTU: out.br = BR_LTU;
            default: out.br = BR_GEU;
          endcase
        end
        OP_JAL: begin
          out.wb = 1'b1; out.a = in.pc; out.b = word_t'(3); out.alu_op = ALU_ADD;
          out.br = BR_JAL; out.offset = word_t'($signed(i[23:12]));
          self_jump = (i[23:12] == '0);
        end
        OP_JALR: begin
          use1 = 1'b1; out.wb = 1'b1; out.a = in.pc; out.b = word_t'(3); out.alu_op = ALU_ADD;
          out.br = BR_JALR; out.base = v1; out.offset = simm8;
        end
        default: ;
      endcase
    end else begin
      out.rd = i[7:4];
      unique case (i[3:0])
        C_MV:   begin use2 = 1'b1; out.wb = 1'b1; out.alu_op = ALU_PASSB; end
        C_ADD:  begin use1 = 1'b1; use2 = 1'b1; out.wb = 1'b1; out.alu_op = ALU_ADD; end
        C_SUB:  begin use1 = 1'b1; use2 = 1'b1; out.wb = 1'b1; out.alu_op = ALU_SUB; end
        C_AND:  begin use1 = 1'b1; use2 = 1'b1; out.wb = 1'b1; out.alu_op = ALU_AND; end
        C_LI:   begin out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_PASSB; end
        C_ADDI: begin use1 = 1'b1; out.wb = 1'b1; out.b = simm8; out.alu_op = ALU_ADD; end
        C_J: begin
          out.br = BR_JAL; out.offset = word_t'($signed(i[15:4]));
          self_jump = (i[15:4] == '0);
        end
        C_JR: begin use1 = 1'b1; out.br = BR_JALR; out.base = v1; out.offset = '0; end
        default: ;
      endcase
    end

    bypass = in.valid && ((use1 && byp1) || (use2 && byp2));
    stall  = in.valid && ex_wb && (ex_rd != '0) &&
             ((use1 && ex_rd == ra1) || (use2 && ex_rd == ra2));
    if (stall) out.valid = 1'b0;
    if (!out.valid) begin
      out.wb     = 1'b0;
      out.br     = BR_NONE;
      out.mem_op = MEM_NONE;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)                                         finished <= 1'b0;
    else if (in.valid && self_jump && !flush && !stall) finished <= 1'b1;
  end

endmodule
