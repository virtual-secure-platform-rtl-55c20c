// alu: arithmetic and logic unit of the Execution stage.
//
// Computes add, subtract, and, or, xor, logical left/right shift,
// arithmetic right shift, signed and unsigned set-less-than on 16-bit
// operands, and a pass-through of operand b (used for immediates loaded
// into a register). It also always reports the comparison of a with b
// (equal, signed less-than, unsigned less-than), which the branch
// controller uses to decide a branch. The paper names the ALU's classes of
// operation (addition, subtraction, logic, shift); the exact list is this
// design's, RV32I-like, cut to 16 bits. Shift amounts use b[3:0].
//
// Interface: op, a, b, y, flags. Purely combinational.
module alu
  import vsp_pkg::*;
(
  input  alu_op_t    op,
  input  word_t      a,
  input  word_t      b,
  output word_t      y,
  output alu_flags_t flags
);

  logic [XLEN:0] diff;   // a - b with borrow in the top bit
  logic [3:0]    sh;

  always_comb begin
    diff      = {1'b0, a} - {1'b0, b};
    flags.eq  = (diff[XLEN-1:0] == '0);
    flags.ltu = diff[XLEN];
    flags.lt  = (a[XLEN-1] != b[XLEN-1]) ? a[XLEN-1] : diff[XLEN-1];
    sh        = b[3:0];
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = diff[XLEN-1:0];
      ALU_AND:   y = a & b;
      ALU_OR:    y = a | b;
      ALU_XOR:   y = a ^ b;
      ALU_SLL:   y = a << sh;
      ALU_SRL:   y = a >> sh;
      ALU_SRA:   y = word_t'($signed(a) >>> sh);
      ALU_SLT:   y = word_t'(flags.lt);
      ALU_SLTU:  y = word_t'(flags.ltu);
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
  end

endmodule
