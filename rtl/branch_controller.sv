// branch_controller: branch decision and target of the Execution stage.
//
// From the comparison flags that the ALU produces for rs1 - rs2 it decides
// whether a conditional branch is taken (equal, not equal, signed and
// unsigned less-than / greater-or-equal); jumps are always taken. The
// target is base + offset, where base is the instruction's own address for
// PC-relative branches and jumps and rs1 for register jumps. The taken
// flag and target steer the PC multiplexer in the fetch stage. The paper
// gives the decision from the ALU result; placing the target adder here is
// this design's choice.
//
// Interface: kind, flags, base, offset, taken, target. Combinational.
module branch_controller
  import vsp_pkg::*;
(
  input  br_t        kind,
  input  alu_flags_t flags,
  input  word_t      base,
  input  word_t      offset,
  output logic       taken,
  output word_t      target
);

  always_comb begin
    unique case (kind)
      BR_EQ:   taken = flags.eq;
      BR_NE:   taken = !flags.eq;
      BR_LT:   taken = flags.lt;
      BR_GE:   taken = !flags.lt;
      BR_LTU:  taken = flags.ltu;
      BR_GEU:  taken = !flags.ltu;
      BR_JAL,
      BR_JALR: taken = 1'b1;
      default: taken = 1'b0;
    endcase
    target = base + offset;
  end

endmodule
