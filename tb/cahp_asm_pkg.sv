// cahp_asm_pkg: instruction encoders used by the testbenches to write
// programs for the processor (encoding as described in vsp_pkg).
// 24-bit forms return inst[23:0]; 16-bit forms return inst[15:0].
package cahp_asm_pkg;
  import vsp_pkg::*;

  // rd = rs1 op rs2
  function automatic logic [23:0] r3(logic [7:0] op, int rd, int rs1, int rs2);
    return {4'h0, 4'(rs2), 4'(rs1), 4'(rd), op};
  endfunction
  // rd = rs1 op imm8 (also loads: rd = mem[rs1 + imm])
  function automatic logic [23:0] i3(logic [7:0] op, int rd, int rs1, int imm);
    return {8'(imm), 4'(rs1), 4'(rd), op};
  endfunction
  // mem[rs1 + imm] = rs2
  function automatic logic [23:0] s3(logic [7:0] op, int rs2, int rs1, int imm);
    return {8'(imm), 4'(rs1), 4'(rs2), op};
  endfunction
  // if (rs1 cond rs2) pc += off
  function automatic logic [23:0] b3(logic [7:0] op, int rs1, int rs2, int off);
    return {8'(off), 4'(rs1), 4'(rs2), op};
  endfunction
  function automatic logic [23:0] jal(int rd, int off);
    return {12'(off), 4'(rd), OP_JAL};
  endfunction
  function automatic logic [23:0] lui(int rd, int imm8);
    return {8'(imm8), 4'h0, 4'(rd), OP_LUI};
  endfunction
  // 16-bit: register-register and register-immediate
  function automatic logic [15:0] c_rr(logic [3:0] op, int rd, int rs);
    return {4'h0, 4'(rs), 4'(rd), op};
  endfunction
  function automatic logic [15:0] c_ri(logic [3:0] op, int rd, int imm);
    return {8'(imm), 4'(rd), op};
  endfunction
  function automatic logic [15:0] c_j(int off);
    return {12'(off), C_J};
  endfunction
  function automatic logic [15:0] c_jr(int rs);
    return {8'h00, 4'(rs), C_JR};
  endfunction
endpackage
