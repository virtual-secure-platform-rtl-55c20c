// tb_id_stage: directed decode checks for each instruction class (ALU
// register and immediate forms, LUI, loads, stores, branches, jumps and the
// 16-bit forms), the read-after-write stall against the instruction in Ex,
// the bypass of the Mem stage's write-back value, and the termination flag
// (set by a jump to itself, not when that jump is being flushed).
module tb_id_stage;
  import vsp_pkg::*;
  import cahp_asm_pkg::*;
  logic clk = 0, rst = 1;
  if_id_t in;
  logic flush;
  reg_t ra1, ra2, ex_rd, mem_rd;
  word_t rd1, rd2, mem_wd;
  logic ex_wb, mem_wb;
  id_ex_t out;
  logic stall, bypass, finished;
  int checks = 0, failures = 0;

  id_stage dut (.*);

  always #5 clk = ~clk;
  // register file model: register r holds 0x100 + r
  always_comb begin
    rd1 = 16'h0100 + 16'(ra1);
    rd2 = 16'h0100 + 16'(ra2);
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic give24(logic [23:0] x);
    in = '{valid: 1'b1, pc: 16'h0040, inst: x, long24: 1'b1};
    #1;
  endtask
  task automatic give16(logic [15:0] x);
    in = '{valid: 1'b1, pc: 16'h0040, inst: {8'h00, x}, long24: 1'b0};
    #1;
  endtask

  initial begin
    in = '0; flush = 0; ex_wb = 0; ex_rd = '0; mem_wb = 0; mem_rd = '0; mem_wd = '0;
    @(posedge clk); #1 rst = 0;

    give24(r3(OP_SUB, 3, 4, 5));
    chk(out.valid && out.alu_op == ALU_SUB && out.a == 16'h0104 && out.b == 16'h0105 && out.wb && out.rd == 3, "SUB");
    give24(i3(OP_ADDI, 3, 2, -5));
    chk(out.alu_op == ALU_ADD && out.a == 16'h0102 && out.b == 16'hFFFB && out.wb && out.rd == 3 && out.mem_op == MEM_NONE, "ADDI");
    give24(i3(OP_ORI, 1, 1, 8'hF0));
    chk(out.alu_op == ALU_OR && out.b == 16'h00F0, "ORI zero-extends");
    give24(i3(OP_SRAI, 6, 7, 3));
    chk(out.alu_op == ALU_SRA && out.a == 16'h0107 && out.b == 16'd3, "SRAI");
    give24(lui(1, 8'hAB));
    chk(out.alu_op == ALU_PASSB && out.b == 16'hAB00 && out.rd == 1 && out.wb, "LUI");
    give24(i3(OP_LB, 9, 10, 7));
    chk(out.mem_op == MEM_LB && out.a == 16'h010A && out.b == 16'd7 && out.wb && out.rd == 9, "LB");
    give24(s3(OP_SW, 5, 6, 4));
    chk(out.mem_op == MEM_SW && out.a == 16'h0106 && out.b == 16'd4 && out.sdata == 16'h0105 && !out.wb, "SW");
    give24(b3(OP_BNE, 1, 2, -6));
    chk(out.br == BR_NE && out.alu_op == ALU_SUB && out.a == 16'h0101 && out.b == 16'h0102 &&
        out.offset == 16'hFFFA && out.base == 16'h0040 && !out.wb, "BNE");
    give24(jal(15, 100));
    chk(out.br == BR_JAL && out.offset == 16'd100 && out.a == 16'h0040 && out.b == 16'd3 && out.wb && out.rd == 15, "JAL link");
    give24(i3(OP_JALR, 0, 15, 2));
    chk(out.br == BR_JALR && out.base == 16'h010F && out.offset == 16'd2, "JALR");
    give16(c_rr(C_MV, 4, 9));
    chk(out.alu_op == ALU_PASSB && out.b == 16'h0109 && out.rd == 4 && out.wb, "C.MV");
    give16(c_rr(C_ADD, 4, 9));
    chk(out.alu_op == ALU_ADD && out.a == 16'h0104 && out.b == 16'h0109 && out.rd == 4, "C.ADD");
    give16(c_ri(C_LI, 7, -1));
    chk(out.alu_op == ALU_PASSB && out.b == 16'hFFFF && out.rd == 7, "C.LI");
    give16(c_j(-8));
    chk(out.br == BR_JAL && out.offset == 16'hFFF8 && !out.wb, "C.J");
    give16(c_jr(15));
    chk(out.br == BR_JALR && out.base == 16'h010F && out.offset == 16'd0, "C.JR");

    // stall: source written by the instruction in Ex
    ex_wb = 1; ex_rd = 2;
    give24(i3(OP_ADDI, 3, 2, 1));
    chk(stall && !out.valid && !out.wb, "stall on RAW");
    ex_rd = 4; #1;
    chk(!stall && out.valid, "no stall on other register");
    ex_rd = 0; give24(i3(OP_ADDI, 3, 0, 1)); #1;
    chk(!stall, "no stall on x0");
    ex_wb = 0;
    // bypass of the Mem stage's write-back
    mem_wb = 1; mem_rd = 2; mem_wd = 16'h1234;
    give24(s3(OP_SW, 2, 2, 0));
    chk(bypass && out.a == 16'h1234 && out.sdata == 16'h1234, "bypass both operands");
    mem_wb = 0; #1;
    chk(!bypass && out.a == 16'h0102, "no bypass");

    // bubble input
    in.valid = 0; #1;
    chk(!out.valid && !out.wb && out.mem_op == MEM_NONE && out.br == BR_NONE, "bubble");

    // termination flag
    give16(c_j(0)); flush = 1;
    @(posedge clk); #1;
    chk(!finished, "flushed self-jump ignored");
    flush = 0;
    give24(jal(0, 4));
    @(posedge clk); #1;
    chk(!finished, "ordinary jump");
    give24(jal(0, 0));
    @(posedge clk); #1;
    chk(finished, "self-jump sets flag");
    in.valid = 0;
    @(posedge clk); #1;
    chk(finished, "flag sticky");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
