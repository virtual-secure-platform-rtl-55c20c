// tb_branch_controller: each branch kind against the comparison it stands
// for, on random operands whose flags are computed here; the target is
// base + offset modulo 2**16.
module tb_branch_controller;
  import vsp_pkg::*;
  br_t kind;
  alu_flags_t flags;
  word_t base, offset, target;
  logic taken;
  int checks = 0, failures = 0;

  branch_controller dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t x, z;
    logic exp;
    for (int t = 0; t < 3000; t++) begin
      kind = br_t'(t % 9);
      x = word_t'($urandom); z = (t % 3 == 0) ? x : word_t'($urandom);
      flags.eq = (x == z); flags.lt = ($signed(x) < $signed(z)); flags.ltu = (x < z);
      base = word_t'($urandom); offset = word_t'($urandom);
      #1;
      case (kind)
        BR_EQ:  exp = (x == z);
        BR_NE:  exp = (x != z);
        BR_LT:  exp = ($signed(x) < $signed(z));
        BR_GE:  exp = ($signed(x) >= $signed(z));
        BR_LTU: exp = (x < z);
        BR_GEU: exp = (x >= z);
        BR_JAL, BR_JALR: exp = 1;
        default: exp = 0;
      endcase
      checks += 2;
      if (taken !== exp) begin failures++; $display("FAIL %s x=%h z=%h taken=%b", kind.name(), x, z, taken); end
      if (int'(target) != (int'(base) + int'(offset)) % 65536) begin failures++; $display("FAIL target"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
