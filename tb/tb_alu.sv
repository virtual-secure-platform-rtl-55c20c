// tb_alu: every operation on random and corner operands against an
// independent model written with plain integer arithmetic.
module tb_alu;
  import vsp_pkg::*;
  alu_op_t op;
  word_t a, b, y;
  alu_flags_t flags;
  int checks = 0, failures = 0;

  alu dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned model(alu_op_t o, int unsigned x, int unsigned z);
    int sx, sz;
    sx = (x >= 32768) ? int'(x) - 65536 : int'(x);
    sz = (z >= 32768) ? int'(z) - 65536 : int'(z);
    case (o)
      ALU_ADD:   return (x + z) % 65536;
      ALU_SUB:   return (x + 65536 - z) % 65536;
      ALU_AND:   return x & z;
      ALU_OR:    return x | z;
      ALU_XOR:   return x ^ z;
      ALU_SLL:   return (x << (z % 16)) % 65536;
      ALU_SRL:   return x >> (z % 16);
      ALU_SRA:   return (x >> (z % 16)) | ((sx < 0) ? (65536 - (65536 >> (z % 16))) : 0);
      ALU_SLT:   return (sx < sz) ? 1 : 0;
      ALU_SLTU:  return (x < z) ? 1 : 0;
      ALU_PASSB: return z;
      default:   return 0;
    endcase
  endfunction

  initial begin
    int unsigned corner [6] = '{0, 1, 32767, 32768, 65535, 12345};
    for (int t = 0; t < 6000; t++) begin
      op = alu_op_t'(t % 11);
      a  = (t % 7 == 0) ? word_t'(corner[$urandom % 6]) : word_t'($urandom);
      b  = (t % 5 == 0) ? word_t'(corner[$urandom % 6]) : word_t'($urandom);
      #1;
      checks++;
      if (int'(y) != int'(model(op, a, b))) begin
        failures++; $display("FAIL %s a=%h b=%h y=%h exp %h", op.name(), a, b, y, model(op, a, b));
      end
      checks++;
      if (flags.eq != (a == b) || flags.ltu != (a < b) || flags.lt != ($signed(a) < $signed(b))) begin
        failures++; $display("FAIL flags a=%h b=%h %b", a, b, flags);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
