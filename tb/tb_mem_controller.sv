// tb_mem_controller: word and byte loads and stores on random addresses
// and data. Byte stores must merge into the word read at the same address
// (little-endian), byte loads must extend the addressed byte.
module tb_mem_controller;
  import vsp_pkg::*;
  localparam int V = 8;
  mem_op_t op;
  word_t addr, sdata, ram_wdata, ram_rdata, ldata;
  logic [V-1:0] ram_addr;
  logic ram_wflag;
  int checks = 0, failures = 0;

  mem_controller #(.V(V)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] bsel;
    for (int t = 0; t < 3000; t++) begin
      op = mem_op_t'(t % 6);
      addr = word_t'($urandom); sdata = word_t'($urandom); ram_rdata = word_t'($urandom);
      #1;
      bsel = addr[0] ? ram_rdata[15:8] : ram_rdata[7:0];
      checks += 2;
      if (ram_addr !== addr[8:1]) begin failures++; $display("FAIL addr"); end
      if (ram_wflag !== (op == MEM_SW || op == MEM_SB)) begin failures++; $display("FAIL wflag"); end
      case (op)
        MEM_SW: begin checks++; if (ram_wdata !== sdata) begin failures++; $display("FAIL sw"); end end
        MEM_SB: begin
          checks++;
          if (ram_wdata !== (addr[0] ? {sdata[7:0], ram_rdata[7:0]} : {ram_rdata[15:8], sdata[7:0]})) begin
            failures++; $display("FAIL sb a0=%b got %h", addr[0], ram_wdata);
          end
        end
        MEM_LW:  begin checks++; if (ldata !== ram_rdata) begin failures++; $display("FAIL lw"); end end
        MEM_LB:  begin checks++; if (ldata !== {{8{bsel[7]}}, bsel}) begin failures++; $display("FAIL lb"); end end
        MEM_LBU: begin checks++; if (ldata !== {8'h00, bsel}) begin failures++; $display("FAIL lbu"); end end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
