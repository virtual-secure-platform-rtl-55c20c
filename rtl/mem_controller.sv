// mem_controller: memory controller of the Memory Access stage.
//
// Turns the loads and stores of the instruction set into accesses of the
// 16-bit RAM. The RAM holds 2**V words; the byte address from the
// Execution stage selects word addr[V:1] and, for byte accesses, byte
// addr[0] (little-endian, this design's choice). Word accesses ignore
// addr[0].
//  - SW writes the 16-bit store data.
//  - SB widens its byte to 16 bits, as the paper requires since the RAM
//    only accepts words: the other byte comes from the word read at the
//    same address in the same cycle (the RAM always reads), so the write
//    leaves it unchanged.
//  - LW returns the word; LB/LBU return the addressed byte, sign- or
//    zero-extended.
//
// Interface: op, addr, sdata in; ram_addr, ram_wflag, ram_wdata out;
// ram_rdata in; ldata out. Combinational; the RAM is one-cycle, so a load's
// data is ready in the same cycle for write-back.
module mem_controller
  import vsp_pkg::*;
#(
  parameter int V = 8
) (
  input  mem_op_t      op,
  input  word_t        addr,
  input  word_t        sdata,
  output logic [V-1:0] ram_addr,
  output logic         ram_wflag,
  output word_t        ram_wdata,
  input  word_t        ram_rdata,
  output word_t        ldata
);

  logic [7:0] byte_rd;

  always_comb begin
    ram_addr  = addr[V:1];
    ram_wflag = (op == MEM_SW) || (op == MEM_SB);
    byte_rd   = addr[0] ? ram_rdata[15:8] : ram_rdata[7:0];
    unique case (op)
      MEM_SB:  ram_wdata = addr[0] ? {sdata[7:0], ram_rdata[7:0]}
                                   : {ram_rdata[15:8], sdata[7:0]};
      default: ram_wdata = sdata;
    endcase
    unique case (op)
      MEM_LB:  ldata = {{8{byte_rd[7]}}, byte_rd};
      MEM_LBU: ldata = {8'h00, byte_rd};
      default: ldata = ram_rdata;
    endcase
  end

endmodule
