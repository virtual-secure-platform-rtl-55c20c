// main_register: the main register file and its write-back port.
//
// Sixteen 16-bit registers, the number and width the paper gives. The
// decode stage reads two of them combinationally; the Write Back path,
// which comes straight from the Memory Access stage, writes one at the
// clock edge. Register 0 always reads as zero (as in RISC-V, on which the
// instruction set is based; this design's choice). A third read port lets
// the host inspect results. Reset clears every register.
//
// Interface: clk, rst, ra1/rd1, ra2/rd2, we/wa/wd, dbg_addr/dbg_data.
// Timing: a write becomes readable in the next cycle; a value being written
// in the same cycle is bypassed by the decode stage, not here.
module main_register
  import vsp_pkg::*;
#(
  parameter int NREG = 16
) (
  input  logic  clk,
  input  logic  rst,
  input  reg_t  ra1,
  input  reg_t  ra2,
  output word_t rd1,
  output word_t rd2,
  input  logic  we,
  input  reg_t  wa,
  input  word_t wd,
  input  reg_t  dbg_addr,
  output word_t dbg_data
);

  word_t regs [NREG];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
    end else if (we && wa != '0) begin
      regs[wa] <= wd;
    end
  end

  assign rd1      = (ra1 == '0) ? '0 : regs[ra1];
  assign rd2      = (ra2 == '0) ? '0 : regs[ra2];
  assign dbg_data = (dbg_addr == '0) ? '0 : regs[dbg_addr];

endmodule
