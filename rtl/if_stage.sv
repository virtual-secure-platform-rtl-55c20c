// if_stage: Instruction Fetch stage (PC, PC multiplexer, instruction cache,
// instruction aligner).
//
// Instructions are 16 or 24 bits long and packed without padding, while
// the ROM delivers aligned 32-bit blocks, so an instruction may straddle
// two blocks. As in the paper, a 32-bit instruction cache keeps the ROM
// block read in the previous cycle, and an instruction is always complete
// inside the 64 bits formed by that block and the current ROM output.
// How the ROM address is chosen is this design's: when the cache already
// holds the PC's block (a hit), the ROM reads the following block and the
// instruction is cut from {ROM output, cache}; when the PC moves on into
// that following block, the cache takes it over, so straight-line code hits
// every cycle after the first. On a miss (after reset or a jump into
// another block) the ROM reads the PC's block; if the instruction fits in
// it, it issues at once, otherwise fetch waits one cycle while the cache
// fills (a fetch bubble).
//
// The PC multiplexer picks the branch target when the Execution stage
// redirects, holds the PC on a stall or fetch bubble, and otherwise adds
// the instruction length (2 or 3; bit 0 of the first byte set = 24-bit).
// The PC resets to 0.
//
// Interface: clk, rst, stall (hold from decode), redirect/target (from the
// branch controller), rom_addr/rom_data, out (instruction, its PC, its
// length and a valid bit), fetch_bubble (a straddling instruction waits).
// Timing: one instruction per cycle on hits; ROM read is combinational.
module if_stage
  import vsp_pkg::*;
#(
  parameter int ROM_AW = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              stall,
  input  logic              redirect,
  input  word_t             target,
  output logic [ROM_AW-1:0] rom_addr,
  input  logic [31:0]       rom_data,
  output if_id_t            out,
  output logic              fetch_bubble
);

  word_t              pc_q;
  logic               cache_valid;
  logic [ROM_AW-1:0]  cache_tag;
  logic [31:0]        cache_data;

  logic [ROM_AW-1:0]  blk;
  logic [1:0]         off;
  logic               hit;
  logic [63:0]        window;
  logic [23:0]        inst;
  logic               long24;
  logic               complete;
  word_t              pc_next;

  always_comb begin
    blk      = pc_q[ROM_AW+1:2];
    off      = pc_q[1:0];
    hit      = cache_valid && (cache_tag == blk);
    rom_addr = hit ? blk + 1'b1 : blk;
    window   = hit ? {rom_data, cache_data} : {32'h0, rom_data};
    inst     = 24'(window >> {off, 3'b000});
    long24   = inst[0];
    // without the cache, a 24-bit instruction fits at offsets 0-1 and a
    // 16-bit one at offsets 0-2
    complete = hit || (long24 ? (off <= 2'd1) : (off <= 2'd2));
    fetch_bubble = !complete;

    out.valid  = complete;
    out.pc     = pc_q;
    out.inst   = long24 ? inst : {8'h00, inst[15:0]};
    out.long24 = long24;

    if (redirect)            pc_next = target;
    else if (stall || !complete) pc_next = pc_q;
    else                     pc_next = pc_q + (long24 ? word_t'(3) : word_t'(2));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_q        <= '0;
      cache_valid <= 1'b0;
      cache_tag   <= '0;
      cache_data  <= '0;
    end else begin
      pc_q <= pc_next;
      // keep the block of the PC: refill on a miss, and on a hit only when
      // the PC moves on into the block the ROM is reading
      if ((!stall || redirect) && (!hit || pc_next[ROM_AW+1:2] == rom_addr)) begin
        cache_valid <= 1'b1;
        cache_tag   <= rom_addr;
        cache_data  <= rom_data;
      end
    end
  end

endmodule
