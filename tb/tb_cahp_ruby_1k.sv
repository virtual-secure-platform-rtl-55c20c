// tb_cahp_ruby_1k: end-to-end test of the processor in its larger memory
// setting, a 1 KiB ROM and a 1 KiB RAM (ROM_BYTES = 1024, V = 9: 512
// words of 16 bits).
//
// The program starts with a jump from address 0 to address 608, past the
// first 512 bytes, so the fetch stage has to address the upper half of the
// ROM. There it loads the word at byte address 0x300 (RAM word 0x180, above
// the 256 words of the default build), adds one and stores the sum at byte
// 0x302. A decoy instruction sits at ROM address 96 (608 - 512) and a decoy
// value at RAM word 0x80 (0x180 - 256): if either memory wrapped at 512
// bytes, the wrong register value or RAM word would show up. The testbench
// checks the termination flag, the register, the upper RAM words, that the
// decoys are untouched, and that the termination flag rises after exactly
// 12 cycles: the jump is fetched in cycle 1 and resolved in Ex in cycle 3,
// the five instructions at 608 are fetched in cycles 4 to 8 without a
// fetch bubble (608 starts a ROM block), each of LW, ADDI and SW waits one
// cycle for the register written by the instruction before it, and the
// end jump is decoded in cycle 9 + 3 = 12.
module tb_cahp_ruby_1k;
  import vsp_pkg::*;
  import cahp_asm_pkg::*;

  localparam int ROM_BYTES = 1024;
  localparam int V         = 9;

  logic clk = 0, rst = 1, ram_clear = 0;
  logic rom_load_we = 0;
  logic [7:0] rom_load_addr = '0;
  logic [31:0] rom_load_data = '0;
  logic host_ram_we = 0;
  logic [V-1:0] host_ram_addr = '0;
  logic [15:0] host_ram_wdata = '0, host_ram_rdata;
  reg_t dbg_reg_addr = '0;
  word_t dbg_reg_data;
  logic finished;

  cahp_ruby #(.ROM_BYTES(ROM_BYTES), .V(V)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [7:0] img [ROM_BYTES];
  int pc;

  function automatic void e24(logic [23:0] x);
    img[pc] = x[7:0]; img[pc+1] = x[15:8]; img[pc+2] = x[23:16]; pc += 3;
  endfunction
  function automatic void e16(logic [15:0] x);
    img[pc] = x[7:0]; img[pc+1] = x[15:8]; pc += 2;
  endfunction

  task automatic ram_rd(int a, output logic [15:0] v);
    host_ram_we = 0; host_ram_addr = V'(a);
    #1 v = host_ram_rdata;
  endtask

  initial begin
    int cycles;
    logic [15:0] v;
    word_t r;

    foreach (img[k]) img[k] = 8'h00;
    pc = 0;
    e24(jal(0, 608));                    // jump into the upper half
    pc = 96;                             // decoy at 608 - 512
    e24(i3(OP_ADDI, 2, 0, 99));
    e16(c_j(0));
    pc = 608;
    e24(lui(1, 8'h03));                  // r1 = 0x0300
    e24(i3(OP_LW, 2, 1, 0));             // r2 = RAM[0x300]
    e24(i3(OP_ADDI, 2, 2, 1));           // r2 += 1
    e24(s3(OP_SW, 2, 1, 2));             // RAM[0x302] = r2
    e16(c_j(0));

    // load while reset is held
    ram_clear = 1;
    @(negedge clk);
    ram_clear = 0;
    for (int b = 0; b < ROM_BYTES / 4; b++) begin
      rom_load_we = 1; rom_load_addr = 8'(b);
      rom_load_data = {img[4*b+3], img[4*b+2], img[4*b+1], img[4*b]};
      @(negedge clk);
    end
    rom_load_we = 0;
    host_ram_we = 1;
    host_ram_addr = V'(9'h180); host_ram_wdata = 16'h1234; @(negedge clk);
    host_ram_addr = V'(9'h080); host_ram_wdata = 16'h5555; @(negedge clk);
    host_ram_we = 0;

    rst = 0;
    cycles = 0;
    while (!finished && cycles < 200) begin
      @(posedge clk); #1;
      cycles++;
    end
    chk(finished, "program terminated");
    $display("1 KiB setting: %0d cycles", cycles);
    chk(cycles == 12, $sformatf("flag after %0d cycles, expected 12", cycles));
    repeat (4) @(posedge clk);
    #1;

    dbg_reg_addr = reg_t'(2);
    #1 r = dbg_reg_data;
    chk(r == 16'h1235, $sformatf("r2 = %h, expected 1235 (99 means the ROM wrapped)", r));
    dbg_reg_addr = reg_t'(1);
    #1 r = dbg_reg_data;
    chk(r == 16'h0300, "r1 = 0x0300");

    rst = 1;
    ram_rd(9'h180, v); chk(v == 16'h1234, "RAM word 0x180 kept");
    ram_rd(9'h181, v); chk(v == 16'h1235, $sformatf("RAM word 0x181 = %h, expected 1235", v));
    ram_rd(9'h080, v); chk(v == 16'h5555, "decoy word 0x80 untouched");
    ram_rd(9'h081, v); chk(v == 16'h0000, "word 0x81 untouched");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
