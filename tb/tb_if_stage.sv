// tb_if_stage: a ROM model filled with a random mix of 16- and 24-bit
// instructions. Checks that straight-line fetch delivers every instruction
// with its address, one per cycle with no bubble; that a jump to an
// instruction straddling two ROM blocks costs exactly one fetch bubble;
// that a jump to one inside a block costs none; and that a stall holds the
// PC and the output.
module tb_if_stage;
  import vsp_pkg::*;
  localparam int ROM_AW = 7;
  logic clk = 0, rst = 1, stall = 0, redirect = 0, fetch_bubble;
  word_t target = '0;
  logic [ROM_AW-1:0] rom_addr;
  logic [31:0] rom_data;
  if_id_t out;
  logic [7:0] rom_b [512];
  int pcs [$];
  int checks = 0, failures = 0;

  if_stage #(.ROM_AW(ROM_AW)) dut (.*);

  always_comb rom_data = {rom_b[4*rom_addr+3], rom_b[4*rom_addr+2], rom_b[4*rom_addr+1], rom_b[4*rom_addr]};

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [23:0] inst_at(int p);
    logic [23:0] x;
    x = {rom_b[(p+2)%512], rom_b[(p+1)%512], rom_b[p]};
    return x[0] ? x : {8'h00, x[15:0]};
  endfunction

  task automatic expect_inst(int p, string what);
    checks++;
    if (!out.valid || int'(out.pc) != p || out.inst !== inst_at(p) || out.long24 !== rom_b[p][0]) begin
      failures++;
      $display("FAIL %s: valid=%b pc=%0d exp %0d inst=%h exp %h", what, out.valid, out.pc, p, out.inst, inst_at(p));
    end
  endtask

  initial begin
    int p, k, s_idx, in_idx;
    p = 0;
    while (p < 500) begin
      logic long24;
      long24 = 1'($urandom);
      rom_b[p] = {7'($urandom), long24};
      rom_b[p+1] = 8'($urandom);
      if (long24) rom_b[p+2] = 8'($urandom);
      pcs.push_back(p);
      p += long24 ? 3 : 2;
    end
    for (int b = p; b < 512; b++) rom_b[b] = 8'h00;

    @(posedge clk); #1 rst = 0;
    // straight-line fetch: one instruction per cycle
    for (k = 0; k < 120; k++) begin
      expect_inst(pcs[k], "sequential");
      @(posedge clk); #1;
    end
    // stall for three cycles: output and PC held
    stall = 1;
    repeat (3) begin
      expect_inst(pcs[120], "stall");
      @(posedge clk); #1;
    end
    stall = 0;
    expect_inst(pcs[120], "after stall");
    @(posedge clk); #1;
    expect_inst(pcs[121], "after stall+1");

    // find a straddling instruction and one inside a block, far from here
    s_idx = -1; in_idx = -1;
    for (int j = 140; j < pcs.size(); j++) begin
      int len;
      len = rom_b[pcs[j]][0] ? 3 : 2;
      if (s_idx < 0 && (pcs[j] % 4) + len > 4) s_idx = j;
      if (in_idx < 0 && (pcs[j] % 4) + len <= 4 && (pcs[j] % 4) != 0) in_idx = j;
    end

    // jump to a straddling instruction: one bubble
    redirect = 1; target = word_t'(pcs[s_idx]);
    @(posedge clk); #1 redirect = 0;
    checks++;
    if (out.valid || !fetch_bubble) begin failures++; $display("FAIL expected a fetch bubble"); end
    @(posedge clk); #1;
    expect_inst(pcs[s_idx], "straddle after bubble");
    @(posedge clk); #1;
    expect_inst(pcs[s_idx+1], "straddle+1");

    // jump back to an instruction inside a block: no bubble
    redirect = 1; target = word_t'(pcs[in_idx]);
    @(posedge clk); #1 redirect = 0;
    expect_inst(pcs[in_idx], "in-block target");
    for (k = 1; k < 10; k++) begin
      @(posedge clk); #1;
      expect_inst(pcs[in_idx+k], "after in-block jump");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
