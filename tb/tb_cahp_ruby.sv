// tb_cahp_ruby: end-to-end test of the pipelined processor at its default
// size (512-byte ROM, 256 x 16-bit RAM).
//
// Each program is assembled here, loaded into the ROM and the RAM through
// the host ports while reset is held, and run until the termination flag
// rises (a jump to itself). Results are then read from the registers and,
// with reset held again, from the RAM, and compared with values computed
// in this testbench.
//   1. Timing: five independent instructions then a self-jump; the flag
//      must rise after exactly 7 cycles (one instruction per cycle).
//   2. Stall: a dependent pair costs exactly one cycle (flag after 5).
//   3. Branch flush: a taken jump costs exactly two cycles (flag after 5,
//      against 3 for the same two instructions without the penalty).
//   4. Fibonacci(n) for n = 5 (the paper's input) and n = 12.
//   5. Hamming distance of 0x10101010 and 0xdeadbeef (the paper's inputs),
//      with a subroutine called by JAL and left by C.JR, plus byte stores
//      and signed/unsigned byte loads.
//   6. Brainf*ck: an interpreter running "++++[>++++++++++<-]>++" (the
//      paper's input), which must leave 42 in the second cell.
// Over the run it counts decode stalls, write-back bypasses, branch
// flushes, fetch bubbles, byte stores and terminations, and fails if any
// of them never happened.
module tb_cahp_ruby;
  import vsp_pkg::*;
  import cahp_asm_pkg::*;

  logic clk = 0, rst = 1, ram_clear = 0;
  logic rom_load_we = 0;
  logic [6:0] rom_load_addr = '0;
  logic [31:0] rom_load_data = '0;
  logic host_ram_we = 0;
  logic [7:0] host_ram_addr = '0;
  logic [15:0] host_ram_wdata = '0, host_ram_rdata;
  reg_t dbg_reg_addr = '0;
  word_t dbg_reg_data;
  logic finished;

  cahp_ruby dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_bypass = 0, n_flush = 0, n_bubble = 0, n_sb = 0, n_finish = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (dut.stall && !dut.redirect) n_stall++;
    if (dut.bypass) n_bypass++;
    if (dut.redirect) n_flush++;
    if (dut.fetch_bubble && !dut.redirect) n_bubble++;
    if (dut.u_mc.op == MEM_SB) n_sb++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- assembler state ----------------
  logic [7:0] img [512];
  int pc;
  int lbl [string];

  function automatic void org();
    pc = 0;
    foreach (img[k]) img[k] = 8'h00;
  endfunction
  function automatic void e24(logic [23:0] x);
    img[pc] = x[7:0]; img[pc+1] = x[15:8]; img[pc+2] = x[23:16]; pc += 3;
  endfunction
  function automatic void e16(logic [15:0] x);
    img[pc] = x[7:0]; img[pc+1] = x[15:8]; pc += 2;
  endfunction
  function automatic void label(string name);
    lbl[name] = pc;
  endfunction
  // offset from here to a label (0 on the first pass)
  function automatic int to(string name);
    return lbl.exists(name) ? lbl[name] - pc : 0;
  endfunction

  // ---------------- running ----------------
  logic [15:0] ram_init [256];

  task automatic run(output int cycles, input int limit);
    rst = 1;
    ram_clear = 1;
    @(negedge clk);
    ram_clear = 0;
    for (int b = 0; b < 128; b++) begin
      rom_load_we = 1; rom_load_addr = 7'(b);
      rom_load_data = {img[4*b+3], img[4*b+2], img[4*b+1], img[4*b]};
      @(negedge clk);
    end
    rom_load_we = 0;
    for (int a = 0; a < 256; a++) begin
      host_ram_we = 1; host_ram_addr = 8'(a); host_ram_wdata = ram_init[a];
      @(negedge clk);
    end
    host_ram_we = 0;
    rst = 0;
    cycles = 0;
    while (!finished && cycles < limit) begin
      @(posedge clk); #1;
      cycles++;
    end
    if (finished) n_finish++;
    chk(finished, "program terminated");
    repeat (4) @(posedge clk);
    #1;
  endtask

  task automatic reg_rd(int r, output word_t v);
    dbg_reg_addr = reg_t'(r);
    #1 v = dbg_reg_data;
  endtask

  task automatic ram_read(int a, output logic [15:0] v);
    rst = 1;
    host_ram_we = 0; host_ram_addr = 8'(a);
    #1 v = host_ram_rdata;
  endtask

  // ---------------- programs ----------------
  function automatic void prog_fib();
    for (int pass = 0; pass < 2; pass++) begin
      org();
      e24(i3(OP_LW, 1, 0, 0));            // r1 = n
      e16(c_ri(C_LI, 2, 0));              // a = 0
      e16(c_ri(C_LI, 3, 1));              // b = 1
      label("loop");
      e24(b3(OP_BEQ, 1, 0, to("done")));
      e24(r3(OP_ADD, 4, 2, 3));           // t = a + b
      e16(c_rr(C_MV, 2, 3));              // a = b
      e16(c_rr(C_MV, 3, 4));              // b = t
      e16(c_ri(C_ADDI, 1, -1));
      e16(c_j(to("loop")));
      label("done");
      e24(s3(OP_SW, 2, 0, 2));            // RAM word 1 = fib(n)
      e16(c_j(0));
    end
  endfunction

  function automatic void prog_hamming();
    for (int pass = 0; pass < 2; pass++) begin
      org();
      e16(c_ri(C_LI, 5, 0));
      e24(i3(OP_LW, 1, 0, 0));            // a low half
      e24(i3(OP_LW, 2, 0, 4));            // b low half
      e24(r3(OP_XOR, 1, 1, 2));
      e24(jal(15, to("pop")));
      e24(i3(OP_LW, 1, 0, 2));            // a high half
      e24(i3(OP_LW, 2, 0, 6));            // b high half
      e24(r3(OP_XOR, 1, 1, 2));
      e24(jal(15, to("pop")));
      e24(s3(OP_SW, 5, 0, 8));            // RAM word 4 = distance
      e24(s3(OP_SB, 5, 0, 11));           // high byte of word 5
      e16(c_ri(C_LI, 8, -128));
      e24(s3(OP_SB, 8, 0, 10));           // low byte of word 5 = 0x80
      e24(i3(OP_LBU, 6, 0, 11));
      e24(i3(OP_LB, 9, 0, 10));
      e24(i3(OP_LBU, 10, 0, 10));
      label("halt");
      e16(c_j(0));
      label("pop");                       // r5 += popcount(r1)
      e24(b3(OP_BEQ, 1, 0, to("ret")));
      e24(i3(OP_ANDI, 3, 1, 1));
      e16(c_rr(C_ADD, 5, 3));
      e24(i3(OP_SRLI, 1, 1, 1));
      e16(c_j(to("pop")));
      label("ret");
      e16(c_jr(15));
    end
  endfunction

  // Brainf*ck interpreter. The BF program is stored as bytes from RAM
  // byte 0, ended by 0; the tape starts at RAM byte 128.
  // r1 = program pointer, r2 = tape pointer, r3 = instruction,
  // r4 = cell, r5 = loop depth, r6..r11 = character constants.
  function automatic void prog_bf();
    for (int pass = 0; pass < 2; pass++) begin
      org();
      e16(c_ri(C_LI, 1, 0));
      e24(i3(OP_ADDI, 2, 0, 127));
      e16(c_ri(C_ADDI, 2, 1));            // tape at 128
      e16(c_ri(C_LI, 6, "+"));
      e16(c_ri(C_LI, 7, "-"));
      e16(c_ri(C_LI, 8, ">"));
      e16(c_ri(C_LI, 9, "<"));
      e16(c_ri(C_LI, 10, "["));
      e16(c_ri(C_LI, 11, "]"));
      label("next");
      e24(i3(OP_LBU, 3, 1, 0));
      e24(b3(OP_BEQ, 3, 0, to("end")));
      e24(i3(OP_LBU, 4, 2, 0));
      e24(b3(OP_BNE, 3, 6, to("n_plus")));
      e16(c_ri(C_ADDI, 4, 1));
      e24(s3(OP_SB, 4, 2, 0));
      e16(c_j(to("step")));
      label("n_plus");
      e24(b3(OP_BNE, 3, 7, to("n_minus")));
      e16(c_ri(C_ADDI, 4, -1));
      e24(s3(OP_SB, 4, 2, 0));
      e16(c_j(to("step")));
      label("n_minus");
      e24(b3(OP_BNE, 3, 8, to("n_right")));
      e16(c_ri(C_ADDI, 2, 1));
      e16(c_j(to("step")));
      label("n_right");
      e24(b3(OP_BNE, 3, 9, to("n_left")));
      e16(c_ri(C_ADDI, 2, -1));
      e16(c_j(to("step")));
      label("n_left");
      e24(b3(OP_BNE, 3, 10, to("n_open")));
      e24(i3(OP_ANDI, 4, 4, 8'hFF));
      e24(b3(OP_BNE, 4, 0, to("step")));
      e16(c_ri(C_LI, 5, 1));              // skip forward to the matching ]
      label("fwd");
      e16(c_ri(C_ADDI, 1, 1));
      e24(i3(OP_LBU, 3, 1, 0));
      e24(b3(OP_BNE, 3, 10, to("f_nopen")));
      e16(c_ri(C_ADDI, 5, 1));
      label("f_nopen");
      e24(b3(OP_BNE, 3, 11, to("f_nclose")));
      e16(c_ri(C_ADDI, 5, -1));
      label("f_nclose");
      e24(b3(OP_BNE, 5, 0, to("fwd")));
      e16(c_j(to("step")));
      label("n_open");                    // must be ]
      e24(i3(OP_ANDI, 4, 4, 8'hFF));
      e24(b3(OP_BEQ, 4, 0, to("step")));
      e16(c_ri(C_LI, 5, 1));              // go back to the matching [
      label("back");
      e16(c_ri(C_ADDI, 1, -1));
      e24(i3(OP_LBU, 3, 1, 0));
      e24(b3(OP_BNE, 3, 11, to("b_nclose")));
      e16(c_ri(C_ADDI, 5, 1));
      label("b_nclose");
      e24(b3(OP_BNE, 3, 10, to("b_nopen")));
      e16(c_ri(C_ADDI, 5, -1));
      label("b_nopen");
      e24(b3(OP_BNE, 5, 0, to("back")));
      label("step");
      e16(c_ri(C_ADDI, 1, 1));
      e24(jal(0, to("next")));
      label("end");
      e16(c_j(0));
    end
  endfunction

  // reference Brainf*ck interpreter
  function automatic int bf_model(string code, int idx);
    byte tape [256];
    int ip = 0, tp = 0, depth;
    foreach (tape[k]) tape[k] = 0;
    while (ip < code.len()) begin
      case (code[ip])
        "+": tape[tp]++;
        "-": tape[tp]--;
        ">": tp++;
        "<": tp--;
        "[": if (tape[tp] == 0) begin depth = 1; while (depth != 0) begin ip++; if (code[ip] == "[") depth++; if (code[ip] == "]") depth--; end end
        "]": if (tape[tp] != 0) begin depth = 1; while (depth != 0) begin ip--; if (code[ip] == "]") depth++; if (code[ip] == "[") depth--; end end
        default: ;
      endcase
      ip++;
    end
    return int'(unsigned'(tape[idx]));
  endfunction

  initial begin
    int cyc, fib_bytes, hbytes, bbytes;
    logic [15:0] v;
    foreach (ram_init[k]) ram_init[k] = '0;

    // 1. one instruction per cycle
    org();
    for (int k = 1; k <= 5; k++) e16(c_ri(C_LI, k, 10 * k));
    e16(c_j(0));
    run(cyc, 100);
    chk(cyc == 7, $sformatf("straight-line: flag after %0d cycles, expected 7", cyc));
    for (int k = 1; k <= 5; k++) begin word_t rv; reg_rd(k, rv); chk(rv == word_t'(10 * k), $sformatf("r%0d", k)); end

    // 2. a dependent pair stalls one cycle
    org();
    e16(c_ri(C_LI, 1, 5));
    e16(c_ri(C_ADDI, 1, 1));
    e16(c_j(0));
    run(cyc, 100);
    chk(cyc == 5, $sformatf("stall: flag after %0d cycles, expected 5", cyc));
    begin word_t rv; reg_rd(1, rv); chk(rv == 16'd6, "stall result"); end

    // 3. a taken jump flushes two instructions
    org();
    e16(c_j(4));
    e16(c_ri(C_LI, 1, 99));                // skipped
    e16(c_j(0));
    run(cyc, 100);
    chk(cyc == 5, $sformatf("flush: flag after %0d cycles, expected 5", cyc));
    begin word_t rv; reg_rd(1, rv); chk(rv == 16'd0, "flushed instruction had no effect"); end

    // 4. Fibonacci
    prog_fib();
    fib_bytes = pc;
    for (int t = 0; t < 2; t++) begin
      int n, fa, fb, ft;
      n = (t == 0) ? 5 : 12;
      ram_init[0] = 16'(n);
      run(cyc, 5000);
      fa = 0; fb = 1;
      for (int k = 0; k < n; k++) begin ft = fa + fb; fa = fb; fb = ft; end
      ram_read(1, v);
      chk(v == 16'(fa), $sformatf("fib(%0d) = %0d, expected %0d", n, v, fa));
      $display("fibonacci n=%0d: %0d cycles, %0d program bytes", n, cyc, fib_bytes);
    end

    // 5. Hamming distance
    begin
      logic [31:0] a = 32'h10101010, b = 32'hdeadbeef;
      int hd;
      hd = $countones(a ^ b);
      foreach (ram_init[k]) ram_init[k] = '0;
      ram_init[0] = a[15:0]; ram_init[1] = a[31:16];
      ram_init[2] = b[15:0]; ram_init[3] = b[31:16];
      prog_hamming();
      hbytes = pc;
      run(cyc, 20000);
      $display("hamming: %0d cycles, %0d program bytes", cyc, hbytes);
      begin word_t rv; reg_rd(6, rv); chk(rv == word_t'(hd), "lbu of stored byte"); end
      begin word_t rv; reg_rd(9, rv); chk(rv == 16'hFF80, "lb sign-extends"); end
      begin word_t rv; reg_rd(10, rv); chk(rv == 16'h0080, "lbu zero-extends"); end
      ram_read(4, v);
      chk(v == 16'(hd), $sformatf("hamming = %0d, expected %0d", v, hd));
      ram_read(5, v);
      chk(v == {8'(hd), 8'h80}, $sformatf("byte stores merged: %h", v));
    end

    // 6. Brainf*ck
    begin
      string code = "++++[>++++++++++<-]>++";
      int expv;
      foreach (ram_init[k]) ram_init[k] = '0;
      for (int k = 0; k < code.len(); k += 2)
        ram_init[k/2] = {(k + 1 < code.len()) ? code[k+1] : 8'h00, code[k]};
      prog_bf();
      bbytes = pc;
      run(cyc, 100000);
      $display("brainf*ck: %0d cycles, %0d program bytes", cyc, bbytes);
      expv = bf_model(code, 1);
      chk(expv == 42, "reference interpreter gives 42");
      ram_read(64, v);                      // RAM bytes 128, 129
      chk(v[15:8] == 8'(expv), $sformatf("brainf*ck cell 1 = %0d, expected %0d", v[15:8], expv));
    end

    $display("events: stalls=%0d bypasses=%0d flushes=%0d fetch_bubbles=%0d byte_stores=%0d terminations=%0d",
             n_stall, n_bypass, n_flush, n_bubble, n_sb, n_finish);
    chk(n_stall > 0, "a stall happened");
    chk(n_bypass > 0, "a bypass happened");
    chk(n_flush > 0, "a flush happened");
    chk(n_bubble > 0, "a fetch bubble happened");
    chk(n_sb > 0, "a byte store happened");
    chk(n_finish > 0, "a termination happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
