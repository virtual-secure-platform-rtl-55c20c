// tb_main_register: random writes and reads against a model; register 0
// always reads zero; a write is visible from the next cycle; reset clears.
module tb_main_register;
  import vsp_pkg::*;
  logic clk = 0, rst = 1;
  reg_t ra1, ra2, wa, dbg_addr;
  word_t rd1, rd2, wd, dbg_data;
  logic we;
  word_t model [16];
  int checks = 0, failures = 0;

  main_register dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = '0; wd = '0; ra1 = '0; ra2 = '0; dbg_addr = '0;
    @(posedge clk); #1 rst = 0;
    for (int r = 0; r < 16; r++) model[r] = '0;
    for (int t = 0; t < 3000; t++) begin
      ra1 = reg_t'($urandom); ra2 = reg_t'($urandom); dbg_addr = reg_t'($urandom);
      we = 1'($urandom); wa = reg_t'($urandom); wd = word_t'($urandom);
      #1;
      checks += 3;
      if (rd1 !== model[ra1]) begin failures++; $display("FAIL rd1 r%0d %h exp %h", ra1, rd1, model[ra1]); end
      if (rd2 !== model[ra2]) begin failures++; $display("FAIL rd2"); end
      if (dbg_data !== model[dbg_addr]) begin failures++; $display("FAIL dbg"); end
      @(posedge clk); #1;
      if (we && wa != 0) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
