// tb_rom: load every block through the host port, then read all blocks
// back in a random order; each must equal what was loaded.
module tb_rom;
  localparam int ROM_BYTES = 512, NB = ROM_BYTES / 4, AW = $clog2(NB);
  logic clk = 0;
  logic load_we;
  logic [AW-1:0] load_addr, rd_addr;
  logic [31:0] load_data, rd_data;
  logic [31:0] model [NB];
  int checks = 0, failures = 0;

  rom #(.ROM_BYTES(ROM_BYTES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load_we = 0; load_addr = '0; load_data = '0; rd_addr = '0;
    for (int b = 0; b < NB; b++) begin
      model[b] = $urandom;
      @(negedge clk); load_we = 1; load_addr = AW'(b); load_data = model[b];
    end
    @(negedge clk); load_we = 0;
    for (int t = 0; t < 4 * NB; t++) begin
      rd_addr = (t < NB) ? AW'(t) : AW'($urandom);
      #1;
      checks++;
      if (rd_data !== model[rd_addr]) begin
        failures++; $display("FAIL blk=%0d got %h exp %h", rd_addr, rd_data, model[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
