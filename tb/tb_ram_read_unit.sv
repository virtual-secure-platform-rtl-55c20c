// tb_ram_read_unit: random contents and addresses; each read bit must be
// bit i of the addressed word, taken straight from the stored array.
module tb_ram_read_unit;
  localparam int V = 8, W = 16;
  logic [V-1:0]    addr;
  logic [2**V-1:0] mem [W];
  logic [W-1:0]    rdata;
  int checks = 0, failures = 0;

  ram_read_unit #(.V(V), .W(W)) dut (.addr(addr), .mem(mem), .rdata(rdata));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < W; i++)
        for (int a = 0; a < 2**V; a++) mem[i][a] = 1'($urandom);
      for (int k = 0; k < 8; k++) begin
        addr = (k == 0) ? '0 : (k == 1) ? '1 : V'($urandom);
        #1;
        for (int i = 0; i < W; i++) exp[i] = mem[i][addr];
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("FAIL addr=%0h got %h exp %h", addr, rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
