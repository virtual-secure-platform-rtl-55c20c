// tb_cmux_ram: random reads and writes against an array model. A read
// returns the stored word in the same cycle; a write is seen by a read of
// the same address in the very next cycle (one-cycle RAM), and a read
// never changes the contents. Also checks the clear input.
module tb_cmux_ram;
  localparam int V = 8, W = 16;
  logic clk = 0, rst = 1;
  logic [V-1:0] addr;
  logic wflag;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [2**V];
  int checks = 0, failures = 0;

  cmux_ram #(.V(V), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = '0; wflag = 0; wdata = '0;
    @(posedge clk); #1;
    rst = 0;
    for (int a = 0; a < 2**V; a++) model[a] = '0;
    checks++;
    if (rdata !== '0) begin failures++; $display("FAIL not cleared"); end
    for (int t = 0; t < 4000; t++) begin
      logic [V-1:0] last_a;
      addr  = (t % 5 == 0) ? last_a : V'($urandom);
      wflag = 1'($urandom);
      wdata = W'($urandom);
      #1;
      checks++;
      if (rdata !== model[addr]) begin
        failures++; $display("FAIL t=%0d addr=%0h got %h exp %h", t, addr, rdata, model[addr]);
      end
      if (wflag) model[addr] = wdata;
      last_a = addr;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
