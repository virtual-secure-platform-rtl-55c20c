// tb_ram_write_unit: random previous contents, address and controlled
// data; the addressed word must become the controlled data and every other
// bit must keep its previous value.
module tb_ram_write_unit;
  localparam int V = 8, W = 16;
  logic [V-1:0]    addr;
  logic [W-1:0]    ctrl_data;
  logic [2**V-1:0] mem_prev [W];
  logic [2**V-1:0] mem_cur  [W];
  int checks = 0, failures = 0;

  ram_write_unit #(.V(V), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < W; i++)
        for (int a = 0; a < 2**V; a++) mem_prev[i][a] = 1'($urandom);
      addr = V'($urandom); ctrl_data = W'($urandom);
      #1;
      bad = 0;
      for (int i = 0; i < W; i++)
        for (int a = 0; a < 2**V; a++)
          if (mem_cur[i][a] !== ((a == int'(addr)) ? ctrl_data[i] : mem_prev[i][a])) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL addr=%0h %0d bits wrong", addr, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
