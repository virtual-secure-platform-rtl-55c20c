// tb_ram_write_bar: exhaustive over address, previous bit and controlled
// bit for the paper's example bar (v=2, address 0x01) and for a v=8 bar at
// address 0x5A: the bar takes the controlled bit only on an exact match.
module tb_ram_write_bar;
  logic [1:0] a2;
  logic [7:0] a8;
  logic prev, ctrl, cur2, cur8;
  int checks = 0, failures = 0;

  ram_write_bar #(.V(2), .ADDR(1))    dut2 (.addr(a2), .prev(prev), .ctrl(ctrl), .cur(cur2));
  ram_write_bar #(.V(8), .ADDR(8'h5A)) dut8 (.addr(a8), .prev(prev), .ctrl(ctrl), .cur(cur8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++)
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < 2; c++) begin
          a8 = 8'(a); a2 = 2'(a); prev = 1'(p); ctrl = 1'(c);
          #1;
          checks++;
          if (cur8 !== ((a == 'h5A) ? ctrl : prev)) begin
            failures++; $display("FAIL v8 a=%0h p=%0d c=%0d cur=%b", a, p, c, cur8);
          end
          if (a < 4) begin
            checks++;
            if (cur2 !== ((a == 1) ? ctrl : prev)) begin
              failures++; $display("FAIL v2 a=%0h p=%0d c=%0d cur=%b", a, p, c, cur2);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
