// tb_pipe_reg: a pipeline register carrying a struct; loads every cycle,
// keeps its value under hold, loads the bubble value under clear (also
// when hold is high) and on reset.
module tb_pipe_reg;
  typedef struct packed { logic valid; logic [15:0] data; } T;
  logic clk = 0, rst = 1, hold, clear;
  T d, q, exp;
  int checks = 0, failures = 0;

  pipe_reg #(.T(T), .RESET_VAL(T'(17'h0DEAD))) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hold = 0; clear = 0; d = '0;
    @(posedge clk); #1;
    checks++;
    if (q !== T'(17'h0DEAD)) begin failures++; $display("FAIL reset"); end
    rst = 0;
    exp = q;
    for (int t = 0; t < 2000; t++) begin
      hold = 1'($urandom); clear = ($urandom % 5 == 0); d = T'($urandom);
      @(posedge clk); #1;
      if (clear) exp = T'(17'h0DEAD);
      else if (!hold) exp = d;
      checks++;
      if (q !== exp) begin failures++; $display("FAIL t=%0d hold=%b clear=%b q=%h exp %h", t, hold, clear, q, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
