// pipe_reg: a pipeline register of the five-stage pipeline.
//
// Holds one stage's output for the next stage. When hold is high it keeps
// its value (a stall); when clear is high it loads RESET_VAL, a bubble,
// which takes priority over hold (a flush after a taken branch); reset
// also loads RESET_VAL. Over TFHE such registers cost no gates, the
// ciphertexts are simply kept in memory; in hardware they are flip-flops.
// The paper's pipeline has three of them (IF/ID, ID/Ex, Ex/Mem); the
// hold/clear controls are this design's.
//
// Interface: clk, rst, hold, clear, d, q. Timing: q updates at the edge.
module pipe_reg #(
  parameter type T = logic [7:0],
  parameter T RESET_VAL = T'(0)
) (
  input  logic clk,
  input  logic rst,
  input  logic hold,
  input  logic clear,
  input  T     d,
  output T     q
);

  always_ff @(posedge clk) begin
    if (rst || clear) q <= RESET_VAL;
    else if (!hold)   q <= d;
  end

endmodule
