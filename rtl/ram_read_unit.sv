// ram_read_unit: read unit of the CMUX Memory RAM.
//
// The RAM is stored bit-sliced: block i holds bit i of every word, so
// mem[i][a] is bit i of the word at address a. For each of the W bits one
// CMUX tree of depth V picks the addressed bit out of its block; the W tree
// outputs together are the read word. This follows the paper's read unit
// (W trees, depth V, one per bit position). With V=8 and W=16 it holds
// 16*255 = 4080 two-input multiplexers, the count the paper reports.
//
// Interface: addr (V), mem (W blocks of 2**V bits), rdata (W).
// Timing: combinational; the surrounding RAM feeds it the contents stored
// at the end of the previous cycle.
module ram_read_unit #(
  parameter int V = 8,
  parameter int W = 16
) (
  input  logic [V-1:0]    addr,
  input  logic [2**V-1:0] mem [W],
  output logic [W-1:0]    rdata
);

  for (genvar i = 0; i < W; i++) begin : g_bit
    cmux_tree #(.V(V), .DW(1)) u_tree (
      .sel   (addr),
      .leaves(mem[i]),
      .y     (rdata[i])
    );
  end

endmodule
