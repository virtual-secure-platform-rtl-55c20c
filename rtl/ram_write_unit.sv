// ram_write_unit: write unit of the CMUX Memory RAM.
//
// W write blocks, one per data-bit position; each block holds 2**V write
// bars, one per address, so the unit has W*2**V bars working in parallel
// (with V=8 and W=16: 4096 bars of 8 muxes, 32768 muxes in all, the count
// the paper reports). Every bar sees the same address and the controlled
// data bit of its block, and produces the current-cycle value of its bit
// from the previous-cycle value. Whether a write happens at all is already
// folded into the controlled data by the control unit.
//
// Interface: addr (V), ctrl_data (W), mem_prev and mem_cur (W blocks of
// 2**V bits, bit-sliced as in ram_read_unit). Combinational.
module ram_write_unit #(
  parameter int V = 8,
  parameter int W = 16
) (
  input  logic [V-1:0]    addr,
  input  logic [W-1:0]    ctrl_data,
  input  logic [2**V-1:0] mem_prev [W],
  output logic [2**V-1:0] mem_cur  [W]
);

  for (genvar i = 0; i < W; i++) begin : g_block
    for (genvar a = 0; a < 2**V; a++) begin : g_bar
      ram_write_bar #(.V(V), .ADDR(a)) u_bar (
        .addr(addr),
        .prev(mem_prev[i][a]),
        .ctrl(ctrl_data[i]),
        .cur (mem_cur[i][a])
      );
    end
  end

endmodule
