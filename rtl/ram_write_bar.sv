// ram_write_bar: one stored bit of the CMUX Memory RAM, at constant address ADDR.
//
// A chain of V multiplexers compares the input address with ADDR one bit
// at a time. Stage 0 chooses the controlled data when address bit 0 equals
// ADDR bit 0, otherwise the previous-cycle bit; every later stage k passes
// the previous stage's result on when address bit k equals ADDR bit k and
// falls back to the previous-cycle bit otherwise. The bit is replaced by the
// controlled data only when every address bit matches. This is the chain
// the paper draws for address 0x01 with V=2. Comparing with a constant needs
// no gate: a match with 1 is the address bit itself, a match with 0 its
// inverse. The noise-refreshing bootstrap that ends the bar over TFHE has no
// plaintext effect and is absent here.
//
// Interface: addr (V), prev (the bit last cycle), ctrl (controlled data
// bit), cur (the bit this cycle). Combinational.
module ram_write_bar #(
  parameter int V    = 8,
  parameter int ADDR = 0
) (
  input  logic [V-1:0] addr,
  input  logic         prev,
  input  logic         ctrl,
  output logic         cur
);

  localparam logic [V-1:0] A = V'(ADDR);

  logic [V-1:0] stage;

  assign stage[0] = (addr[0] == A[0]) ? ctrl : prev;
  for (genvar k = 1; k < V; k++) begin : g_stage
    assign stage[k] = (addr[k] == A[k]) ? stage[k-1] : prev;
  end

  assign cur = stage[V-1];

endmodule
