// cmux_tree: binary multiplexer tree that selects one of 2**V entries.
//
// This is the plaintext form of the CMUX tree used by the CMUX Memory read
// unit and by the ROM. Level 0 pairs neighbouring entries (addresses that
// differ only in bit 0) and is steered by sel[0]; each further level halves
// the number of candidates and is steered by the next address bit, so the
// root is steered by sel[V-1]. That ordering is the one drawn for the
// two-level example in the paper. A tree of 2**V entries holds 2**V-1 muxes.
//
// Interface: sel (V bits), leaves (2**V entries of DW bits, entry j at
// leaves[j*DW +: DW]), y (DW bits). Purely combinational.
module cmux_tree #(
  parameter int V  = 8,
  parameter int DW = 1
) (
  input  logic [V-1:0]           sel,
  input  logic [(2**V)*DW-1:0]   leaves,
  output logic [DW-1:0]          y
);

  for (genvar k = 0; k < V; k++) begin : g_lvl
    localparam int N = 2 ** (V - k - 1);
    logic [N*DW-1:0] n;
    for (genvar j = 0; j < N; j++) begin : g_mux
      if (k == 0) begin : g_leaf
        assign n[j*DW +: DW] = sel[0] ? leaves[(2*j+1)*DW +: DW] : leaves[(2*j)*DW +: DW];
      end else begin : g_inner
        assign n[j*DW +: DW] = sel[k] ? g_lvl[k-1].n[(2*j+1)*DW +: DW]
                                      : g_lvl[k-1].n[(2*j)*DW +: DW];
      end
    end
  end

  assign y = g_lvl[V-1].n[DW-1:0];

endmodule
