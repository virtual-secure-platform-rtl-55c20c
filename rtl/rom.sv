// rom: instruction ROM, read one 32-bit block per cycle.
//
// In the processor over TFHE the ROM is a look-up table evaluated in the
// leveled mode (with vertical and horizontal packing); on plaintext that is
// a multiplexer tree indexed by the block address, which is what is built
// here (cmux_tree over 32-bit entries). The fetch stage reads 32-bit
// blocks, as the paper describes; 512 bytes (128 blocks) is the paper's
// size. The contents are supplied by the program owner, so the ROM has a
// synchronous host write port (this design's choice) used before the
// program starts; the processor never writes it.
//
// Interface: clk, load_we/load_addr/load_data (host), rd_addr, rd_data.
// Timing: rd_data is combinational in rd_addr; loads take effect at the
// clock edge.
module rom #(
  parameter int ROM_BYTES = 512,
  localparam int NB = ROM_BYTES / 4,
  localparam int AW = $clog2(NB)
) (
  input  logic          clk,
  input  logic          load_we,
  input  logic [AW-1:0] load_addr,
  input  logic [31:0]   load_data,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);

  logic [NB*32-1:0] blocks;

  always_ff @(posedge clk) begin
    if (load_we) blocks[load_addr*32 +: 32] <= load_data;
  end

  cmux_tree #(.V(AW), .DW(32)) u_lut (
    .sel   (rd_addr),
    .leaves(blocks),
    .y     (rd_data)
  );

endmodule
