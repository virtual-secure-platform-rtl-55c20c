// cmux_ram: one-cycle single-port RAM built as a CMUX Memory.
//
// The paper's RAM for the processor over TFHE. Its W*2**V state bits are
// stored bit-sliced (block i = bit i of every word). Each cycle:
//   - the read unit (W CMUX trees) reads the addressed word from the
//     contents stored last cycle;
//   - the control unit returns that word as read data and forms the
//     controlled data: the write data if the write flag is set, else the
//     word just read;
//   - the write unit (W*2**V write bars) rebuilds every stored bit,
//     replacing the addressed word by the controlled data;
//   - the rebuilt contents are stored at the clock edge.
// Read and write are exclusive and share one address, as in the paper.
// The Circuit Bootstrapping that turns the address into selector
// ciphertexts changes only the encryption form and is a wire here.
//
// Interface: clk, rst (synchronous, clears the contents; this design's
// choice), addr (V), wflag, wdata (W), rdata (W).
// Timing: rdata shows the word at addr in the same cycle; a write is
// visible to reads from the next cycle on.
module cmux_ram #(
  parameter int V = 8,
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [V-1:0] addr,
  input  logic         wflag,
  input  logic [W-1:0] wdata,
  output logic [W-1:0] rdata
);

  logic [2**V-1:0] mem_q [W];
  logic [2**V-1:0] mem_d [W];
  logic [W-1:0]    rd_raw;
  logic [W-1:0]    ctrl_data;

  ram_read_unit #(.V(V), .W(W)) u_read (
    .addr (addr),
    .mem  (mem_q),
    .rdata(rd_raw)
  );

  ram_control_unit #(.W(W)) u_ctrl (
    .rdata_in (rd_raw),
    .wflag    (wflag),
    .wdata    (wdata),
    .rdata_out(rdata),
    .ctrl_data(ctrl_data)
  );

  ram_write_unit #(.V(V), .W(W)) u_write (
    .addr     (addr),
    .ctrl_data(ctrl_data),
    .mem_prev (mem_q),
    .mem_cur  (mem_d)
  );

  always_ff @(posedge clk) begin
    for (int i = 0; i < W; i++) mem_q[i] <= rst ? '0 : mem_d[i];
  end

endmodule
