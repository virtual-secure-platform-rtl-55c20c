// ram_control_unit: control unit of the CMUX Memory RAM.
//
// The interface between the processor and the memory arrays. It holds W
// control modules, one per data bit. Each passes its read bit on to the
// processor and multiplexes between the read bit (mux input 0) and the
// write bit (input 1) under the write flag; the result, the "controlled
// data", goes to the write unit. When the flag is low the controlled data
// equals the stored word, so rewriting it leaves memory unchanged.
//
// Over TFHE the read bit first passes through sample extraction and key
// switching to become a TLWE ciphertext; on plaintext bits that conversion
// is the identity, so here it is a wire.
//
// Interface: rdata_in (W) from the read unit, wflag, wdata (W),
// rdata_out (W) to the memory controller, ctrl_data (W) to the write unit.
// Purely combinational.
module ram_control_unit #(
  parameter int W = 16
) (
  input  logic [W-1:0] rdata_in,
  input  logic         wflag,
  input  logic [W-1:0] wdata,
  output logic [W-1:0] rdata_out,
  output logic [W-1:0] ctrl_data
);

  for (genvar i = 0; i < W; i++) begin : g_module
    always_comb begin
      rdata_out[i] = rdata_in[i];
      ctrl_data[i] = wflag ? wdata[i] : rdata_in[i];
    end
  end

endmodule
