// tb_ram_control_unit: the read word passes through unchanged; the
// controlled data is the write data when the write flag is set and the
// read word otherwise. Random vectors.
module tb_ram_control_unit;
  localparam int W = 16;
  logic [W-1:0] rdata_in, wdata, rdata_out, ctrl_data;
  logic wflag;
  int checks = 0, failures = 0;

  ram_control_unit #(.W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      rdata_in = W'($urandom); wdata = W'($urandom); wflag = 1'($urandom);
      #1;
      checks += 2;
      if (rdata_out !== rdata_in) begin failures++; $display("FAIL read passthrough"); end
      if (ctrl_data !== (wflag ? wdata : rdata_in)) begin
        failures++; $display("FAIL ctrl wflag=%b got %h", wflag, ctrl_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
