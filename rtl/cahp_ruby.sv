// cahp_ruby: the five-stage pipelined CAHP-Ruby processor with its ROM and
// CMUX Memory RAM.
//
// This is the processor that the Virtual Secure Platform evaluates gate by
// gate over fully homomorphic encryption: every wire would carry a
// ciphertext and every clock cycle is one evaluation of this circuit. Here
// it is written as the plaintext circuit. Stages, as in the paper:
//   IF   PC, PC multiplexer, ROM (32-bit blocks), 32-bit instruction cache,
//        aligner for 16/24-bit instructions            (if_stage, rom)
//   ID   decoder, main register file read, termination flag (id_stage,
//        main_register)
//   Ex   ALU and branch controller                       (alu,
//        branch_controller)
//   Mem  memory controller and one-cycle RAM             (mem_controller,
//        cmux_ram)
//   WB   the Mem stage's result written into the main register file at the
//        end of the Mem cycle (no fourth pipeline register, as drawn in the
//        paper's pipeline figure).
// Three pipeline registers (IF/ID, ID/Ex, Ex/Mem) separate the stages.
//
// This design's own choices: a taken branch or jump is resolved in Ex and
// flushes IF/ID and ID/Ex (two bubbles); a read of a register written by
// the instruction in Ex stalls decode one cycle; the Mem stage's write-back
// value is bypassed into decode.
//
// Host side (this design's choice): while rst is high the host owns the RAM
// port (host_ram_*) and may write the ROM (rom_load_*); the processor
// starts at address 0 when rst falls. ram_clear clears the RAM. After the
// run the host reads the RAM through the same port (rst high again) and
// the registers through dbg_reg_*. finished is the termination flag.
module cahp_ruby
  import vsp_pkg::*;
#(
  parameter int ROM_BYTES = 512,
  parameter int V         = 8,
  parameter int W         = 16,
  localparam int ROM_AW   = $clog2(ROM_BYTES / 4)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              ram_clear,
  input  logic              rom_load_we,
  input  logic [ROM_AW-1:0] rom_load_addr,
  input  logic [31:0]       rom_load_data,
  input  logic              host_ram_we,
  input  logic [V-1:0]      host_ram_addr,
  input  logic [W-1:0]      host_ram_wdata,
  output logic [W-1:0]      host_ram_rdata,
  input  reg_t              dbg_reg_addr,
  output word_t             dbg_reg_data,
  output logic              finished
);

  // ---------------- IF ----------------
  logic [ROM_AW-1:0] rom_addr;
  logic [31:0]       rom_data;
  if_id_t            if_out, if_id_q;
  logic              stall, redirect, fetch_bubble;
  word_t             br_target;

  rom #(.ROM_BYTES(ROM_BYTES)) u_rom (
    .clk      (clk),
    .load_we  (rom_load_we),
    .load_addr(rom_load_addr),
    .load_data(rom_load_data),
    .rd_addr  (rom_addr),
    .rd_data  (rom_data)
  );

  if_stage #(.ROM_AW(ROM_AW)) u_if (
    .clk         (clk),
    .rst         (rst),
    .stall       (stall),
    .redirect    (redirect),
    .target      (br_target),
    .rom_addr    (rom_addr),
    .rom_data    (rom_data),
    .out         (if_out),
    .fetch_bubble(fetch_bubble)
  );

  pipe_reg #(.T(if_id_t)) u_if_id (
    .clk(clk), .rst(rst), .hold(stall), .clear(redirect), .d(if_out), .q(if_id_q)
  );

  // ---------------- ID ----------------
  reg_t    ra1, ra2;
  word_t   rd1, rd2;
  id_ex_t  id_out, id_ex_q;
  ex_mem_t ex_mem_d, ex_mem_q;
  logic    wb_en, bypass;
  word_t   wb_data;

  main_register u_regs (
    .clk     (clk),
    .rst     (rst),
    .ra1     (ra1),
    .ra2     (ra2),
    .rd1     (rd1),
    .rd2     (rd2),
    .we      (wb_en),
    .wa      (ex_mem_q.rd),
    .wd      (wb_data),
    .dbg_addr(dbg_reg_addr),
    .dbg_data(dbg_reg_data)
  );

  id_stage u_id (
    .clk     (clk),
    .rst     (rst),
    .in      (if_id_q),
    .flush   (redirect),
    .ra1     (ra1),
    .ra2     (ra2),
    .rd1     (rd1),
    .rd2     (rd2),
    .ex_wb   (id_ex_q.valid && id_ex_q.wb),
    .ex_rd   (id_ex_q.rd),
    .mem_wb  (wb_en),
    .mem_rd  (ex_mem_q.rd),
    .mem_wd  (wb_data),
    .out     (id_out),
    .stall   (stall),
    .bypass  (bypass),
    .finished(finished)
  );

  pipe_reg #(.T(id_ex_t)) u_id_ex (
    .clk(clk), .rst(rst), .hold(1'b0), .clear(redirect), .d(id_out), .q(id_ex_q)
  );

  // ---------------- Ex ----------------
  word_t      alu_y;
  alu_flags_t alu_flags;
  logic       taken;

  alu u_alu (
    .op   (id_ex_q.alu_op),
    .a    (id_ex_q.a),
    .b    (id_ex_q.b),
    .y    (alu_y),
    .flags(alu_flags)
  );

  branch_controller u_br (
    .kind  (id_ex_q.br),
    .flags (alu_flags),
    .base  (id_ex_q.base),
    .offset(id_ex_q.offset),
    .taken (taken),
    .target(br_target)
  );

  assign redirect = id_ex_q.valid && taken;

  always_comb begin
    ex_mem_d.valid  = id_ex_q.valid;
    ex_mem_d.res    = alu_y;
    ex_mem_d.mem_op = id_ex_q.mem_op;
    ex_mem_d.sdata  = id_ex_q.sdata;
    ex_mem_d.wb     = id_ex_q.wb;
    ex_mem_d.rd     = id_ex_q.rd;
  end

  pipe_reg #(.T(ex_mem_t)) u_ex_mem (
    .clk(clk), .rst(rst), .hold(1'b0), .clear(1'b0), .d(ex_mem_d), .q(ex_mem_q)
  );

  // ---------------- Mem / WB ----------------
  logic [V-1:0] mc_addr, ram_addr;
  logic         mc_wflag, ram_wflag;
  word_t        mc_wdata, ram_rdata, ldata;
  logic [W-1:0] ram_wdata;

  mem_controller #(.V(V)) u_mc (
    .op       (ex_mem_q.valid ? ex_mem_q.mem_op : MEM_NONE),
    .addr     (ex_mem_q.res),
    .sdata    (ex_mem_q.sdata),
    .ram_addr (mc_addr),
    .ram_wflag(mc_wflag),
    .ram_wdata(mc_wdata),
    .ram_rdata(ram_rdata),
    .ldata    (ldata)
  );

  always_comb begin
    ram_addr  = rst ? host_ram_addr  : mc_addr;
    ram_wflag = rst ? host_ram_we    : mc_wflag;
    ram_wdata = rst ? host_ram_wdata : W'(mc_wdata);
  end

  logic [W-1:0] ram_q;

  cmux_ram #(.V(V), .W(W)) u_ram (
    .clk  (clk),
    .rst  (ram_clear),
    .addr (ram_addr),
    .wflag(ram_wflag),
    .wdata(ram_wdata),
    .rdata(ram_q)
  );

  assign ram_rdata      = word_t'(ram_q);
  assign host_ram_rdata = ram_q;

  always_comb begin
    wb_en   = ex_mem_q.valid && ex_mem_q.wb;
    wb_data = (ex_mem_q.mem_op inside {MEM_LW, MEM_LB, MEM_LBU}) ? ldata : ex_mem_q.res;
  end

endmodule
