// ssr_core: five-stage RV32I pipeline (IF, ID, EXE, MEM, WB) with the SSR
// load-use scheme.
//
// Data hazards are resolved by two detectors and no stall:
//  * the ID hazard detector (ssr_id_hazard) bypasses results from EXE, MEM and
//    WB into the operands latched into ID/EX; it raises no load-use stall;
//  * the ld hazard detector (ssr_ld_hazard) in EXE compares ID/EX's source
//    registers with EX/MEM's destination and, for a load, feeds the data the
//    load reads in MEM straight into the ALU inputs (Algorithm 1).
// So a load followed at once by its consumer runs back to back, without the
// bubble of the classic ID-stage interlock.
//
// Control flow is decided in EXE: a taken branch, JAL or JALR redirects fetch
// and empties IF/ID and ID/EX (two lost cycles); fetch otherwise runs
// sequentially. The only stall is the memory's: while the data access in MEM
// is not ready (dmem_ready low, e.g. a cache miss) every pipeline register and
// the PC hold, and the detectors resume on the same state afterwards.
//
// Memory ports: imem_rdata must answer imem_addr in the same cycle;
// dmem_rdata must answer dmem_addr in the cycle dmem_ready is high, writes
// (dmem_we, byte enables dmem_wstrb) take effect at that clock edge. The
// retire_* outputs report each instruction leaving WB, in program order.
// Following the paper: the five stages, where the two detectors sit, the
// Algorithm 1 bypass and the absence of a load-use stall. Own choices: RV32I,
// the memory protocol, branch resolution details, the retire port and the
// event flags.
module ssr_core
  import ssr_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction memory
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // data memory
  output logic        dmem_req,
  output logic        dmem_we,
  output logic [31:0] dmem_addr,
  output logic [3:0]  dmem_wstrb,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  input  logic        dmem_ready,
  // retirement trace
  output logic        retire_valid,
  output logic [31:0] retire_pc,
  output logic        retire_rd_we,
  output logic [4:0]  retire_rd,
  output logic [31:0] retire_wdata,
  // per-cycle events (bypasses taken, stalls, redirects)
  output events_t     events
);

  ifid_t  ifid;
  idex_t  idex;
  exmem_t exmem;
  memwb_t memwb;

  logic        stall;
  logic        redirect;
  logic [31:0] redirect_pc;

  // ------------------------------------------------------------------ IF
  ssr_if_stage #(.RESET_PC(RESET_PC)) u_if (
    .clk, .rst_n, .stall, .redirect, .redirect_pc,
    .imem_addr, .imem_rdata, .ifid
  );

  // ------------------------------------------------------------------ ID
  ctrl_t       id_ctrl;
  logic [31:0] rf_rs1_val, rf_rs2_val;
  logic [31:0] id_rs1_val, id_rs2_val;
  logic [1:0]  id_rs1_src, id_rs2_src;
  logic        id_load_use_deferred;

  logic [31:0] ex_result;
  logic [31:0] mem_result;
  logic [31:0] mem_load_data;

  ssr_decoder u_dec (.instr(ifid.instr), .ctrl(id_ctrl));

  ssr_regfile u_rf (
    .clk, .rst_n,
    .raddr1(id_ctrl.rs1), .raddr2(id_ctrl.rs2),
    .rdata1(rf_rs1_val),  .rdata2(rf_rs2_val),
    .we(memwb.valid && memwb.rd_we), .waddr(memwb.rd), .wdata(memwb.wdata)
  );

  ssr_id_hazard u_id_hz (
    .id_rs1(id_ctrl.rs1), .id_rs2(id_ctrl.rs2),
    .rf_rs1_val, .rf_rs2_val,
    .ex_valid(idex.valid), .ex_rd_we(idex.ctrl.rd_we), .ex_rd(idex.ctrl.rd),
    .ex_is_load(idex.ctrl.is_load), .ex_result,
    .mem_valid(exmem.valid), .mem_rd_we(exmem.rd_we), .mem_rd(exmem.rd),
    .mem_result,
    .wb_valid(memwb.valid), .wb_rd_we(memwb.rd_we), .wb_rd(memwb.rd),
    .wb_result(memwb.wdata),
    .id_rs1_val, .id_rs2_val,
    .rs1_src(id_rs1_src), .rs2_src(id_rs2_src),
    .load_use_deferred(id_load_use_deferred)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idex <= '0;
    end else if (!stall) begin
      idex.valid   <= ifid.valid && !redirect;
      idex.pc      <= ifid.pc;
      idex.ctrl    <= ifid.valid ? id_ctrl : '0;
      idex.rs1_val <= id_rs1_val;
      idex.rs2_val <= id_rs2_val;
    end
  end

  // ------------------------------------------------------------------ EXE
  logic [31:0] ex_rs1_val, ex_rs2_val;
  logic        ex_rs1_ld_byp, ex_rs2_ld_byp, ex_rs1_alu_byp, ex_rs2_alu_byp;
  logic [31:0] alu_a, alu_b, alu_y;
  logic        br_cond;

  ssr_ld_hazard u_ld_hz (
    .idex_rs1(idex.ctrl.rs1), .idex_rs2(idex.ctrl.rs2),
    .idex_rs1_val(idex.rs1_val), .idex_rs2_val(idex.rs2_val),
    .exmem_valid(exmem.valid), .exmem_rd_we(exmem.rd_we), .exmem_rd(exmem.rd),
    .exmem_is_load(exmem.is_load), .exmem_result(exmem.result),
    .mem_load_data,
    .ex_rs1_val, .ex_rs2_val,
    .rs1_ld_bypass(ex_rs1_ld_byp), .rs2_ld_bypass(ex_rs2_ld_byp),
    .rs1_alu_bypass(ex_rs1_alu_byp), .rs2_alu_bypass(ex_rs2_alu_byp)
  );

  always_comb begin
    alu_a = (idex.ctrl.a_src == ASRC_PC) ? idex.pc : ex_rs1_val;
    alu_b = idex.ctrl.b_imm ? idex.ctrl.imm : ex_rs2_val;
  end

  ssr_alu u_alu (
    .op(idex.ctrl.alu_op), .a(alu_a), .b(alu_b), .result(alu_y),
    .br_funct3(idex.ctrl.funct3), .cmp_a(ex_rs1_val), .cmp_b(ex_rs2_val),
    .br_cond
  );

  always_comb begin
    ex_result   = (idex.ctrl.is_jal || idex.ctrl.is_jalr) ? idex.pc + 32'd4 : alu_y;
    redirect    = idex.valid && (idex.ctrl.is_jal || idex.ctrl.is_jalr ||
                                 (idex.ctrl.is_branch && br_cond));
    redirect_pc = idex.ctrl.is_jalr ? {alu_y[31:1], 1'b0} : idex.pc + idex.ctrl.imm;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exmem <= '0;
    end else if (!stall) begin
      exmem.valid      <= idex.valid;
      exmem.pc         <= idex.pc;
      exmem.rd         <= idex.ctrl.rd;
      exmem.rd_we      <= idex.ctrl.rd_we;
      exmem.is_load    <= idex.ctrl.is_load;
      exmem.is_store   <= idex.ctrl.is_store;
      exmem.funct3     <= idex.ctrl.funct3;
      exmem.result     <= ex_result;
      exmem.store_data <= ex_rs2_val;
    end
  end

  // ------------------------------------------------------------------ MEM
  ssr_lsu u_lsu (
    .valid(exmem.valid), .is_load(exmem.is_load), .is_store(exmem.is_store),
    .funct3(exmem.funct3), .addr(exmem.result), .store_data(exmem.store_data),
    .dmem_req, .dmem_we, .dmem_addr, .dmem_wstrb, .dmem_wdata,
    .dmem_rdata, .dmem_ready,
    .load_data(mem_load_data), .stall
  );

  assign mem_result = exmem.is_load ? mem_load_data : exmem.result;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      memwb <= '0;
    end else if (!stall) begin
      memwb.valid <= exmem.valid;
      memwb.pc    <= exmem.pc;
      memwb.rd    <= exmem.rd;
      memwb.rd_we <= exmem.rd_we;
      memwb.wdata <= mem_result;
    end
  end

  // ------------------------------------------------------------------ WB
  // Each instruction is reported once, in the cycle its MEM/WB entry is
  // first valid (the entry repeats while the pipeline is held).
  logic wb_fresh;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_fresh <= 1'b0;
    else        wb_fresh <= !stall;
  end

  assign retire_valid = memwb.valid && wb_fresh;
  assign retire_pc    = memwb.pc;
  assign retire_rd_we = memwb.rd_we;
  assign retire_rd    = memwb.rd;
  assign retire_wdata = memwb.wdata;

  always_comb begin
    events               = '0;
    events.load_use      = !stall && ifid.valid && !redirect && id_load_use_deferred;
    events.ld_bypass     = !stall && idex.valid && (ex_rs1_ld_byp || ex_rs2_ld_byp);
    events.exmem_bypass  = !stall && idex.valid && (ex_rs1_alu_byp || ex_rs2_alu_byp);
    events.id_bypass_ex  = !stall && ifid.valid && (id_rs1_src == 2'd1 || id_rs2_src == 2'd1);
    events.id_bypass_mem = !stall && ifid.valid && (id_rs1_src == 2'd2 || id_rs2_src == 2'd2);
    events.id_bypass_wb  = !stall && ifid.valid && (id_rs1_src == 2'd3 || id_rs2_src == 2'd3);
    events.mem_stall     = stall;
    events.redirect      = !stall && redirect;
  end

  // A redirect can only come from a real instruction, and the ID stage never
  // asks EXE to wait: nothing but the memory stalls this pipeline.
  a_redirect_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                     redirect |-> idex.valid);
  a_store_ports: assert property (@(posedge clk) disable iff (!rst_n)
                                  dmem_we |-> dmem_req && dmem_wstrb != 4'b0);

endmodule
