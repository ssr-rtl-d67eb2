// ssr_if_stage: instruction fetch stage and the IF/ID pipeline register.
//
// Holds the program counter, presents it to the instruction memory
// (imem_addr, answered combinationally on imem_rdata in the same cycle) and
// latches {pc, instruction} into IF/ID. Each cycle the PC steps by 4, unless
// the pipeline is held (stall: PC and IF/ID keep their values) or EXE
// redirects it to a taken branch or jump target (redirect: the PC loads
// redirect_pc and IF/ID is emptied, since the instruction fetched this cycle
// is on the wrong path). A stall takes precedence: the redirect is simply
// seen again once the pipeline moves. Reset loads RESET_PC and empties IF/ID.
// The paper names the IF stage only; the fetch protocol, the reset address and
// the sequential "predict not taken" fetch are this design's own choices.
module ssr_if_stage
  import ssr_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        redirect,
  input  logic [31:0] redirect_pc,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  output ifid_t       ifid
);

  logic [31:0] pc;

  assign imem_addr = pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc   <= RESET_PC;
      ifid <= '0;
    end else if (!stall) begin
      if (redirect) begin
        pc         <= redirect_pc;
        ifid.valid <= 1'b0;
        ifid.pc    <= pc;
        ifid.instr <= NOP_INSTR;
      end else begin
        pc         <= pc + 32'd4;
        ifid.valid <= 1'b1;
        ifid.pc    <= pc;
        ifid.instr <= imem_rdata;
      end
    end
  end

endmodule
