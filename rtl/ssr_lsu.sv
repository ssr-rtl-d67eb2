// ssr_lsu: MEM-stage load/store unit.
//
// Drives the data memory port from the EX/MEM register: a word-aligned
// address, byte enables and the store data shifted into its byte lanes; and
// turns the 32-bit word the memory returns into the load result (LB, LH, LW,
// LBU, LHU: byte/halfword selected by the low address bits, then sign- or
// zero-extended). The memory answers in the same cycle (dmem_rdata is
// combinational on dmem_addr); dmem_ready low means it needs more time (a
// cache miss) and the whole pipeline is held, which the paper mentions as a
// "cache miss stall" in MEM. load_data is what the SSR ld hazard detector
// forwards to EXE. Misaligned accesses are not trapped: they use the aligned
// word and the lanes given by the low address bits. The memory protocol and
// the alignment handling are this design's own choices.
module ssr_lsu
  import ssr_pkg::*;
(
  input  logic        valid,        // EX/MEM holds a real instruction
  input  logic        is_load,
  input  logic        is_store,
  input  logic [2:0]  funct3,
  input  logic [31:0] addr,
  input  logic [31:0] store_data,
  output logic        dmem_req,
  output logic        dmem_we,
  output logic [31:0] dmem_addr,
  output logic [3:0]  dmem_wstrb,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  input  logic        dmem_ready,
  output logic [31:0] load_data,
  output logic        stall         // access not finished this cycle
);

  logic [1:0]  off;
  logic [15:0] shifted;   // addressed byte/halfword moved to bit 0

  always_comb begin
    off        = addr[1:0];
    dmem_req   = valid && (is_load || is_store);
    dmem_we    = valid && is_store;
    dmem_addr  = {addr[31:2], 2'b00};
    dmem_wdata = store_data << {off, 3'b000};
    unique case (funct3[1:0])
      2'b00:   dmem_wstrb = 4'b0001 << off;
      2'b01:   dmem_wstrb = 4'b0011 << off;
      default: dmem_wstrb = 4'b1111;
    endcase
    if (!dmem_we) dmem_wstrb = 4'b0000;

    shifted = 16'(dmem_rdata >> {off, 3'b000});
    unique case (funct3)
      3'b000:  load_data = {{24{shifted[7]}},  shifted[7:0]};
      3'b001:  load_data = {{16{shifted[15]}}, shifted[15:0]};
      3'b100:  load_data = {24'b0, shifted[7:0]};
      3'b101:  load_data = {16'b0, shifted[15:0]};
      default: load_data = dmem_rdata;
    endcase
    stall = dmem_req && !dmem_ready;
  end

endmodule
