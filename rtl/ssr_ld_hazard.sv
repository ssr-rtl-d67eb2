// ssr_ld_hazard: the "ld hazard detector" that SSR adds to the EXE stage.
//
// In a pipeline whose only hazard detector sits in ID, a load followed at once
// by an instruction that reads the loaded register must stall one cycle: when
// the consumer is in ID the load is still in EXE and its data does not exist.
// SSR removes that stall. The consumer is let into EXE with a stale operand,
// and this unit, looking at the ID/EX and EX/MEM pipeline registers, replaces
// the operand with the data the load is reading in MEM during the same cycle.
//
// Per source operand (rs1 and rs2 alike), as in the paper's Algorithm 1:
//   rs != 0 && EX/MEM writes rd && rs == rd && EX/MEM is a load -> load data from MEM
//   rs != 0 && EX/MEM writes rd && rs == rd && not a load        -> EX/MEM result
//   otherwise                                                    -> the ID/EX operand
// The second case only repeats a value the ID detector already forwarded; it is
// kept because the algorithm lists it. Purely combinational; the load data path
// (memory read -> this mux -> ALU) is the timing cost of the scheme.
// Following the paper: the comparison terms and the two bypass sources. Own
// choice: the EX/MEM valid bit is part of "RdWrtEn", and both operands use one
// instance of the logic each (the paper reports two Mux units).
module ssr_ld_hazard
  import ssr_pkg::*;
(
  input  logic [4:0]  idex_rs1,
  input  logic [4:0]  idex_rs2,
  input  logic [31:0] idex_rs1_val,
  input  logic [31:0] idex_rs2_val,
  input  logic        exmem_valid,
  input  logic        exmem_rd_we,
  input  logic [4:0]  exmem_rd,
  input  logic        exmem_is_load,
  input  logic [31:0] exmem_result,     // ALU result held in EX/MEM
  input  logic [31:0] mem_load_data,    // data the load in MEM returns this cycle
  output logic [31:0] ex_rs1_val,
  output logic [31:0] ex_rs2_val,
  output logic        rs1_ld_bypass,    // rs1 taken from the load in MEM
  output logic        rs2_ld_bypass,
  output logic        rs1_alu_bypass,   // rs1 taken from the EX/MEM result
  output logic        rs2_alu_bypass
);

  logic rd_wrt_en;
  logic rs1_match, rs2_match;

  always_comb begin
    rd_wrt_en = exmem_valid && exmem_rd_we;
    rs1_match = (idex_rs1 != 5'd0) && rd_wrt_en && (idex_rs1 == exmem_rd);
    rs2_match = (idex_rs2 != 5'd0) && rd_wrt_en && (idex_rs2 == exmem_rd);

    rs1_ld_bypass  = rs1_match &&  exmem_is_load;
    rs1_alu_bypass = rs1_match && !exmem_is_load;
    rs2_ld_bypass  = rs2_match &&  exmem_is_load;
    rs2_alu_bypass = rs2_match && !exmem_is_load;

    if (rs1_ld_bypass)       ex_rs1_val = mem_load_data;
    else if (rs1_alu_bypass) ex_rs1_val = exmem_result;
    else                     ex_rs1_val = idex_rs1_val;

    if (rs2_ld_bypass)       ex_rs2_val = mem_load_data;
    else if (rs2_alu_bypass) ex_rs2_val = exmem_result;
    else                     ex_rs2_val = idex_rs2_val;
  end

endmodule
