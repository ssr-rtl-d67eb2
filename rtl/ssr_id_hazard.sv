// ssr_id_hazard: the hazard detector of the ID stage.
//
// For each source register of the instruction in ID it picks the newest value
// among the instructions further down the pipe and the register file, and the
// chosen value is latched into ID/EX (Fig. 2 of the SSR scheme: the result of
// EXE is bypassed to ID as soon as EXE has computed it). Priority, youngest
// first: EXE, then MEM, then WB, then the register file. x0 is never bypassed.
//
// A load in EXE has no data yet. In the classic scheme this is where a
// load-use stall would be raised; with SSR there is none: the EXE source is
// skipped for a load (ex_is_load), the register file or an older value is
// latched, and the ld hazard detector in EXE corrects the operand one cycle
// later. The unit reports that case (load_use_deferred) for visibility only.
// A load in MEM does have data (mem_result is already the loaded value), so
// it is bypassed here like any other result.
// Following the paper: detector in ID, sources EXE/MEM/WB, no load-use stall.
// Own choice: the priority encoding and the ID-side bypass of loads in MEM.
// Combinational.
module ssr_id_hazard
  import ssr_pkg::*;
(
  input  logic [4:0]  id_rs1,
  input  logic [4:0]  id_rs2,
  input  logic [31:0] rf_rs1_val,
  input  logic [31:0] rf_rs2_val,
  // instruction in EXE
  input  logic        ex_valid,
  input  logic        ex_rd_we,
  input  logic [4:0]  ex_rd,
  input  logic        ex_is_load,
  input  logic [31:0] ex_result,
  // instruction in MEM
  input  logic        mem_valid,
  input  logic        mem_rd_we,
  input  logic [4:0]  mem_rd,
  input  logic [31:0] mem_result,   // load data for a load, else ALU result
  // instruction in WB
  input  logic        wb_valid,
  input  logic        wb_rd_we,
  input  logic [4:0]  wb_rd,
  input  logic [31:0] wb_result,
  output logic [31:0] id_rs1_val,
  output logic [31:0] id_rs2_val,
  output logic [1:0]  rs1_src,      // 0 regfile, 1 EXE, 2 MEM, 3 WB
  output logic [1:0]  rs2_src,
  output logic        load_use_deferred
);

  function automatic logic [1:0] pick(input logic [4:0] rs);
    if (rs == 5'd0)                                            return 2'd0;
    if (ex_valid  && ex_rd_we  && !ex_is_load && ex_rd  == rs) return 2'd1;
    if (mem_valid && mem_rd_we && mem_rd == rs)                return 2'd2;
    if (wb_valid  && wb_rd_we  && wb_rd  == rs)                return 2'd3;
    return 2'd0;
  endfunction

  always_comb begin
    rs1_src = pick(id_rs1);
    rs2_src = pick(id_rs2);
    unique case (rs1_src)
      2'd1:    id_rs1_val = ex_result;
      2'd2:    id_rs1_val = mem_result;
      2'd3:    id_rs1_val = wb_result;
      default: id_rs1_val = rf_rs1_val;
    endcase
    unique case (rs2_src)
      2'd1:    id_rs2_val = ex_result;
      2'd2:    id_rs2_val = mem_result;
      2'd3:    id_rs2_val = wb_result;
      default: id_rs2_val = rf_rs2_val;
    endcase
    load_use_deferred = ex_valid && ex_rd_we && ex_is_load && ex_rd != 5'd0 &&
                        (ex_rd == id_rs1 || ex_rd == id_rs2);
  end

endmodule
