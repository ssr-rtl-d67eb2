// ssr_decoder: RV32I instruction decoder of the ID stage.
//
// Turns a 32-bit instruction into the ctrl_t bundle that travels down the
// pipeline: source and destination register numbers (with flags saying
// whether each is really used), the sign-extended immediate, the ALU
// operation and operand selection, and load/store/branch/jump flags. rd_we is
// cleared when rd is x0 so that no hazard detector ever matches on x0.
// Supported: LUI, AUIPC, JAL, JALR, branches, loads, stores, OP-IMM and OP.
// Any other opcode (FENCE, SYSTEM, ...) is flagged illegal and decoded as a
// nop. The paper names only the ID stage; the ISA subset and this encoding are
// this design's own. Purely combinational.
module ssr_decoder
  import ssr_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);

  logic [6:0] opcode;
  logic [2:0] f3;
  logic       f7_5;      // instr[30]: SUB / SRA select
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opcode = instr[6:0];
    f3     = instr[14:12];
    f7_5   = instr[30];
    imm_i  = {{20{instr[31]}}, instr[31:20]};
    imm_s  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b  = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u  = {instr[31:12], 12'b0};
    imm_j  = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl           = '0;
    ctrl.rs1       = instr[19:15];
    ctrl.rs2       = instr[24:20];
    ctrl.rd        = instr[11:7];
    ctrl.funct3    = f3;
    ctrl.alu_op    = ALU_ADD;
    ctrl.a_src     = ASRC_RS1;

    unique case (opcode)
      OP_LUI: begin
        ctrl.rd_we = 1'b1; ctrl.alu_op = ALU_PASSB; ctrl.b_imm = 1'b1; ctrl.imm = imm_u;
      end
      OP_AUIPC: begin
        ctrl.rd_we = 1'b1; ctrl.a_src = ASRC_PC; ctrl.b_imm = 1'b1; ctrl.imm = imm_u;
      end
      OP_JAL: begin
        ctrl.rd_we = 1'b1; ctrl.is_jal = 1'b1; ctrl.imm = imm_j;
      end
      OP_JALR: begin
        ctrl.rd_we = 1'b1; ctrl.is_jalr = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.imm = imm_i;
        ctrl.b_imm = 1'b1;
      end
      OP_BRANCH: begin
        ctrl.is_branch = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.imm = imm_b;
      end
      OP_LOAD: begin
        ctrl.rd_we = 1'b1; ctrl.is_load = 1'b1; ctrl.use_rs1 = 1'b1;
        ctrl.b_imm = 1'b1; ctrl.imm = imm_i;
      end
      OP_STORE: begin
        ctrl.is_store = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.b_imm = 1'b1; ctrl.imm = imm_s;
      end
      OP_IMM: begin
        ctrl.rd_we = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.b_imm = 1'b1; ctrl.imm = imm_i;
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b101: ctrl.alu_op = f7_5 ? ALU_SRA : ALU_SRL;
          default: ctrl.alu_op = ALU_ADD;
        endcase
      end
      OP_REG: begin
        ctrl.rd_we = 1'b1; ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        unique case (f3)
          3'b000: ctrl.alu_op = f7_5 ? ALU_SUB : ALU_ADD;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b101: ctrl.alu_op = f7_5 ? ALU_SRA : ALU_SRL;
          3'b110: ctrl.alu_op = ALU_OR;
          3'b111: ctrl.alu_op = ALU_AND;
          default: ctrl.alu_op = ALU_ADD;
        endcase
      end
      default: begin
        ctrl.illegal = 1'b1;
      end
    endcase

    // Registers an instruction does not read or write are cleared, so that
    // the hazard detectors never match on them.
    if (!ctrl.use_rs1) ctrl.rs1 = 5'd0;
    if (!ctrl.use_rs2) ctrl.rs2 = 5'd0;
    if (ctrl.rd == 5'd0) ctrl.rd_we = 1'b0;
    if (!ctrl.rd_we) ctrl.rd = 5'd0;
  end

endmodule
