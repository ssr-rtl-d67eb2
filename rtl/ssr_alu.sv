// ssr_alu: integer ALU and branch comparator of the EXE stage.
//
// result = a <op> b for the RV32I operations of alu_op_e. Independently,
// br_cond evaluates the RV32I branch condition selected by funct3
// (BEQ/BNE/BLT/BGE/BLTU/BGEU) on the two register operands. The branch
// condition is used in EXE, where the paper places the decision of a branch
// (its beqz example cannot "judge the jump" before its operand arrives in
// EXE). Everything else here (the operation set and the encoding) is the
// design's own RV32I choice. Purely combinational.
module ssr_alu
  import ssr_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] result,
  input  logic [2:0]  br_funct3,
  input  logic [31:0] cmp_a,
  input  logic [31:0] cmp_b,
  output logic        br_cond
);

  always_comb begin
    unique case (op)
      ALU_ADD:   result = a + b;
      ALU_SUB:   result = a - b;
      ALU_SLL:   result = a << b[4:0];
      ALU_SLT:   result = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:  result = {31'b0, a < b};
      ALU_XOR:   result = a ^ b;
      ALU_SRL:   result = a >> b[4:0];
      ALU_SRA:   result = 32'($signed(a) >>> b[4:0]);
      ALU_OR:    result = a | b;
      ALU_AND:   result = a & b;
      ALU_PASSB: result = b;
      default:   result = a + b;
    endcase
  end

  always_comb begin
    unique case (br_funct3)
      3'b000:  br_cond = (cmp_a == cmp_b);
      3'b001:  br_cond = (cmp_a != cmp_b);
      3'b100:  br_cond = ($signed(cmp_a) <  $signed(cmp_b));
      3'b101:  br_cond = ($signed(cmp_a) >= $signed(cmp_b));
      3'b110:  br_cond = (cmp_a <  cmp_b);
      3'b111:  br_cond = (cmp_a >= cmp_b);
      default: br_cond = 1'b0;
    endcase
  end

endmodule
