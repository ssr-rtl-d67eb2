// ssr_decoder_tb: encodes random instructions of every RV32I format with the
// test encoders and checks the decoded fields: register numbers (zeroed
// when unused), write enable (never for x0), immediate, ALU operation and the
// load/store/branch/jump flags. Unknown opcodes must come out as an illegal
// nop that writes nothing.
module ssr_decoder_tb;
  import ssr_pkg::*;
  import rv32_tb_pkg::*;

  logic [31:0] instr;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  ssr_decoder dut (.*);

  task automatic expect_ctrl(input string what, input ctrl_t e);
    #1;
    checks++;
    if (ctrl !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s instr %h:\n got %p\n exp %p", what, instr, ctrl, e);
    end
  endtask

  initial begin
    repeat (2000) begin
      logic [4:0]  rd, rs1, rs2;
      logic [11:0] i12;
      logic [2:0]  f3;
      ctrl_t e;
      rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
      i12 = 12'($urandom); f3 = 3'($urandom);

      // ADD / SUB / others (R-type)
      begin
        logic sub;
        sub = 1'($urandom);
        instr = enc_r(sub ? 7'h20 : 7'h00, rs2, rs1, f3, rd, OP_REG);
        e = '0; e.rs1 = rs1; e.rs2 = rs2; e.use_rs1 = 1; e.use_rs2 = 1; e.funct3 = f3;
        e.rd_we = (rd != 0); e.rd = (rd != 0) ? rd : 5'd0; e.a_src = ASRC_RS1;
        case (f3)
          3'd0: e.alu_op = sub ? ALU_SUB : ALU_ADD;
          3'd1: e.alu_op = ALU_SLL;  3'd2: e.alu_op = ALU_SLT;  3'd3: e.alu_op = ALU_SLTU;
          3'd4: e.alu_op = ALU_XOR;  3'd5: e.alu_op = sub ? ALU_SRA : ALU_SRL;
          3'd6: e.alu_op = ALU_OR;   default: e.alu_op = ALU_AND;
        endcase
        expect_ctrl("R-type", e);
      end
      // load
      instr = enc_i(i12, rs1, f3, rd, OP_LOAD);
      e = '0; e.rs1 = rs1; e.use_rs1 = 1; e.funct3 = f3; e.is_load = 1; e.b_imm = 1;
      e.imm = {{20{i12[11]}}, i12}; e.rd_we = (rd != 0); e.rd = (rd != 0) ? rd : 5'd0;
      e.alu_op = ALU_ADD;
      expect_ctrl("load", e);
      // store
      instr = enc_s(i12, rs2, rs1, f3);
      e = '0; e.rs1 = rs1; e.rs2 = rs2; e.use_rs1 = 1; e.use_rs2 = 1; e.funct3 = f3;
      e.is_store = 1; e.b_imm = 1; e.imm = {{20{i12[11]}}, i12}; e.alu_op = ALU_ADD;
      expect_ctrl("store", e);
      // branch
      begin
        logic [12:0] off;
        off = {i12, 1'b0};
        instr = enc_b(off, rs2, rs1, f3);
        e = '0; e.rs1 = rs1; e.rs2 = rs2; e.use_rs1 = 1; e.use_rs2 = 1; e.funct3 = f3;
        e.is_branch = 1; e.imm = {{19{off[12]}}, off}; e.alu_op = ALU_ADD;
        expect_ctrl("branch", e);
      end
      // jal
      begin
        logic [20:0] off;
        off = {20'($urandom), 1'b0};
        instr = enc_j(off, rd);
        e = '0; e.is_jal = 1; e.imm = {{11{off[20]}}, off}; e.alu_op = ALU_ADD;
        e.funct3 = instr[14:12]; e.rd_we = (rd != 0); e.rd = (rd != 0) ? rd : 5'd0;
        expect_ctrl("jal", e);
      end
      // lui / auipc
      begin
        logic [19:0] u;
        u = 20'($urandom);
        instr = enc_u(u, rd, OP_LUI);
        e = '0; e.alu_op = ALU_PASSB; e.b_imm = 1; e.imm = {u, 12'b0}; e.funct3 = instr[14:12];
        e.rd_we = (rd != 0); e.rd = (rd != 0) ? rd : 5'd0;
        expect_ctrl("lui", e);
        instr = enc_u(u, rd, OP_AUIPC);
        e.alu_op = ALU_ADD; e.a_src = ASRC_PC;
        expect_ctrl("auipc", e);
      end
      // unknown opcode (SYSTEM)
      instr = {i12, rs1, f3, rd, 7'b1110011};
      e = '0; e.illegal = 1; e.funct3 = f3; e.alu_op = ALU_ADD;
      expect_ctrl("system", e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
