// ssr_pkg: types and constants shared by the five-stage RV32I pipeline with the
// SSR (stall-scheme-reducing) load-use bypass.
//
// Holds the RV32I opcode constants, the ALU operation encoding, the decoded
// control bundle that travels down the pipeline, and the pipeline register
// payloads for IF/ID, ID/EX, EX/MEM and MEM/WB. The ISA (RV32I), the encodings
// of the control fields and the layout of the pipeline registers are this
// design's own choices; the paper fixes only the five stages and where the two
// hazard detectors sit.
package ssr_pkg;

  localparam int unsigned XLEN = 32;
  localparam int unsigned NREG = 32;

  // RV32I major opcodes (instr[6:0])
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;

  localparam logic [31:0] NOP_INSTR = 32'h0000_0013;  // addi x0, x0, 0

  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,
    ALU_SUB  = 4'd1,
    ALU_SLL  = 4'd2,
    ALU_SLT  = 4'd3,
    ALU_SLTU = 4'd4,
    ALU_XOR  = 4'd5,
    ALU_SRL  = 4'd6,
    ALU_SRA  = 4'd7,
    ALU_OR   = 4'd8,
    ALU_AND  = 4'd9,
    ALU_PASSB = 4'd10   // result = operand b (LUI)
  } alu_op_e;

  // Where the ALU's operand a comes from
  typedef enum logic {
    ASRC_RS1 = 1'b0,
    ASRC_PC  = 1'b1
  } asrc_e;

  // Decoded control bundle produced in ID
  typedef struct packed {
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        use_rs1;
    logic        use_rs2;
    logic        rd_we;      // writes rd (rd != 0)
    logic        is_load;
    logic        is_store;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic [2:0]  funct3;     // load/store size, branch condition
    alu_op_e     alu_op;
    asrc_e       a_src;
    logic        b_imm;      // operand b is the immediate
    logic [31:0] imm;
    logic        illegal;    // unknown opcode: executed as a nop
  } ctrl_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    ctrl_t       ctrl;
    logic [31:0] rs1_val;    // operand captured in ID (after ID bypass)
    logic [31:0] rs2_val;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        rd_we;
    logic        is_load;
    logic        is_store;
    logic [2:0]  funct3;
    logic [31:0] result;     // ALU result / link address / memory address
    logic [31:0] store_data;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        rd_we;
    logic [31:0] wdata;
  } memwb_t;

  // One-cycle event flags of the pipeline, for performance counting
  typedef struct packed {
    logic load_use;      // load in EXE, its consumer in ID: no stall taken
    logic ld_bypass;     // EXE operand taken from the load data in MEM (SSR)
    logic exmem_bypass;  // EXE operand taken from the EX/MEM result
    logic id_bypass_ex;  // ID operand taken from EXE
    logic id_bypass_mem; // ID operand taken from MEM
    logic id_bypass_wb;  // ID operand taken from WB
    logic mem_stall;     // pipeline held by the data memory
    logic redirect;      // taken branch or jump resolved in EXE
  } events_t;

endpackage
