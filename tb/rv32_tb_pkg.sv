// rv32_tb_pkg: test-only helpers for the RV32I pipeline testbenches.
//
// Instruction encoders for the RV32I formats, and rv32_iss, a plain
// instruction-at-a-time reference model of the same RV32I subset the core
// implements. The reference model knows nothing of pipelines or bypasses: the
// testbenches compare every retired instruction of the core with it.
package rv32_tb_pkg;

  function automatic logic [31:0] enc_r(input logic [6:0] f7, input logic [4:0] rs2,
      input logic [4:0] rs1, input logic [2:0] f3, input logic [4:0] rd, input logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction

  function automatic logic [31:0] enc_i(input logic [11:0] imm, input logic [4:0] rs1,
      input logic [2:0] f3, input logic [4:0] rd, input logic [6:0] op);
    return {imm, rs1, f3, rd, op};
  endfunction

  function automatic logic [31:0] enc_s(input logic [11:0] imm, input logic [4:0] rs2,
      input logic [4:0] rs1, input logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction

  function automatic logic [31:0] enc_b(input logic [12:0] off, input logic [4:0] rs2,
      input logic [4:0] rs1, input logic [2:0] f3);
    return {off[12], off[10:5], rs2, rs1, f3, off[4:1], off[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] enc_u(input logic [19:0] imm, input logic [4:0] rd,
      input logic [6:0] op);
    return {imm, rd, op};
  endfunction

  function automatic logic [31:0] enc_j(input logic [20:0] off, input logic [4:0] rd);
    return {off[20], off[10:1], off[11], off[19:12], rd, 7'b1101111};
  endfunction

  // Common instructions
  function automatic logic [31:0] addi(input logic [4:0] rd, input logic [4:0] rs1,
      input logic [11:0] imm);
    return enc_i(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] add(input logic [4:0] rd, input logic [4:0] rs1,
      input logic [4:0] rs2);
    return enc_r(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] lw(input logic [4:0] rd, input logic [4:0] rs1,
      input logic [11:0] imm);
    return enc_i(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input logic [4:0] rs2, input logic [4:0] rs1,
      input logic [11:0] imm);
    return enc_s(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] lui(input logic [4:0] rd, input logic [19:0] imm);
    return enc_u(imm, rd, 7'b0110111);
  endfunction

  // Reference model: executes one instruction per call.
  class rv32_iss;
    logic [31:0] x [32];
    logic [31:0] pc;
    logic [31:0] imem [int];   // word index -> instruction
    logic [31:0] dmem [int];   // word index -> data

    function new(input logic [31:0] reset_pc);
      foreach (x[i]) x[i] = '0;
      pc = reset_pc;
    endfunction

    function automatic logic [31:0] rd_word(input logic [31:0] a);
      int idx = int'(a >> 2);
      return dmem.exists(idx) ? dmem[idx] : 32'h0;
    endfunction

    // Executes the instruction at pc. Returns its write-back (if any), the
    // pc it ran at, and whether control flow left the sequential path.
    function automatic void step(output logic [31:0] ipc, output logic rd_we,
        output logic [4:0] rd, output logic [31:0] wdata, output logic taken,
        output logic is_load);
      logic [31:0] in, a, b, imm_i, imm_s, imm_b, imm_j, imm_u, npc, addr, w;
      logic [2:0]  f3;
      logic [1:0]  off;
      int widx;
      in = imem.exists(int'(pc >> 2)) ? imem[int'(pc >> 2)] : 32'h13;
      ipc = pc;
      rd = in[11:7]; f3 = in[14:12];
      a = x[in[19:15]]; b = x[in[24:20]];
      imm_i = {{20{in[31]}}, in[31:20]};
      imm_s = {{20{in[31]}}, in[31:25], in[11:7]};
      imm_b = {{19{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
      imm_u = {in[31:12], 12'b0};
      imm_j = {{11{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
      npc = pc + 4; rd_we = 0; wdata = 0; taken = 0; is_load = 0;
      case (in[6:0])
        7'b0110111: begin rd_we = 1; wdata = imm_u; end
        7'b0010111: begin rd_we = 1; wdata = pc + imm_u; end
        7'b1101111: begin rd_we = 1; wdata = pc + 4; npc = pc + imm_j; taken = 1; end
        7'b1100111: begin rd_we = 1; wdata = pc + 4; npc = (a + imm_i) & ~32'h1; taken = 1; end
        7'b1100011: begin
          case (f3)
            3'b000: taken = (a == b);
            3'b001: taken = (a != b);
            3'b100: taken = ($signed(a) <  $signed(b));
            3'b101: taken = ($signed(a) >= $signed(b));
            3'b110: taken = (a <  b);
            3'b111: taken = (a >= b);
            default: taken = 0;
          endcase
          if (taken) npc = pc + imm_b;
        end
        7'b0000011: begin
          addr = a + imm_i; off = addr[1:0]; w = rd_word(addr) >> (8 * off);
          rd_we = 1; is_load = 1;
          case (f3)
            3'b000: wdata = {{24{w[7]}}, w[7:0]};
            3'b001: wdata = {{16{w[15]}}, w[15:0]};
            3'b100: wdata = {24'b0, w[7:0]};
            3'b101: wdata = {16'b0, w[15:0]};
            default: wdata = rd_word(addr);
          endcase
        end
        7'b0100011: begin
          addr = a + imm_s; off = addr[1:0]; widx = int'(addr >> 2); w = rd_word(addr);
          case (f3)
            3'b000: begin w[8*off +: 8] = b[7:0]; end
            3'b001: begin w[8*off +: 16] = b[15:0]; end
            default: w = b;
          endcase
          dmem[widx] = w;
        end
        7'b0010011, 7'b0110011: begin
          logic [31:0] bb;
          logic alt;
          bb = (in[6:0] == 7'b0010011) ? imm_i : b;
          alt = in[30] && (in[6:0] == 7'b0110011 || f3 == 3'b101);
          rd_we = 1;
          case (f3)
            3'b000: wdata = alt ? a - bb : a + bb;
            3'b001: wdata = a << bb[4:0];
            3'b010: wdata = {31'b0, $signed(a) < $signed(bb)};
            3'b011: wdata = {31'b0, a < bb};
            3'b100: wdata = a ^ bb;
            3'b101: wdata = alt ? 32'($signed(a) >>> bb[4:0]) : a >> bb[4:0];
            3'b110: wdata = a | bb;
            default: wdata = a & bb;
          endcase
        end
        default: ;
      endcase
      if (rd == 0) rd_we = 0;
      if (!rd_we) begin rd = 0; wdata = 0; end
      if (rd_we) x[rd] = wdata;
      pc = npc;
    endfunction
  endclass

endpackage
