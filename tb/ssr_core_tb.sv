// ssr_core_tb: end-to-end test of the SSR five-stage pipeline.
//
// Generates a random RV32I program rich in load-use pairs (load followed at
// once by an ALU op, a branch, a store of the loaded value or a second load
// using it as an address offset source), forward branches, JAL and
// AUIPC+JALR pairs, and runs it on ssr_core with a data memory that stalls at
// random like a cache missing. Every retired instruction is compared with the
// rv32_iss reference model (pc, destination, value) and the final data
// memories are compared.
//
// Timing check: with SSR nothing but the memory and taken control transfers
// costs cycles, so instruction k (counting from 0) must retire in cycle
//   k + PIPE_FILL + 2 * (taken transfers before it) + (memory stall cycles before it).
// A single load-use bubble would break this equation.
// The test also counts how often each mechanism occurred and fails if one
// never did.
module ssr_core_tb;
  import ssr_pkg::*;
  import rv32_tb_pkg::*;

  localparam int NBODY     = 600;
  localparam int DBASE     = 32'h2000;   // data region, 256 words
  localparam int DWORDS    = 256;
  localparam int PIPE_FILL = 4;          // cycles from reset to first retire
  localparam int MAXCYC    = 20000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] imem_addr, imem_rdata;
  logic        dmem_req, dmem_we, dmem_ready;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0]  dmem_wstrb;
  logic        retire_valid, retire_rd_we;
  logic [31:0] retire_pc, retire_wdata;
  logic [4:0]  retire_rd;
  events_t     events;

  ssr_core dut (.*);

  // ---------------------------------------------------------------- memories
  logic [31:0] imem [1024];
  logic [31:0] dmem [DWORDS];
  int          wait_cnt;
  int          stall_cycles;

  assign imem_rdata = imem[imem_addr[11:2]];
  assign dmem_rdata = dmem[(dmem_addr - DBASE) >> 2];
  assign dmem_ready = (wait_cnt == 0);

  function automatic int new_wait();
    return ($urandom_range(0, 3) == 0) ? int'($urandom_range(1, 3)) : 0;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wait_cnt <= 0;
    end else if (dmem_req) begin
      if (wait_cnt != 0) begin
        wait_cnt <= wait_cnt - 1;
      end else begin
        if (dmem_we) begin
          for (int b = 0; b < 4; b++)
            if (dmem_wstrb[b]) dmem[(dmem_addr - DBASE) >> 2][8*b +: 8] <= dmem_wdata[8*b +: 8];
        end
        wait_cnt <= new_wait();
      end
    end
  end

  // ---------------------------------------------------------------- program
  rv32_iss iss;
  int      nprog;
  logic [31:0] end_pc;

  function automatic logic [4:0] rreg();   // working registers x1..x8, sometimes x0
    return ($urandom_range(0, 15) == 0) ? 5'd0 : 5'($urandom_range(1, 8));
  endfunction

  function automatic logic [31:0] rand_alu(input logic [4:0] rd, input logic [4:0] rs1,
                                           input logic [4:0] rs2);
    logic [2:0] f3 = 3'($urandom_range(0, 7));
    if ($urandom_range(0, 1) == 0) begin
      logic [6:0] f7 = ((f3 == 3'b000 || f3 == 3'b101) && $urandom_range(0, 1) != 0) ? 7'h20 : 7'h00;
      return enc_r(f7, rs2, rs1, f3, rd, 7'b0110011);
    end else begin
      logic [11:0] imm = 12'($urandom);
      if (f3 == 3'b001) imm = {7'h00, imm[4:0]};
      if (f3 == 3'b101) imm = {($urandom_range(0, 1) != 0) ? 7'h20 : 7'h00, imm[4:0]};
      return enc_i(imm, rs1, f3, rd, 7'b0010011);
    end
  endfunction

  function automatic logic [31:0] rand_load(input logic [4:0] rd);
    logic [2:0] f3;
    logic [11:0] off;
    case ($urandom_range(0, 4))
      0: f3 = 3'b000; 1: f3 = 3'b001; 2: f3 = 3'b100; 3: f3 = 3'b101; default: f3 = 3'b010;
    endcase
    off = 12'($urandom_range(0, DWORDS * 4 - 4));
    if (f3[1:0] == 2'b01) off[0] = 1'b0;
    if (f3[1:0] == 2'b10) off[1:0] = 2'b00;
    return enc_i(off, 5'd31, f3, rd, 7'b0000011);
  endfunction

  function automatic logic [31:0] rand_store(input logic [4:0] rs2);
    logic [2:0] f3 = 3'($urandom_range(0, 2));
    logic [11:0] off = 12'($urandom_range(0, DWORDS * 4 - 4));
    if (f3 == 3'b001) off[0] = 1'b0;
    if (f3 == 3'b010) off[1:0] = 2'b00;
    return enc_s(off, rs2, 5'd31, f3);
  endfunction

  task automatic put(input logic [31:0] ins);
    imem[nprog] = ins;
    iss.imem[nprog] = ins;
    nprog++;
  endtask

  task automatic build_program();
    int k;
    nprog = 0;
    put(lui(5'd31, 20'(DBASE >> 12)));
    for (int r = 1; r <= 8; r++) put(addi(5'(r), 5'd0, 12'($urandom)));
    k = 0;
    while (k < NBODY) begin
      logic [4:0] rd, rs1, rs2;
      int kind = $urandom_range(0, 99);
      rd = rreg(); rs1 = rreg(); rs2 = rreg();
      if (kind < 25) begin                       // load-use pair
        logic [4:0] ld = 5'($urandom_range(1, 8));
        put(rand_load(ld));
        case ($urandom_range(0, 4))
          0: put(rand_alu(rd, ld, rs2));
          1: put(rand_alu(rd, rs1, ld));
          2: put(enc_b(13'd8, ld, rs1, 3'($urandom_range(0, 1))));   // beq/bne skip 1
          3: put(rand_store(ld));
          default: put(add(rd, ld, ld));
        endcase
        if ($urandom_range(0, 3) == 0) put(rand_alu(rd, rs1, rs2));
        k += 2;
      end else if (kind < 45) begin
        put(rand_alu(rd, rs1, rs2)); k++;
      end else if (kind < 55) begin
        put(rand_load(rd)); k++;
      end else if (kind < 63) begin
        put(rand_store(rs2)); k++;
      end else if (kind < 75) begin              // forward branch skipping 1..3
        logic [2:0] f3;
        int skip = $urandom_range(1, 3);
        case ($urandom_range(0, 5))
          0: f3 = 3'b000; 1: f3 = 3'b001; 2: f3 = 3'b100; 3: f3 = 3'b101; 4: f3 = 3'b110;
          default: f3 = 3'b111;
        endcase
        put(enc_b(13'((skip + 1) * 4), rs2, rs1, f3));
        for (int s = 0; s < skip; s++) put(rand_alu(rreg(), rreg(), rreg()));
        k += skip + 1;
      end else if (kind < 80) begin              // JAL skipping 1
        put(enc_j(21'd8, rd));
        put(rand_alu(rreg(), rreg(), rreg()));
        k += 2;
      end else if (kind < 84) begin              // AUIPC + JALR skipping 1
        put(enc_u(20'd0, 5'd29, 7'b0010111));
        put(enc_i(12'd12, 5'd29, 3'b000, rd, 7'b1100111));
        put(rand_alu(rreg(), rreg(), rreg()));
        k += 3;
      end else if (kind < 88) begin
        put(enc_u(20'($urandom), rd, ($urandom_range(0, 1) != 0) ? 7'b0110111 : 7'b0010111)); k++;
      end else begin                             // chain of dependent ALU ops
        put(rand_alu(rd, rs1, rs2));
        put(rand_alu(rs1, rd, rd));
        k += 2;
      end
    end
    for (int s = 0; s < 4; s++) put(32'h13);
    end_pc = 32'(nprog * 4);
    put(enc_j(21'd0, 5'd0));                     // spin: end of program
  endtask

  // ---------------------------------------------------------------- checking
  int checks = 0, failures = 0;
  int cycle = 0;
  int retired = 0, transfers = 0;
  int n_load_use = 0, n_ld_bypass = 0, n_exmem_bypass = 0;
  int n_id_ex = 0, n_id_mem = 0, n_id_wb = 0, n_stall = 0, n_redirect = 0;
  bit done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && !done) begin
      cycle++;
      n_load_use     += int'(events.load_use);
      n_ld_bypass    += int'(events.ld_bypass);
      n_exmem_bypass += int'(events.exmem_bypass);
      n_id_ex        += int'(events.id_bypass_ex);
      n_id_mem       += int'(events.id_bypass_mem);
      n_id_wb        += int'(events.id_bypass_wb);
      n_redirect     += int'(events.redirect);
      n_stall        += int'(events.mem_stall);
      if (retire_valid) begin
        logic [31:0] ipc, wd;
        logic we, tk, isld;
        logic [4:0] rd;
        iss.step(ipc, we, rd, wd, tk, isld);
        check(retire_pc == ipc, $sformatf("retire pc %h, expected %h", retire_pc, ipc));
        check(retire_rd_we == we && retire_rd == rd && (!we || retire_wdata == wd),
              $sformatf("pc %h writes x%0d=%h (we %b), expected x%0d=%h (we %b)",
                        ipc, retire_rd, retire_wdata, retire_rd_we, rd, wd, we));
        // cycle is counted after this edge's sampling: retire seen in cycle-1
        check(cycle - 1 == retired + PIPE_FILL + 2 * transfers + stall_cycles,
              $sformatf("instruction %0d retired in cycle %0d, expected %0d", retired,
                        cycle - 1, retired + PIPE_FILL + 2 * transfers + stall_cycles));
        retired++;
        if (tk) transfers++;
        if (ipc == end_pc) done = 1;
      end
      if (events.mem_stall) stall_cycles++;
    end
  end

  initial begin
    iss = new(32'h0);
    foreach (imem[i]) imem[i] = 32'h13;
    for (int i = 0; i < DWORDS; i++) begin
      dmem[i] = $urandom;
      iss.dmem[(DBASE >> 2) + i] = dmem[i];
    end
    stall_cycles = 0;
    build_program();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done);
    @(negedge clk);
    for (int i = 0; i < DWORDS; i++)
      check(dmem[i] == iss.dmem[(DBASE >> 2) + i], $sformatf("data word %0d", i));
    $display("retired %0d instructions in %0d cycles: %0d transfers, %0d memory stall cycles",
             retired, cycle, transfers, stall_cycles);
    $display("events: load_use=%0d ld_bypass=%0d exmem_bypass=%0d id_ex=%0d id_mem=%0d id_wb=%0d stall=%0d redirect=%0d",
             n_load_use, n_ld_bypass, n_exmem_bypass, n_id_ex, n_id_mem, n_id_wb, n_stall, n_redirect);
    check(n_load_use > 0,     "no load-use pair occurred");
    check(n_ld_bypass > 0,    "SSR load bypass never used");
    check(n_exmem_bypass > 0, "EX/MEM result bypass never used");
    check(n_id_ex > 0,        "ID bypass from EXE never used");
    check(n_id_mem > 0,       "ID bypass from MEM never used");
    check(n_id_wb > 0,        "ID bypass from WB never used");
    check(n_stall > 0,        "no memory stall occurred");
    check(n_redirect > 0,     "no branch or jump redirect occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
