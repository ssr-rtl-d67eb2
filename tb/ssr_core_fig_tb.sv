// ssr_core_fig_tb: the two instruction pairs of the scheme's pipeline
// diagrams, followed cycle by cycle through ssr_core.
//
//  1. add a1,a2,a3 ; add a4,a1,a3 -- an ALU result is needed at once. When
//     the second add is in ID the first is in EXE, and the ID hazard
//     detector must take a1 from EXE.
//  2. lw a5,0(a5) ; beqz a5,pc+1498 -- a load feeds a branch at once. When
//     beqz is in ID the load is in EXE, and no stall may be raised. The next
//     cycle beqz is in EXE and lw in MEM, and the ld hazard detector must
//     forward the load data. The cycle after, lw is in WB and beqz in MEM with
//     no nop between them. The load returns a non-zero word, so the branch
//     is not taken.
//  3. The same pair with a zero word and a short branch (beqz a5,pc+8),
//     which must be taken, in the same cycle, on the forwarded value.
// Memory never stalls here. The pipeline registers are observed through
// hierarchical references.
module ssr_core_fig_tb;
  import ssr_pkg::*;
  import rv32_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata, retire_pc, retire_wdata;
  logic        dmem_req, dmem_we, dmem_ready, retire_valid, retire_rd_we;
  logic [3:0]  dmem_wstrb;
  logic [4:0]  retire_rd;
  events_t     events;

  ssr_core dut (.*);

  logic [31:0] imem [64];
  logic [31:0] dmem [16];
  assign imem_rdata = imem[imem_addr[7:2]];
  assign dmem_rdata = dmem[dmem_addr[5:2]];
  assign dmem_ready = 1'b1;

  localparam logic [4:0] A1 = 5'd11, A2 = 5'd12, A3 = 5'd13, A4 = 5'd14, A5 = 5'd15, A6 = 5'd16;
  localparam logic [31:0] PC_ADD2 = 32'h10, PC_LW = 32'h18, PC_BEQZ = 32'h1C,
                          PC_LW2 = 32'h24, PC_BEQZ2 = 32'h28;

  int checks = 0, failures = 0;
  int cyc = 0;
  bit seen_id_ex = 0, seen_ld = 0, seen_back2back = 0, seen_taken = 0, seen_skip = 0;
  logic [31:0] a4_value;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL cycle %0d: %s", cyc, what); end
  endtask

  initial begin
    foreach (imem[i]) imem[i] = 32'h13;
    foreach (dmem[i]) dmem[i] = '0;
    dmem[2] = 32'h0000_1234;          // word read by the first lw
    dmem[3] = 32'h0000_0000;          // word read by the second lw
    imem[0] = addi(A2, 5'd0, 12'd100);
    imem[1] = addi(A3, 5'd0, 12'd23);
    imem[2] = addi(A5, 5'd0, 12'd8);
    imem[3] = add(A1, A2, A3);        // 0x0C  add a1,a2,a3
    imem[4] = add(A4, A1, A3);        // 0x10  add a4,a1,a3
    imem[5] = addi(A6, 5'd0, 12'd12);
    imem[6] = lw(A5, A5, 12'd0);      // 0x18  lw a5,0(a5)
    imem[7] = enc_b(13'd1498, 5'd0, A5, 3'b000);   // 0x1C beqz a5,pc+1498
    imem[8] = 32'h13;
    imem[9] = lw(A5, A6, 12'd0);      // 0x24  lw a5,0(a6)
    imem[10] = enc_b(13'd8, 5'd0, A5, 3'b000);     // 0x28 beqz a5,pc+8
    imem[11] = addi(A1, 5'd0, 12'd1); // 0x2C  skipped when taken
    imem[12] = enc_j(21'd0, 5'd0);    // 0x30  spin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (30) begin
      @(negedge clk);
      cyc++;
      // 1: add a4,a1,a3 in ID while add a1 is in EXE
      if (dut.ifid.valid && dut.ifid.pc == PC_ADD2) begin
        chk(dut.idex.valid && dut.idex.pc == PC_ADD2 - 4, "add a1 in EXE while add a4 in ID");
        chk(events.id_bypass_ex, "a1 bypassed from EXE to ID");
        seen_id_ex = 1;
      end
      if (retire_valid && retire_pc == PC_ADD2) a4_value = retire_wdata;
      // 2: beqz in ID, lw in EXE: no stall, load-use deferred
      if (dut.ifid.valid && dut.ifid.pc == PC_BEQZ) begin
        chk(dut.idex.valid && dut.idex.pc == PC_LW, "lw in EXE while beqz in ID");
        chk(events.load_use, "load-use pair reported");
        chk(!events.mem_stall, "no stall");
      end
      // beqz in EXE, lw in MEM: the ld hazard detector forwards the load data
      if (dut.idex.valid && dut.idex.pc == PC_BEQZ) begin
        chk(dut.exmem.valid && dut.exmem.pc == PC_LW, "lw in MEM while beqz in EXE");
        chk(events.ld_bypass, "ld hazard detector bypass");
        chk(!events.redirect, "beqz not taken on the loaded non-zero a5");
        seen_ld = 1;
      end
      // beqz in MEM, lw in WB: no nop between them
      if (dut.exmem.valid && dut.exmem.pc == PC_BEQZ) begin
        chk(dut.memwb.valid && dut.memwb.pc == PC_LW, "lw in WB right after beqz in MEM");
        seen_back2back = 1;
      end
      // 3: taken on the forwarded zero
      if (dut.idex.valid && dut.idex.pc == PC_BEQZ2) begin
        chk(dut.exmem.pc == PC_LW2 && events.ld_bypass, "second lw forwarded");
        chk(events.redirect && dut.redirect_pc == PC_BEQZ2 + 8, "beqz taken to pc+8");
        seen_taken = 1;
      end
      if (retire_valid && retire_pc == PC_BEQZ2 + 4) seen_skip = 1;
    end
    chk(seen_id_ex && seen_ld && seen_back2back && seen_taken, "all diagram situations seen");
    chk(!seen_skip, "instruction after the taken beqz was squashed");
    chk(a4_value == 32'd146, $sformatf("a4 = %0d, expected 146", a4_value));
    chk(dut.u_rf.regs[A5] == 32'h0, "a5 holds the second loaded word");
    chk(dut.u_rf.regs[A1] == 32'd123, "a1 not overwritten by the squashed addi");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
