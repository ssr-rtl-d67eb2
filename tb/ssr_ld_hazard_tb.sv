// ssr_ld_hazard_tb: checks the EXE-stage ld hazard detector against the
// paper's Algorithm 1, evaluated here separately for each operand.
// Random vectors (register numbers drawn from a small set so that matches are
// frequent, x0 included) plus directed cases: load match, non-load match,
// x0, EX/MEM not writing, EX/MEM invalid. Combinational: outputs are sampled
// 1 time unit after the inputs change.
module ssr_ld_hazard_tb;
  import ssr_pkg::*;

  logic [4:0]  idex_rs1, idex_rs2, exmem_rd;
  logic [31:0] idex_rs1_val, idex_rs2_val, exmem_result, mem_load_data;
  logic        exmem_valid, exmem_rd_we, exmem_is_load;
  logic [31:0] ex_rs1_val, ex_rs2_val;
  logic        rs1_ld_bypass, rs2_ld_bypass, rs1_alu_bypass, rs2_alu_bypass;

  ssr_ld_hazard dut (.*);

  int checks = 0, failures = 0;

  // Algorithm 1 for one source register: 2 = bypass load data, 1 = bypass
  // EX/MEM result, 0 = nothing
  function automatic int alg1(input logic [4:0] rs);
    if (rs != 0 && exmem_valid && exmem_rd_we && rs == exmem_rd && exmem_is_load) return 2;
    else if (rs != 0 && exmem_valid && exmem_rd_we && rs == exmem_rd && !exmem_is_load) return 1;
    else return 0;
  endfunction

  task automatic check_now();
    int s1 = alg1(idex_rs1), s2 = alg1(idex_rs2);
    logic [31:0] e1 = (s1 == 2) ? mem_load_data : (s1 == 1) ? exmem_result : idex_rs1_val;
    logic [31:0] e2 = (s2 == 2) ? mem_load_data : (s2 == 1) ? exmem_result : idex_rs2_val;
    #1;
    checks++;
    if (ex_rs1_val !== e1 || ex_rs2_val !== e2 ||
        rs1_ld_bypass !== (s1 == 2) || rs1_alu_bypass !== (s1 == 1) ||
        rs2_ld_bypass !== (s2 == 2) || rs2_alu_bypass !== (s2 == 1)) begin
      failures++;
      if (failures < 10)
        $display("FAIL rs1=%0d rs2=%0d rd=%0d v=%b we=%b ld=%b: got %h %h, expected %h %h",
                 idex_rs1, idex_rs2, exmem_rd, exmem_valid, exmem_rd_we, exmem_is_load,
                 ex_rs1_val, ex_rs2_val, e1, e2);
    end
  endtask

  task automatic drive(input logic [4:0] rs1, input logic [4:0] rs2, input logic [4:0] rd,
                       input logic v, input logic we, input logic ld);
    idex_rs1 = rs1; idex_rs2 = rs2; exmem_rd = rd;
    exmem_valid = v; exmem_rd_we = we; exmem_is_load = ld;
    idex_rs1_val = $urandom; idex_rs2_val = $urandom;
    exmem_result = $urandom; mem_load_data = $urandom;
    check_now();
  endtask

  initial begin
    // the paper's example: lw a5 in MEM, beqz a5 in EXE
    drive(5'd15, 5'd0, 5'd15, 1, 1, 1);
    drive(5'd15, 5'd15, 5'd15, 1, 1, 1);
    drive(5'd3, 5'd15, 5'd15, 1, 1, 0);
    drive(5'd0, 5'd0, 5'd0, 1, 1, 1);      // x0 never bypassed
    drive(5'd0, 5'd0, 5'd0, 1, 1, 0);
    drive(5'd7, 5'd7, 5'd7, 1, 0, 1);      // EX/MEM does not write
    drive(5'd7, 5'd7, 5'd7, 0, 1, 1);      // bubble in EX/MEM
    repeat (5000) begin
      drive(5'($urandom_range(0, 3)), 5'($urandom_range(0, 3)), 5'($urandom_range(0, 3)),
            $urandom_range(0, 3) != 0, $urandom_range(0, 3) != 0, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
