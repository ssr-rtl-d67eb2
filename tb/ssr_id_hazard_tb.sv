// ssr_id_hazard_tb: checks the ID-stage hazard detector. For random
// pipelines (register numbers from a small set, so that several stages often
// write the same register) the expected operand is found by walking the
// stages from youngest (EXE) to oldest (WB) and taking the first that writes
// the register, skipping a load in EXE, whose data does not exist yet; with
// no match the register-file value is expected. Also checks the
// load_use_deferred flag. Combinational.
module ssr_id_hazard_tb;
  import ssr_pkg::*;

  logic [4:0]  id_rs1, id_rs2, ex_rd, mem_rd, wb_rd;
  logic [31:0] rf_rs1_val, rf_rs2_val, ex_result, mem_result, wb_result;
  logic        ex_valid, ex_rd_we, ex_is_load, mem_valid, mem_rd_we, wb_valid, wb_rd_we;
  logic [31:0] id_rs1_val, id_rs2_val;
  logic [1:0]  rs1_src, rs2_src;
  logic        load_use_deferred;

  ssr_id_hazard dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [31:0] expect_val(input logic [4:0] rs, input logic [31:0] rf);
    logic [4:0]  rds [3];
    logic        wes [3];
    logic [31:0] vals [3];
    rds  = '{ex_rd, mem_rd, wb_rd};
    wes  = '{ex_valid && ex_rd_we && !ex_is_load, mem_valid && mem_rd_we, wb_valid && wb_rd_we};
    vals = '{ex_result, mem_result, wb_result};
    if (rs == 0) return rf;
    for (int s = 0; s < 3; s++)
      if (wes[s] && rds[s] == rs) return vals[s];
    return rf;
  endfunction

  initial begin
    repeat (10000) begin
      logic [31:0] e1, e2;
      logic elu;
      id_rs1 = 5'($urandom_range(0, 3)); id_rs2 = 5'($urandom_range(0, 3));
      ex_rd = 5'($urandom_range(0, 3)); mem_rd = 5'($urandom_range(0, 3));
      wb_rd = 5'($urandom_range(0, 3));
      {ex_valid, ex_rd_we, ex_is_load, mem_valid, mem_rd_we, wb_valid, wb_rd_we} = 7'($urandom);
      rf_rs1_val = $urandom; rf_rs2_val = $urandom;
      ex_result = $urandom; mem_result = $urandom; wb_result = $urandom;
      #1;
      e1 = expect_val(id_rs1, rf_rs1_val);
      e2 = expect_val(id_rs2, rf_rs2_val);
      elu = ex_valid && ex_rd_we && ex_is_load && ex_rd != 0 &&
            (ex_rd == id_rs1 || ex_rd == id_rs2);
      checks++;
      if (id_rs1_val !== e1 || id_rs2_val !== e2 || load_use_deferred !== elu) begin
        failures++;
        if (failures < 10)
          $display("FAIL rs1=%0d rs2=%0d ex=%0d mem=%0d wb=%0d: got %h %h %b, expected %h %h %b",
                   id_rs1, id_rs2, ex_rd, mem_rd, wb_rd, id_rs1_val, id_rs2_val,
                   load_use_deferred, e1, e2, elu);
      end
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
