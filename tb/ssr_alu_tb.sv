// ssr_alu_tb: random operands (with corner values mixed in) for every ALU
// operation and branch condition, compared with results computed here
// directly from the RV32I definitions.
module ssr_alu_tb;
  import ssr_pkg::*;
  alu_op_e     op;
  logic [31:0] a, b, result, cmp_a, cmp_b;
  logic [2:0]  br_funct3;
  logic        br_cond;
  int checks = 0, failures = 0;

  ssr_alu dut (.*);

  function automatic logic [31:0] pick();
    case ($urandom_range(0, 5))
      0: return 32'h0;
      1: return 32'h8000_0000;
      2: return 32'hFFFF_FFFF;
      3: return 32'($urandom_range(0, 40));
      default: return $urandom;
    endcase
  endfunction

  initial begin
    repeat (20000) begin
      logic [31:0] exp;
      logic ec;
      op = alu_op_e'($urandom_range(0, 10));
      a = pick(); b = pick();
      cmp_a = pick(); cmp_b = ($urandom_range(0, 3) == 0) ? cmp_a : pick();
      br_funct3 = 3'($urandom);
      #1;
      case (op)
        ALU_ADD:  exp = a + b;
        ALU_SUB:  exp = a + ~b + 1;
        ALU_SLL:  exp = a << b[4:0];
        ALU_SLT:  exp = (a[31] != b[31]) ? 32'(a[31]) : 32'(a < b);
        ALU_SLTU: exp = 32'(a < b);
        ALU_XOR:  exp = a ^ b;
        ALU_SRL:  exp = a >> b[4:0];
        ALU_SRA:  exp = (a >> b[4:0]) | (a[31] ? ~(32'hFFFF_FFFF >> b[4:0]) : 32'h0);
        ALU_OR:   exp = a | b;
        ALU_AND:  exp = a & b;
        default:  exp = b;
      endcase
      case (br_funct3)
        3'b000: ec = cmp_a == cmp_b;
        3'b001: ec = cmp_a != cmp_b;
        3'b100: ec = (cmp_a ^ 32'h8000_0000) <  (cmp_b ^ 32'h8000_0000);
        3'b101: ec = (cmp_a ^ 32'h8000_0000) >= (cmp_b ^ 32'h8000_0000);
        3'b110: ec = cmp_a < cmp_b;
        3'b111: ec = cmp_a >= cmp_b;
        default: ec = 0;
      endcase
      checks++;
      if (result !== exp || br_cond !== ec) begin
        failures++;
        if (failures < 10) $display("FAIL op %s a=%h b=%h: %h expected %h; br f3=%0d %b expected %b",
                                    op.name(), a, b, result, exp, br_funct3, br_cond, ec);
      end
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
