// ssr_if_stage_tb: runs the fetch stage against a small instruction array
// with random stalls and redirects and checks, every cycle, the fetch
// address and the IF/ID register against a model: reset PC, +4 stepping,
// hold on stall (stall wins over redirect), redirect loads the target and
// empties IF/ID.
module ssr_if_stage_tb;
  import ssr_pkg::*;

  localparam logic [31:0] RPC = 32'h0000_0100;
  logic        clk = 0, rst_n = 0, stall, redirect;
  logic [31:0] redirect_pc, imem_addr, imem_rdata;
  ifid_t       ifid;
  int checks = 0, failures = 0;

  ssr_if_stage #(.RESET_PC(RPC)) dut (.*);
  always #5 clk = ~clk;

  assign imem_rdata = {imem_addr[15:0], ~imem_addr[15:0]};   // address-tagged words

  logic [31:0] m_pc;
  ifid_t       m_ifid;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    stall = 0; redirect = 0; redirect_pc = 0;
    m_pc = RPC; m_ifid = '0;
    #11 rst_n = 1;
    repeat (3000) begin
      chk(imem_addr == m_pc, $sformatf("pc %h expected %h", imem_addr, m_pc));
      chk(ifid.valid == m_ifid.valid && (!m_ifid.valid ||
          (ifid.pc == m_ifid.pc && ifid.instr == m_ifid.instr)), "IF/ID");
      stall = ($urandom_range(0, 4) == 0);
      redirect = ($urandom_range(0, 5) == 0);
      redirect_pc = $urandom & 32'h0000_FFFC;
      @(posedge clk);
      if (!stall) begin
        if (redirect) begin
          m_ifid.valid = 0; m_pc = redirect_pc;
        end else begin
          m_ifid = '{valid: 1, pc: m_pc, instr: {m_pc[15:0], ~m_pc[15:0]}};
          m_pc = m_pc + 4;
        end
      end
      @(negedge clk);
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
