// ssr_regfile_tb: random writes and reads of the 32 x 32 register file
// against an array model; checks that x0 stays zero, that a write is seen
// from the next cycle, and that reset clears the file.
module ssr_regfile_tb;
  logic        clk = 0, rst_n = 0;
  logic [4:0]  raddr1, raddr2, waddr;
  logic [31:0] rdata1, rdata2, wdata;
  logic        we;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  ssr_regfile dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    we = 0; waddr = 0; wdata = 0; raddr1 = 0; raddr2 = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      raddr1 = 5'(i); #1 chk(rdata1, 32'h0, "after reset");
    end
    repeat (3000) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 5'($urandom); wdata = $urandom;
      raddr1 = 5'($urandom); raddr2 = 5'($urandom);
      #1;
      chk(rdata1, model[raddr1], $sformatf("read1 x%0d", raddr1));
      chk(rdata2, model[raddr2], $sformatf("read2 x%0d", raddr2));
      @(posedge clk);
      if (we && waddr != 0) model[waddr] = wdata;
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
