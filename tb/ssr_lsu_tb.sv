// ssr_lsu_tb: drives the MEM-stage load/store unit with random accesses of
// every size and alignment. For stores it checks the aligned address, the
// byte enables and that each enabled lane carries the right store byte; for
// loads it checks the extracted, sign- or zero-extended value against a byte
// array view of the memory word; it also checks the request and stall flags.
module ssr_lsu_tb;
  import ssr_pkg::*;

  logic        valid, is_load, is_store, dmem_req, dmem_we, dmem_ready, stall;
  logic [2:0]  funct3;
  logic [31:0] addr, store_data, dmem_addr, dmem_wdata, dmem_rdata, load_data;
  logic [3:0]  dmem_wstrb;
  int checks = 0, failures = 0;

  ssr_lsu dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (f3 %0d addr %h)", what, funct3, addr);
    end
  endtask

  initial begin
    repeat (10000) begin
      logic [7:0] bytes [4];
      int size, o;
      logic [31:0] exp;
      valid = ($urandom_range(0, 7) != 0);
      is_load = 1'($urandom); is_store = !is_load && ($urandom_range(0, 3) != 0);
      dmem_ready = 1'($urandom);
      funct3 = is_load ? 3'($urandom_range(0, 5)) : 3'($urandom_range(0, 2));
      if (funct3 == 3'b011) funct3 = 3'b010;
      size = 1 << funct3[1:0];
      addr = $urandom & ~32'(size - 1);
      store_data = $urandom; dmem_rdata = $urandom;
      #1;
      o = int'(addr[1:0]);
      chk(dmem_req == (valid && (is_load || is_store)), "req");
      chk(stall == (dmem_req && !dmem_ready), "stall");
      chk(dmem_addr == {addr[31:2], 2'b00}, "address");
      if (valid && is_store) begin
        for (int b = 0; b < 4; b++) begin
          bit en;
          en = (b >= o) && (b < o + size);
          chk(dmem_wstrb[b] == en, $sformatf("strobe %0d", b));
          if (en) chk(dmem_wdata[8*b +: 8] == store_data[8*(b-o) +: 8], $sformatf("lane %0d", b));
        end
        chk(dmem_we, "we");
      end else begin
        chk(!dmem_we && dmem_wstrb == 4'b0, "no write");
      end
      if (is_load) begin
        for (int b = 0; b < 4; b++) bytes[b] = dmem_rdata[8*b +: 8];
        case (funct3)
          3'b000: exp = 32'(signed'(bytes[o]));
          3'b100: exp = 32'(bytes[o]);
          3'b001: exp = 32'(signed'({bytes[o+1], bytes[o]}));
          3'b101: exp = 32'({bytes[o+1], bytes[o]});
          default: exp = {bytes[3], bytes[2], bytes[1], bytes[0]};
        endcase
        chk(load_data == exp, $sformatf("load data %h expected %h", load_data, exp));
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
