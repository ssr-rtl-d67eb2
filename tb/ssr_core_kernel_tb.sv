// ssr_core_kernel_tb: load-heavy kernels on the SSR pipeline.
//
// Two loops of the kind the SSR scheme targets run on ssr_core with a data
// memory that stalls at random like a missing cache: a walk of a shuffled
// linked list that sums its values (each node gives a load feeding an add and
// a load feeding the loop branch, the lw/beqz pattern of the scheme), and a
// word copy whose store uses the word just loaded. Every retired instruction
// is compared with the rv32_iss reference model; the list sum, the node
// count and the copied array are checked; each of the 2*NODES+NCOPY
// load-use pairs must pass without a stall, and every instruction must
// retire in the cycle given by
//   k + PIPE_FILL + 2 * (taken transfers before it) + (memory stall cycles before it).
// It also prints how many cycles a pipeline with the classic one-bubble
// load-use interlock would have needed for the same run.
module ssr_core_kernel_tb;
  import ssr_pkg::*;
  import rv32_tb_pkg::*;

    localparam int DBASE     = 32'h2000;   // data region, 256 words
  localparam int DWORDS    = 512;
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

  localparam int NODES  = 64;            // linked-list length
  localparam int NCOPY  = 48;            // words copied by the second loop
  localparam int LIST_W = 16;            // word offset of the list nodes
  localparam int SRC_W  = 200;           // word offset of the copy source
  localparam int DST_W  = 300;           // word offset of the copy destination
  localparam int RES_W  = 1;             // word offset of the results

  int          exp_sum;
  int          exp_load_use;

  task automatic put(input logic [31:0] ins);
    imem[nprog] = ins;
    iss.imem[nprog] = ins;
    nprog++;
  endtask

  // Data: a linked list of NODES {value, next} nodes in a shuffled order,
  // head pointer in word 0; a source array for the copy loop.
  task automatic build_data();
    int order [NODES];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    exp_sum = 0;
    dmem[0] = DBASE + 4 * (LIST_W + 2 * order[0]);
    for (int i = 0; i < NODES; i++) begin
      int n = LIST_W + 2 * order[i];
      dmem[n]     = $urandom_range(0, 100000);
      dmem[n + 1] = (i == NODES - 1) ? 32'h0 : DBASE + 4 * (LIST_W + 2 * order[i + 1]);
      exp_sum += int'(dmem[n]);
    end
    for (int i = 0; i < NCOPY; i++) dmem[SRC_W + i] = $urandom;
  endtask

  task automatic build_program();
    nprog = 0;
    put(lui(5'd31, 20'(DBASE >> 12)));                  // x31 = data base
    put(lw(5'd1, 5'd31, 12'd0));                        // x1 = head
    put(addi(5'd2, 5'd0, 12'd0));                       // x2 = sum
    put(addi(5'd3, 5'd0, 12'd0));                       // x3 = count
    // walk: x4 = node.value; sum += x4; count++; x1 = node.next; loop while x1 != 0
    put(lw(5'd4, 5'd1, 12'd0));
    put(add(5'd2, 5'd2, 5'd4));                         // load-use (ALU)
    put(addi(5'd3, 5'd3, 12'd1));
    put(lw(5'd1, 5'd1, 12'd4));
    put(enc_b(-13'sd16, 5'd0, 5'd1, 3'b001));          // bnez x1: load-use (branch)
    put(sw(5'd2, 5'd31, 12'(4 * RES_W)));
    put(sw(5'd3, 5'd31, 12'(4 * RES_W + 4)));
    // copy: x6 = src, x7 = dst, x8 = words left
    put(addi(5'd6, 5'd31, 12'(4 * SRC_W)));
    put(addi(5'd7, 5'd31, 12'(4 * DST_W)));
    put(addi(5'd8, 5'd0, 12'(NCOPY)));
    put(lw(5'd5, 5'd6, 12'd0));
    put(sw(5'd5, 5'd7, 12'd0));                         // load-use (store data)
    put(addi(5'd6, 5'd6, 12'd4));
    put(addi(5'd7, 5'd7, 12'd4));
    put(addi(5'd8, 5'd8, -12'sd1));
    put(enc_b(-13'sd20, 5'd0, 5'd8, 3'b001));          // bnez x8
    end_pc = 32'(nprog * 4);
    put(enc_j(21'd0, 5'd0));
    exp_load_use = 2 * NODES + NCOPY;
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
    for (int i = 0; i < DWORDS; i++) dmem[i] = '0;
    build_data();
    for (int i = 0; i < DWORDS; i++) iss.dmem[(DBASE >> 2) + i] = dmem[i];
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
    check(dmem[RES_W] == 32'(exp_sum), $sformatf("list sum %0d, expected %0d", dmem[RES_W], exp_sum));
    check(dmem[RES_W + 1] == NODES, "node count");
    for (int i = 0; i < NCOPY; i++) check(dmem[DST_W + i] == dmem[SRC_W + i], "copied word");
    check(n_load_use == exp_load_use, $sformatf("%0d load-use pairs, expected %0d",
                                                 n_load_use, exp_load_use));
    check(n_ld_bypass >= exp_load_use, "load bypasses fewer than load-use pairs");
    check(n_stall > 0, "no memory stall occurred");
    $display("cycles with SSR: %0d; with a one-bubble load-use interlock: %0d (%0d bubbles removed)",
             cycle, cycle + n_load_use, n_load_use);
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
