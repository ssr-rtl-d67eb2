// ssr_regfile: integer register file, NREG x XLEN bits (32 x 32 for RV32I).
//
// Two asynchronous read ports serve the ID stage, one synchronous write port
// is driven by WB. Register 0 reads as zero and ignores writes. A value
// written in a cycle is visible on the read ports from the next cycle; the
// same-cycle case (WB writes what ID reads) is covered by the ID hazard
// detector's WB bypass, so the file has no internal write-through.
// Following the paper: a register file read in ID and written in WB with two
// read ports (the paper argues against adding a third). Own choice: sizes of
// RV32I, reset clears all registers.
module ssr_regfile
  import ssr_pkg::*;
#(
  parameter int unsigned N = NREG,
  parameter int unsigned W = XLEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(N)-1:0] raddr1,
  input  logic [$clog2(N)-1:0] raddr2,
  output logic [W-1:0]         rdata1,
  output logic [W-1:0]         rdata2,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  logic [W-1:0]         wdata
);

  logic [W-1:0] regs [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) regs[i] <= '0;
    end else if (we && waddr != '0) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata1 = (raddr1 == '0) ? '0 : regs[raddr1];
  assign rdata2 = (raddr2 == '0) ? '0 : regs[raddr2];

endmodule
