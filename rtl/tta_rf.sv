// tta_rf: 8 x 32-bit register file (RF in the processor figure).
//
// One write port and one read port, as the figure draws one input and one
// output socket. The read is combinational: a move that names register k as
// its source carries that register's value in the same cycle. A write lands at
// the clock edge, so a read in the same cycle returns the old value.
// Size follows the paper (8x32); port timing and the reset to zero are this
// design's choices. stall freezes the registers.
module tta_rf #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     stall,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] regs [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) regs[i] <= '0;
    end else if (!stall && we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata = regs[raddr];
endmodule
