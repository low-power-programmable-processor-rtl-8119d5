// loop_buffer: small instruction store of the control unit.
//
// Holds up to DEPTH instruction words of a loop body. The control unit writes
// each body instruction into it while the body runs the first time from the
// instruction memory (wr, widx), and then reads it back (rd, ridx) for the
// remaining iterations, during which the instruction memory stays idle. This
// is where the paper's power saving comes from: the whole FFT kernel is one
// instruction word replayed from here.
// Read timing matches the instruction memory: data from the next cycle, held
// while rd is low. A read of the entry being written in the same cycle returns
// the new word. DEPTH = 4 is this design's choice (the FFT kernel needs one).
module loop_buffer #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned IW    = 133
) (
  input  logic                     clk,
  input  logic                     wr,
  input  logic [$clog2(DEPTH)-1:0] widx,
  input  logic [IW-1:0]            wdata,
  input  logic                     rd,
  input  logic [$clog2(DEPTH)-1:0] ridx,
  output logic [IW-1:0]            rdata
);
  logic [IW-1:0] buf_q [DEPTH];

  always_ff @(posedge clk) begin
    if (wr) buf_q[widx] <= wdata;
    if (rd) rdata <= (wr && widx == ridx) ? wdata : buf_q[ridx];
  end
endmodule
