// imem: instruction memory.
//
// Synchronous single-port memory of DEPTH instruction words. The fetch port
// (en, addr) shows the word from the next cycle and holds it while en is low,
// which is how the control unit keeps its instruction during a lock. A host
// write port loads the program while the processor is idle; a host write takes
// the port for that cycle. Depth 64 comfortably holds the 33-word FFT program;
// the depth, the host port and the 133-bit width (the paper's own encoding is
// 51 bits and not published) are this design's choices.
module imem #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned IW    = 133
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [IW-1:0]            rdata,
  input  logic                     h_we,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  logic [IW-1:0]            h_wdata
);
  logic [IW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (h_we)     mem[h_addr] <= h_wdata;
    else if (en)  rdata       <= mem[addr];
  end
endmodule
