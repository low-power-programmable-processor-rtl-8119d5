// dmem_block: one synchronous single-port SRAM block of the data memory.
//
// en/we/addr/wdata in one cycle; a read shows its word on rdata from the next
// cycle and rdata holds while en is low or during a write. Stands for one of
// the SRAM macros of the paper's data memory (there modelled with a memory
// power tool); here it is a plain array.
module dmem_block #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
