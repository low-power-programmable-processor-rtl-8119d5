// dmem_bank: one single-port data memory made of blocks of increasing size.
//
// 2^(LOG2_NMAX-1) words (8192 for the default) split into blocks of
// MIN_BLK, MIN_BLK, 2*MIN_BLK, 4*MIN_BLK, ... words: 32, 32, 64, ..., 4096,
// as in the paper. Block 0 holds addresses 0..31, block i >= 1 the addresses
// whose highest set bit is bit 4+i. Only the block an access falls in gets an
// enable; the others see no activity, so a small FFT, whose addresses stay
// low, only ever touches the small blocks. Two of these form the data memory.
// Timing: synchronous, read data in the next cycle, held while idle or writing.
// The block sizes are the paper's; the rest follows from them.
module dmem_bank #(
  parameter int unsigned LOG2_NMAX = 14,
  parameter int unsigned MIN_BLK   = 32
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic                   we,
  input  logic [LOG2_NMAX-2:0]   addr,
  input  logic [31:0]            wdata,
  output logic [31:0]            rdata,
  output logic [LOG2_NMAX-2:0]   blk_en    // which block was enabled (observation; bits NBLK and up stay 0)
);
  localparam int unsigned MAW  = LOG2_NMAX - 1;          // word address width
  localparam int unsigned LB   = $clog2(MIN_BLK);
  localparam int unsigned NBLK = MAW - LB + 1;           // 9 for the default

  logic [NBLK-1:0]     sel;
  logic [31:0]         brdata [NBLK];
  logic [$clog2(NBLK)-1:0] sel_idx, sel_q;

  // block index: 0 below MIN_BLK, else (position of highest set bit) - LB + 1
  always_comb begin
    sel_idx = '0;
    for (int b = int'(LB); b < int'(MAW); b++)
      if (addr[b]) sel_idx = ($clog2(NBLK))'(b - int'(LB) + 1);
    sel = '0;
    sel[sel_idx] = en;
  end

  for (genvar i = 0; i < int'(NBLK); i++) begin : g_blk
    localparam int unsigned BW = (i == 0) ? LB : LB + i - 1;
    dmem_block #(.DEPTH(1 << BW), .W(32)) u_blk (
      .clk  (clk),
      .en   (sel[i]),
      .we   (we),
      .addr (addr[BW-1:0]),
      .wdata(wdata),
      .rdata(brdata[i])
    );
  end

  always_ff @(posedge clk) begin
    if (en && !we) sel_q <= sel_idx;
  end

  assign rdata = brdata[sel_q];

  always_comb begin
    blk_en = '0;
    blk_en[NBLK-1:0] = sel;
  end
endmodule
