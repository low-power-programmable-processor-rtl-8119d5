// fu_ag: FFT operand address generator (AG in the processor figure).
//
// The trigger port receives a linear counter c = {stage, index}; the operand
// port holds n = log2(N) of the FFT size (6..LOG2_NMAX). With q = index[1:0]
// (which of the four butterfly operands) and r = index >> 2:
//   radix-4 stage s:            addr = { r[n-3:2s], q, r[2s-1:0] }
//   radix-2 stage (last, n odd): addr = { q[0], r, q[1] }
// i.e. the counter's least significant bit pair is moved to the bit-pair
// position selected by the stage. Being a bit permutation, it keeps the XOR
// parity of the index, so two consecutive counter values (2k, 2k+1) always
// land in different memory modules.
// The paper describes the bit-pair permutation and the parity property; the
// exact radix-2 layout and the one-cycle latency are this design's choices.
module fu_ag #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall,
  input  logic         o_we,
  input  logic [W-1:0] o_in,
  input  logic         t_we,
  input  logic [W-1:0] t_in,
  output logic [W-1:0] r
);
  logic [W-1:0] o_q;
  logic [4:0]   n;
  logic [W-1:0] addr;

  assign n = o_we ? o_in[4:0] : o_q[4:0];

  always_comb begin
    logic [W-1:0] idx, rr, stage, lowmask;
    logic [1:0]   q;
    logic [5:0]   sh;
    idx   = t_in & ((W'(1) << n) - 1);
    stage = t_in >> n;
    q     = idx[1:0];
    rr    = idx >> 2;
    sh      = {stage[4:0], 1'b0};
    lowmask = (W'(1) << sh) - 1;
    if (n[0] && stage == W'(n[4:1])) begin
      addr = (W'(q[0]) << (n - 5'd1)) | (rr << 1) | W'(q[1]);
    end else begin
      addr    = ((rr >> sh) << (sh + 6'd2)) | (W'(q) << sh) | (rr & lowmask);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_q <= '0;
      r   <= '0;
    end else if (!stall) begin
      if (o_we) o_q <= o_in;
      if (t_we) r   <= addr & ((W'(1) << n) - 1);
    end
  end
endmodule
