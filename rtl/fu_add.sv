// fu_add: 32-bit adder function unit (ADD in the processor figure).
//
// Operand port o is a register loaded by a move; a move into the trigger port
// t starts the operation r = o + t. If o and t are written in the same cycle,
// the new operand is used (usual TTA rule). The result register updates one
// clock after the trigger and holds until the next trigger. In the FFT program
// the unit is the linear counter: o = 1 and its result is moved back into its
// own trigger every cycle.
// The paper takes this unit from a standard component library; the one-cycle
// latency and the reset value 0 are this design's choices.
// stall (the global lock) freezes all state.
module fu_add #(
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
  logic [W-1:0] o_eff;

  assign o_eff = o_we ? o_in : o_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_q <= '0;
      r   <= '0;
    end else if (!stall) begin
      if (o_we) o_q <= o_in;
      if (t_we) r   <= o_eff + t_in;
    end
  end
endmodule
