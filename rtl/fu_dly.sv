// fu_dly: rotating register used as a delay unit (DLY in the processor figure).
//
// Each move into the trigger port shifts the value into a DEPTH-entry shift
// register; the result port shows the value that was pushed DEPTH triggers
// earlier. In the FFT kernel the read address of every butterfly operand is
// pushed when it is sent to the read LSU and comes out exactly when the
// butterfly result for that operand is stored, which makes the computation in
// place. The paper gives the purpose; DEPTH = 8 matches this design's kernel
// schedule (read address move at cycle 1, write move at cycle 9).
module fu_dly #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned W     = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall,
  input  logic         t_we,
  input  logic [W-1:0] t_in,
  output logic [W-1:0] r
);
  logic [W-1:0] sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
    end else if (!stall && t_we) begin
      sr[0] <= t_in;
      for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
    end
  end

  assign r = sr[DEPTH-1];
endmodule
