// fu_sh: 32-bit shifter function unit (SH in the processor figure).
//
// The operand port o holds the shift amount (its five LSBs are used). The
// trigger comes in three flavours selected by the destination code the move
// uses: shift left, arithmetic shift right and logical shift right of the
// trigger value. Result after one clock, held until the next trigger.
// The paper only names the unit; the operation set follows the common TTA
// library shifter and is this design's choice. The FFT kernel does not use it.
module fu_sh #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall,
  input  logic         o_we,
  input  logic [W-1:0] o_in,
  input  logic [1:0]   t_op,    // 0: no trigger, 1: shl, 2: shr (arith), 3: shru
  input  logic [W-1:0] t_in,
  output logic [W-1:0] r
);
  logic [W-1:0] o_q;
  logic [4:0]   amt;

  assign amt = o_we ? o_in[4:0] : o_q[4:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_q <= '0;
      r   <= '0;
    end else if (!stall) begin
      if (o_we) o_q <= o_in;
      unique case (t_op)
        2'd1:    r <= t_in << amt;
        2'd2:    r <= W'($signed(t_in) >>> amt);
        2'd3:    r <= t_in >> amt;
        default: ;
      endcase
    end
  end
endmodule
