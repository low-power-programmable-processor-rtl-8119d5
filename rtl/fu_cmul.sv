// fu_cmul: complex multiplier (CMUL in the processor figure).
//
// Trigger: data sample a, operand: twiddle w, both {im, re} with 16-bit
// two's-complement parts (w in Q1.15). Result after one clock:
//   re = (a.re*w.re - a.im*w.im) >>> 16
//   im = (a.re*w.im + a.im*w.re) >>> 16
// i.e. the Q1.15 product divided by two, which keeps a butterfly from
// overflowing. Four multipliers and two adders, as in the paper; the divide by
// two is the paper's, truncation (no rounding) is this design's choice. The
// only input that wraps is a.re = a.im = -32768 with |w| at full scale.
module fu_cmul (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        o_we,
  input  logic [31:0] o_in,
  input  logic        t_we,
  input  logic [31:0] t_in,
  output logic [31:0] r
);
  import fft_tta_pkg::*;

  cplx_t w_q, w, a;
  logic signed [31:0] p_rr, p_ii, p_ri, p_ir;
  logic signed [32:0] s_re, s_im;

  assign w = o_we ? cplx_t'(o_in) : w_q;
  assign a = cplx_t'(t_in);

  assign p_rr = a.re * w.re;
  assign p_ii = a.im * w.im;
  assign p_ri = a.re * w.im;
  assign p_ir = a.im * w.re;
  assign s_re = 33'(p_rr) - 33'(p_ii);
  assign s_im = 33'(p_ri) + 33'(p_ir);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q <= '0;
      r   <= '0;
    end else if (!stall) begin
      if (o_we) w_q <= cplx_t'(o_in);
      if (t_we) r <= {s_im[31:16], s_re[31:16]};
    end
  end
endmodule
