// fu_cadd: complex adder with serial input (CADD in the processor figure).
//
// Computes one radix-4 butterfly or two radix-2 butterflies on four complex
// samples a, b, c, d that arrive one per trigger on a single input port, so
// that the FFT kernel needs only one move per sample. An internal 2-bit counter
// (cnt) counts the triggers. Samples are collected in a loading buffer; when the
// fourth arrives, all four move into a hold buffer and the four results come
// out on the following triggers, while the next group is being loaded:
//
//   rx2 cnt  result                    rx2 cnt  result
//    0  00   (a +  b +  c +  d)/4       1  00   (a + b)/2
//    0  01   (a - ib -  c + id)/4       1  01   (a - b)/2
//    0  10   (a -  b +  c -  d)/4       1  10   (c + d)/2
//    0  11   (a + ib -  c - id)/4       1  11   (c - d)/2
//
// Timing: result k of a group (k = 0..3) appears one clock after the trigger
// that brings sample 3+k of the stream, i.e. the trigger carrying d already
// produces result 0, and results follow their inputs by three triggers. The rx2 operand
// (written over the 1-bit bus) is sampled with the first sample of a group.
// The table, the serial port and the scaling are the paper's. Its printed
// row cnt=01 for radix-4 reads "a - i*b + c + i*d", which is not a butterfly
// output; the standard row a - ib - c + id is used. The double buffering,
// result timing and truncating shifts are this design's choices.
module fu_cadd (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        rx2_we,
  input  logic        rx2_in,
  input  logic        t_we,
  input  logic [31:0] t_in,
  output logic [31:0] r
);
  import fft_tta_pkg::*;

  logic [1:0] cnt;
  cplx_t      la, lb, lc;          // loading buffer
  cplx_t      ha, hb, hc, hd;      // hold buffer
  logic       rx2_q, rx2_grp, rx2_hold;
  logic       rx2_eff;

  assign rx2_eff = rx2_we ? rx2_in : rx2_q;

  function automatic cplx_t bfly(input logic rx2, input logic [1:0] k,
                                 input cplx_t a, input cplx_t b,
                                 input cplx_t c, input cplx_t d);
    logic signed [17:0] re, im;
    cplx_t res;
    if (!rx2) begin
      unique case (k)
        2'd0: begin re = 18'(a.re) + 18'(b.re) + 18'(c.re) + 18'(d.re);
                    im = 18'(a.im) + 18'(b.im) + 18'(c.im) + 18'(d.im); end
        2'd1: begin re = 18'(a.re) + 18'(b.im) - 18'(c.re) - 18'(d.im);
                    im = 18'(a.im) - 18'(b.re) - 18'(c.im) + 18'(d.re); end
        2'd2: begin re = 18'(a.re) - 18'(b.re) + 18'(c.re) - 18'(d.re);
                    im = 18'(a.im) - 18'(b.im) + 18'(c.im) - 18'(d.im); end
        default: begin re = 18'(a.re) - 18'(b.im) - 18'(c.re) + 18'(d.im);
                       im = 18'(a.im) + 18'(b.re) - 18'(c.im) - 18'(d.re); end
      endcase
      res.re = 16'(re >>> 2);
      res.im = 16'(im >>> 2);
    end else begin
      unique case (k)
        2'd0: begin re = 18'(a.re) + 18'(b.re); im = 18'(a.im) + 18'(b.im); end
        2'd1: begin re = 18'(a.re) - 18'(b.re); im = 18'(a.im) - 18'(b.im); end
        2'd2: begin re = 18'(c.re) + 18'(d.re); im = 18'(c.im) + 18'(d.im); end
        default: begin re = 18'(c.re) - 18'(d.re); im = 18'(c.im) - 18'(d.im); end
      endcase
      res.re = 16'(re >>> 1);
      res.im = 16'(im >>> 1);
    end
    return res;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      la <= '0; lb <= '0; lc <= '0;
      ha <= '0; hb <= '0; hc <= '0; hd <= '0;
      rx2_q <= 1'b0; rx2_grp <= 1'b0; rx2_hold <= 1'b0;
      r <= '0;
    end else if (!stall) begin
      if (rx2_we) rx2_q <= rx2_in;
      if (t_we) begin
        cnt <= cnt + 2'd1;
        unique case (cnt)
          2'd0: begin
            la <= cplx_t'(t_in);
            rx2_grp <= rx2_eff;
            r <= bfly(rx2_hold, 2'd1, ha, hb, hc, hd);
          end
          2'd1: begin
            lb <= cplx_t'(t_in);
            r <= bfly(rx2_hold, 2'd2, ha, hb, hc, hd);
          end
          2'd2: begin
            lc <= cplx_t'(t_in);
            r <= bfly(rx2_hold, 2'd3, ha, hb, hc, hd);
          end
          default: begin
            ha <= la; hb <= lb; hc <= lc; hd <= cplx_t'(t_in);
            rx2_hold <= rx2_grp;
            r <= bfly(rx2_grp, 2'd0, la, lb, lc, cplx_t'(t_in));
          end
        endcase
      end
    end
  end
endmodule
