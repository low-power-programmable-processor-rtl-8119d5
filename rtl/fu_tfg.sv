// fu_tfg: twiddle factor generator (TFG in the processor figure).
//
// Trigger: linear counter c = {stage, index}, the same value given to the
// address generator. Operand: n = log2(N). Results: the twiddle factor that the
// operand addressed by c must be multiplied with (r, {im, re} in Q1.15) and
// rx2, which is 1 while the counter is in the radix-2 stage (last stage of an
// FFT whose n is odd); the complex adder uses it to pick its operation.
//
// The twiddle is W^e = exp(-j*2*pi*e/NMAX) with the exponent
//   radix-4 stage s, operand q, in-group index j = r[2s-1:0]:  e = q*j*NMAX/4^(s+1)
//   radix-2 stage, operand q, r = index>>2:            e = q[0]*(2r+q[1])*NMAX/N
// (decimation in time: the twiddle is applied before the butterfly). The
// exponent is folded into the first octant: octant o = e / (NMAX/8), remainder
// m; the ROM is read at m or NMAX/8 - m and cos/sin are swapped and negated by
// octant. Only NMAX/8+1 ROM entries are needed, as the paper states.
//
// Pipeline (latency 4, chosen so the twiddle meets the data coming from the
// read LSU at the complex multiplier): trigger -> input register -> exponent
// and ROM address register -> ROM read -> fold and result register. The ROM
// is external (twiddle_rom) and connected through rom_en/rom_addr/rom_data.
module fu_tfg #(
  parameter int unsigned LOG2_NMAX = 14,
  parameter int unsigned W         = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 stall,
  input  logic                 o_we,
  input  logic [W-1:0]         o_in,
  input  logic                 t_we,
  input  logic [W-1:0]         t_in,
  output logic [W-1:0]         r,
  output logic                 rx2,
  output logic                 rom_en,
  output logic [LOG2_NMAX-3:0] rom_addr,
  input  logic [31:0]          rom_data
);
  localparam int unsigned QD = 1 << (LOG2_NMAX - 3);   // NMAX/8

  logic [W-1:0] o_q;
  logic [4:0]   n_eff;

  // stage 1: captured trigger
  logic         v1;
  logic [W-1:0] c1;
  logic [4:0]   n1;
  // stage 2: octant and ROM address
  logic         v2, rx2_2;
  logic [2:0]   oct2;
  logic [LOG2_NMAX-3:0] addr2;
  // stage 3: ROM output valid
  logic         v3, rx2_3;
  logic [2:0]   oct3;

  assign n_eff = o_we ? o_in[4:0] : o_q[4:0];

  // exponent computation from stage-1 registers
  logic [W-1:0] e1;
  logic         rx2_1;
  always_comb begin
    logic [W-1:0] idx, rr, stage, j, qj;
    logic [1:0]   q;
    logic [5:0]   sh;
    idx   = c1 & ((W'(1) << n1) - 1);
    stage = c1 >> n1;
    q     = idx[1:0];
    rr    = idx >> 2;
    sh    = {stage[4:0], 1'b0};
    j     = rr & ((W'(1) << sh) - 1);
    qj    = W'(q) * j;
    rx2_1 = n1[0] && (stage == W'(n1[4:1]));
    if (rx2_1) begin
      e1 = q[0] ? (((rr << 1) | W'(q[1])) << (5'(LOG2_NMAX) - n1)) : '0;
    end else begin
      e1 = qj << (6'(LOG2_NMAX) - sh - 6'd2);
    end
  end

  logic [LOG2_NMAX-4:0] rem1;
  logic [2:0]           oct1;
  assign oct1 = e1[LOG2_NMAX-1 -: 3];
  assign rem1 = e1[LOG2_NMAX-4:0];

  // octant folding of the ROM word
  logic signed [15:0] cs, sn, cosv, sinv;
  assign cs = rom_data[15:0];
  assign sn = rom_data[31:16];
  always_comb begin
    unique case (oct3)
      3'd0: begin cosv =  cs; sinv =  sn; end
      3'd1: begin cosv =  sn; sinv =  cs; end
      3'd2: begin cosv = -sn; sinv =  cs; end
      3'd3: begin cosv = -cs; sinv =  sn; end
      3'd4: begin cosv = -cs; sinv = -sn; end
      3'd5: begin cosv = -sn; sinv = -cs; end
      3'd6: begin cosv =  sn; sinv = -cs; end
      default: begin cosv = cs; sinv = -sn; end
    endcase
  end

  assign rom_en   = v2 && !stall;
  assign rom_addr = addr2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_q <= '0; v1 <= 1'b0; c1 <= '0; n1 <= '0;
      v2 <= 1'b0; rx2_2 <= 1'b0; oct2 <= '0; addr2 <= '0;
      v3 <= 1'b0; rx2_3 <= 1'b0; oct3 <= '0;
      r <= '0; rx2 <= 1'b0;
    end else if (!stall) begin
      if (o_we) o_q <= o_in;
      v1 <= t_we;
      if (t_we) begin
        c1 <= t_in;
        n1 <= n_eff;
      end
      v2 <= v1;
      if (v1) begin
        rx2_2 <= rx2_1;
        oct2  <= oct1;
        addr2 <= oct1[0] ? (LOG2_NMAX-2)'(QD - rem1) : (LOG2_NMAX-2)'(rem1);
      end
      v3 <= v2;
      if (v2) begin
        rx2_3 <= rx2_2;
        oct3  <= oct2;
      end
      if (v3) begin
        r   <= {-sinv, cosv};   // W = cos - j sin
        rx2 <= rx2_3;
      end
    end
  end
endmodule
