// twiddle_rom: single-port synchronous ROM of twiddle-factor samples (LUT).
//
// Entry k (k = 0 .. NMAX/8) holds {sin, cos} of 2*pi*k/NMAX as Q1.15 numbers,
// sin in the upper 16 bits. Only the first octant is stored; the twiddle
// generator folds every other angle onto it. For NMAX = 16384 that is 2049
// entries, as in the paper. Values are round(32768*x) with 1.0 clipped to
// 32767; the table is computed at elaboration by a constant function.
// Timing: when en is high, data shows entry addr from the next cycle and holds
// while en is low.
module twiddle_rom #(
  parameter int unsigned LOG2_NMAX = 14
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic [LOG2_NMAX-3:0]   addr,
  output logic [31:0]            data
);
  localparam int unsigned Q = 1 << (LOG2_NMAX - 3);
  typedef logic [31:0] table_t [Q+1];

  function automatic logic [15:0] q15(real x);
    int v;
    v = int'(x * 32768.0);
    if (v > 32767) v = 32767;
    return 16'(v);
  endfunction

  function automatic table_t gen_table();
    table_t t;
    real th;
    for (int k = 0; k <= int'(Q); k++) begin
      th   = 2.0 * 3.14159265358979323846 * real'(k) / real'(8 * Q);
      t[k] = {q15($sin(th)), q15($cos(th))};
    end
    return t;
  endfunction

  localparam table_t ROM = gen_table();

  always_ff @(posedge clk) begin
    if (en) data <= (addr <= (LOG2_NMAX-2)'(Q)) ? ROM[addr] : 32'h0;
  end
endmodule
