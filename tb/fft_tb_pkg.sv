// fft_tb_pkg: program builder and reference helpers for the processor tests.
//
// build_fft_prog(n) returns the FFT program for N = 2^n points as a list of
// instruction words:
//   0..3   setup: n to AG and TFG operands, counter (ADD) set to o=1, r=0,
//          loop count K = M-9 to the GCU, where M = stages*N
//   4..12  prologue: the kernel's moves switched on one pipeline step at a
//          time; the last one also starts the loop buffer (body length 1)
//   13     kernel: all ten buses busy, replayed K times from the loop buffer
//   14..22 epilogue: moves switched off as the pipeline drains
//   23     halt
// The per-sample schedule (counter value c moved at cycle t):
//   t   : ADD.r -> ADD.t, AG.t, TFG.t
//   t+1 : AG.r  -> LSUr.t, DLY.t
//   t+4 : LSUr.r -> CMUL.t ; TFG.r -> CMUL.o
//   t+5 : CMUL.r -> CADD.t ; TFG.rx2 -> CADD.rx2 (1-bit bus)
//   t+9 : CADD.r -> LSUw.o ; DLY.r -> LSUw.t
// The complex adder gets four extra triggers at the end to flush its last
// results and return its counter to zero, and the delay unit keeps shifting
// (with a repeated dummy address) until the last result address is out.
package fft_tb_pkg;
  import fft_tta_pkg::*;

  typedef instr_t prog_t [$];

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    return i;
  endfunction

  // put a move on the first free bus of i
  function automatic void mv(ref instr_t i, input src_e s, input dst_e d);
    for (int k = 0; k < int'(NBUS); k++) begin
      if (i.slot[k].dst == DST_NONE) begin
        i.slot[k].src = s;
        i.slot[k].dst = d;
        return;
      end
    end
    $fatal(1, "no free bus");
  endfunction

  function automatic int stages(int n);
    return (n + 1) / 2;
  endfunction

  function automatic instr_t fft_step(int tau, int m);
    instr_t i;
    int c;
    i = nop();
    c = tau;
    if (c >= 0 && c < m) begin
      mv(i, SRC_ADD, DST_ADD_T); mv(i, SRC_ADD, DST_AG_T); mv(i, SRC_ADD, DST_TFG_T);
    end
    c = tau - 1;
    if (c >= 0 && c < m) mv(i, SRC_AG, DST_LSUR_T);
    if (c >= 0 && c < m + 8) mv(i, SRC_AG, DST_DLY_T);
    c = tau - 4;
    if (c >= 0 && c < m) begin
      mv(i, SRC_LSUR, DST_CMUL_T); mv(i, SRC_TFG, DST_CMUL_O);
    end
    c = tau - 5;
    if (c >= 0 && c < m + 4) begin
      mv(i, SRC_CMUL, DST_CADD_T);
      i.b_move = 1'b1;
    end
    c = tau - 9;
    if (c >= 0 && c < m) begin
      mv(i, SRC_CADD, DST_LSUW_O); mv(i, SRC_DLY, DST_LSUW_T);
    end
    return i;
  endfunction

  function automatic prog_t build_fft_prog(int n);
    prog_t p;
    instr_t i;
    int m, kk;
    m  = stages(n) << n;
    kk = m - 9;
    i = nop(); i.imm = 32'(n); mv(i, SRC_IMM, DST_AG_O); mv(i, SRC_IMM, DST_TFG_O); p.push_back(i);
    i = nop(); i.imm = 32'd1;  mv(i, SRC_IMM, DST_ADD_O); p.push_back(i);
    i = nop(); i.imm = '1;     mv(i, SRC_IMM, DST_ADD_T); p.push_back(i);
    i = nop(); i.imm = 32'(kk); mv(i, SRC_IMM, DST_GCU_LCNT); p.push_back(i);
    for (int tau = 0; tau <= 8; tau++) begin
      i = fft_step(tau, m);
      if (tau == 8) begin
        i.imm = 32'd1; mv(i, SRC_IMM, DST_GCU_LBUF);
      end
      p.push_back(i);
    end
    p.push_back(fft_step(9, m));
    for (int tau = m; tau <= m + 8; tau++) p.push_back(fft_step(tau, m));
    i = nop(); mv(i, SRC_NONE, DST_GCU_HALT); p.push_back(i);
    return p;
  endfunction

  // instructions executed by the FFT program (without lock cycles)
  function automatic int fft_instr_count(int n);
    return 4 + 9 + (stages(n) << n) - 9 + 9 + 1;
  endfunction

  // memory address that input sample m must be stored at (mixed-radix digit
  // reversal: radix-2 digit on top for odd n, then radix-4 digits)
  function automatic int in_addr(int m, int n);
    int a, k, nb;
    a = 0;
    nb = n;
    k = m;
    if (n % 2 == 1) begin
      a  = (k & 1) << (n - 1);
      k  = k >> 1;
      nb = n - 1;
    end
    for (int d = 0; d < nb / 2; d++) begin
      a = a | (((k >> (2 * d)) & 3) << (nb - 2 - 2 * d));
    end
    return a;
  endfunction

  // total output scaling of the processor: 1/8 per radix-4 stage (CMUL /2,
  // CADD /4) and 1/4 for the radix-2 stage (CMUL /2, CADD /2)
  function automatic real out_scale(int n);
    real s;
    s = 1.0;
    for (int k = 0; k < n / 2; k++) s = s / 8.0;
    if (n % 2 == 1) s = s / 4.0;
    return s;
  endfunction
endpackage
