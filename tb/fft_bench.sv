// fft_bench: test sequence for the whole processor, shared by the reduced and
// the full-size end-to-end testbenches (which instantiate the processor and
// connect it to this module).
//
// 1. A small program checks shifter, register file, jump with its delay slot,
//    and the lock: it writes and reads two addresses of equal parity in one
//    pair, which the parallel memory logic must serialise.
// 2. For every size 2^N_LO .. 2^N_HI it loads the FFT program and a test
//    signal (a strong tone plus pseudo-random samples) in digit-reversed
//    order, runs it, checks the cycle count and compares every output bin with
//    a directly computed DFT scaled as the processor scales (1/8 per radix-4
//    stage, 1/4 for the radix-2 stage), within TOL LSBs per part.
// 3. It counts how often each mechanism happened (lock, loop-buffer replay
//    with instruction memory idle, radix-2 stage, write pair held back by the
//    scheduler) and counts a failure for any that never did.
module fft_bench #(
  parameter int LOG2_NMAX = 10,
  parameter int N_LO      = 6,
  parameter int N_HI      = 10,
  parameter int IMEM_AW   = 6,
  parameter int TOL       = 4
) (
  output logic                      clk,
  output logic                      rst_n,
  output logic                      start,
  input  logic                      busy,
  output logic                      h_imem_we,
  output logic [IMEM_AW-1:0]        h_imem_addr,
  output logic [fft_tta_pkg::IW-1:0] h_imem_wdata,
  output logic                      h_dmem_en,
  output logic                      h_dmem_we,
  output logic [LOG2_NMAX-1:0]      h_dmem_addr,
  output logic [31:0]               h_dmem_wdata,
  input  logic [31:0]               h_dmem_rdata,
  input  logic                      lock,
  input  logic                      imem_fetch,
  input  logic                      lb_replay,
  input  logic                      rx2_stage,
  input  logic                      wq_wait
);
  import fft_tta_pkg::*;
  import fft_tb_pkg::*;

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint n_lock = 0, n_replay_idle = 0, n_rx2 = 0, n_wq = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (lock) n_lock <= n_lock + 1;
    if (lb_replay && !imem_fetch) n_replay_idle <= n_replay_idle + 1;
    if (rx2_stage && busy) n_rx2 <= n_rx2 + 1;
    if (wq_wait) n_wq <= n_wq + 1;
  end

  // watchdog
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_prog(input prog_t p);
    foreach (p[k]) begin
      @(negedge clk);
      h_imem_we = 1'b1; h_imem_addr = IMEM_AW'(k); h_imem_wdata = p[k];
    end
    @(negedge clk);
    h_imem_we = 1'b0;
  endtask

  task automatic dmem_write(input int a, input logic [31:0] d);
    @(negedge clk);
    h_dmem_en = 1'b1; h_dmem_we = 1'b1; h_dmem_addr = LOG2_NMAX'(a); h_dmem_wdata = d;
    @(negedge clk);
    h_dmem_en = 1'b0; h_dmem_we = 1'b0;
  endtask

  task automatic dmem_read(input int a, output logic [31:0] d);
    @(negedge clk);
    h_dmem_en = 1'b1; h_dmem_we = 1'b0; h_dmem_addr = LOG2_NMAX'(a);
    @(negedge clk);
    h_dmem_en = 1'b0;
    d = h_dmem_rdata;
  endtask

  task automatic run(output longint cycles);
    longint t0;
    @(negedge clk);
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    cycles = cyc - t0;
  endtask

  // ---- misc program: SH, RF, jump, lock ----
  task automatic misc_test();
    prog_t p;
    instr_t i;
    logic [31:0] d;
    longint cy, locks0, wq0;
    i = nop(); i.imm = 32'd5;      mv(i, SRC_IMM, DST_SH_O); mv(i, SRC_IMM, DST_RF0); p.push_back(i);      // 0
    i = nop(); i.imm = 32'h100;    mv(i, SRC_IMM, DST_SH_T_SHL); p.push_back(i);                           // 1
    i = nop(); i.imm = 32'd0;      mv(i, SRC_SH, dst_e'(DST_RF0 + 1)); mv(i, SRC_IMM, DST_ADD_O); p.push_back(i); // 2
    i = nop(); i.imm = 32'd0;      mv(i, src_e'(SRC_RF0 + 1), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 3: write 0
    i = nop(); i.imm = 32'd3;      mv(i, SRC_RF0, DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T);
                                   mv(i, SRC_RF0, DST_LSUR_T); p.push_back(i);                             // 4: write 3, read 5
    i = nop(); i.imm = 32'd6;      mv(i, SRC_IMM, DST_LSUR_T); p.push_back(i);                             // 5: read 6 (pair 5,6 conflicts)
    i = nop(); i.imm = 32'd0;      mv(i, SRC_IMM, DST_LSUR_T); p.push_back(i);                             // 6: read 0
    i = nop(); i.imm = 32'd3;      mv(i, SRC_IMM, DST_LSUR_T); mv(i, SRC_LSUR, dst_e'(DST_RF0 + 6)); p.push_back(i); // 7: read 3; data of read 5
    i = nop();                     mv(i, SRC_LSUR, dst_e'(DST_RF0 + 7)); p.push_back(i);                  // 8: data of read 6
    i = nop(); i.imm = 32'd7;      mv(i, SRC_IMM, DST_SH_O); mv(i, SRC_LSUR, dst_e'(DST_RF0 + 2)); p.push_back(i); // 9: data of read 0
    i = nop(); i.imm = 32'd13;     mv(i, SRC_IMM, DST_GCU_JUMP); mv(i, SRC_LSUR, dst_e'(DST_RF0 + 3)); p.push_back(i); // 10: data of read 3, jump
    i = nop(); i.imm = 32'hFFFF_FF00; mv(i, SRC_IMM, DST_SH_T_SHR); p.push_back(i);                      // 11: delay slot
    i = nop(); i.imm = 32'hDEAD;   mv(i, SRC_IMM, dst_e'(DST_RF0 + 4)); p.push_back(i);                  // 12: skipped
    i = nop();                     mv(i, SRC_SH, dst_e'(DST_RF0 + 5)); mv(i, SRC_ADD, dst_e'(DST_RF0 + 4)); p.push_back(i); // 13
    i = nop(); i.imm = 32'd8;      mv(i, src_e'(SRC_RF0 + 5), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 14
    i = nop(); i.imm = 32'd9;      mv(i, src_e'(SRC_RF0 + 4), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 15
    i = nop(); i.imm = 32'd10;     mv(i, src_e'(SRC_RF0 + 2), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 16
    i = nop(); i.imm = 32'd11;     mv(i, src_e'(SRC_RF0 + 3), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 17
    i = nop(); i.imm = 32'd12;     mv(i, src_e'(SRC_RF0 + 6), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 18
    i = nop(); i.imm = 32'd13;     mv(i, src_e'(SRC_RF0 + 7), DST_LSUW_O); mv(i, SRC_IMM, DST_LSUW_T); p.push_back(i); // 19
    i = nop();                     mv(i, SRC_NONE, DST_GCU_HALT); p.push_back(i);                        // 20
    load_prog(p);
    dmem_write(5, 32'h5555_0005);
    dmem_write(6, 32'h6666_0006);
    locks0 = n_lock;
    wq0 = n_wq;
    run(cy);
    // expected: [0]=0x2000 [3]=5 (conflicting write pair), [8]=0xFFFFFFFE
    // (0xFFFFFF00 >>> 7), [9]=0 (ADD: 0 + 0, RF4 not overwritten by the
    // skipped 0xDEAD), [10]=0x2000 [11]=5 (read back after conflict),
    // [12]/[13] the words preloaded at 5 and 6 (conflicting read pair)
    dmem_read(0, d);  check(d == 32'h2000, $sformatf("misc [0]=%h", d));
    dmem_read(3, d);  check(d == 32'd5, $sformatf("misc [3]=%h", d));
    dmem_read(8, d);  check(d == 32'hFFFF_FFFE, $sformatf("misc [8]=%h", d));
    dmem_read(9, d);  check(d == 32'h0, $sformatf("misc [9]=%h (jump)", d));
    dmem_read(10, d); check(d == 32'h2000, $sformatf("misc [10]=%h", d));
    dmem_read(11, d); check(d == 32'd5, $sformatf("misc [11]=%h", d));
    dmem_read(12, d); check(d == 32'h5555_0005, $sformatf("misc [12]=%h", d));
    dmem_read(13, d); check(d == 32'h6666_0006, $sformatf("misc [13]=%h", d));
    // instructions 0..21 minus the skipped one, plus the locks of pairs
    // {0,3}, {5,6} and {0,3}
    check(n_lock - locks0 == 3, $sformatf("misc lock cycles %0d", n_lock - locks0));
    check(n_wq - wq0 == 1, $sformatf("misc write pair waits %0d", n_wq - wq0));
    // 20 instructions executed, 3 lock cycles, 3 cycles to start (first
    // fetch), to end (halt) and to drain the last write pair
    check(cy == 26, $sformatf("misc program took %0d cycles", cy));
  endtask

  // ---- one FFT ----
  task automatic fft_test(input int n);
    int nn, tone;
    real re_in [], im_in [], ct [], st [], sc, xr, xi, er, ei;
    logic [31:0] d;
    logic signed [15:0] gr, gi;
    longint cy, exp_cy, lock0;
    int worst;
    prog_t p;
    nn = 1 << n;
    re_in = new[nn]; im_in = new[nn]; ct = new[nn]; st = new[nn];
    tone = (nn / 3) | 1;
    for (int k = 0; k < nn; k++) begin
      ct[k] = $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(nn));
      st[k] = $sin(2.0 * 3.14159265358979323846 * real'(k) / real'(nn));
    end
    for (int m = 0; m < nn; m++) begin
      int ph;
      ph = (tone * m) % nn;
      re_in[m] = real'(int'(16000.0 * ct[ph]) + int'($urandom_range(16000)) - 8000);
      im_in[m] = real'(int'(16000.0 * st[ph]) + int'($urandom_range(16000)) - 8000);
    end
    p = build_fft_prog(n);
    load_prog(p);
    for (int m = 0; m < nn; m++) begin
      gr = 16'(int'(re_in[m]));
      gi = 16'(int'(im_in[m]));
      dmem_write(in_addr(m, n), {gi, gr});
    end
    lock0 = n_lock;
    run(cy);
    exp_cy = longint'(fft_instr_count(n)) + 3;
    check(n_lock == lock0, $sformatf("N=%0d: %0d lock cycles in FFT", nn, n_lock - lock0));
    check(cy == exp_cy, $sformatf("N=%0d: %0d cycles, expected %0d", nn, cy, exp_cy));
    $display("N=%0d: %0d cycles (%0d stages x N = %0d)", nn, cy, stages(n), stages(n) << n);
    // the paper reports 11.4 us at 450 MHz (5130 cycles) for 1024 points
    if (n == 10) check(cy >= 5079 && cy <= 5181, $sformatf("1024-point FFT took %0d cycles, paper 5130", cy));
    sc = out_scale(n);
    worst = 0;
    for (int k = 0; k < nn; k++) begin
      xr = 0.0; xi = 0.0;
      for (int m = 0; m < nn; m++) begin
        int ph;
        ph = int'((longint'(m) * longint'(k)) % longint'(nn));
        // X[k] = sum x[m] (cos - j sin)
        xr += re_in[m] * ct[ph] + im_in[m] * st[ph];
        xi += im_in[m] * ct[ph] - re_in[m] * st[ph];
      end
      dmem_read(k, d);
      gr = d[15:0]; gi = d[31:16];
      er = real'(gr) - xr * sc;
      ei = real'(gi) - xi * sc;
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (int'(er) > worst) worst = int'(er);
      if (int'(ei) > worst) worst = int'(ei);
      check(er <= real'(TOL) && ei <= real'(TOL),
            $sformatf("N=%0d bin %0d: got (%0d,%0d) want (%f,%f)", nn, k, gr, gi, xr * sc, xi * sc));
    end
    $display("N=%0d: largest error %0d LSB (tone in bin %0d)", nn, worst, tone);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0;
    h_imem_we = 1'b0; h_imem_addr = '0; h_imem_wdata = '0;
    h_dmem_en = 1'b0; h_dmem_we = 1'b0; h_dmem_addr = '0; h_dmem_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    misc_test();
    for (int n = N_LO; n <= N_HI; n++) fft_test(n);
    // every mechanism must have happened
    check(n_lock > 0, "lock never happened");
    check(n_replay_idle > 0, "loop buffer replay never happened");
    check(n_rx2 > 0, "radix-2 stage never happened");
    check(n_wq > 0, "scheduler never held back a write pair");
    $display("mechanisms: lock=%0d replay_idle=%0d rx2=%0d wq_wait=%0d",
             n_lock, n_replay_idle, n_rx2, n_wq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
