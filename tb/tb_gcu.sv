// tb_gcu: runs a small control program through the control unit, with the
// instruction memory modelled here (one-cycle read, output held while not
// enabled). Each word carries an id and the control moves it performs, which
// the bench feeds back into the unit's ports when the word executes. The
// executed id sequence is compared with an interpreter of the same program:
// loop-buffer loops of length 1, 2 and 4 (K = 3, 4, 2, and K = 1), a jump
// with its delay slot, and halt. Also checked: the instruction memory is
// idle whenever a loop-buffer word is fetched, the number of replayed words,
// and the busy time (words executed + 1 cycles, plus one per lock cycle).
// The program runs twice, without and with random lock cycles.
module tb_gcu;
  localparam int IW = 133;
  logic clk = 0, rst_n = 0, lock = 0, start = 0;
  logic jump_we, lcnt_we, lbuf_we, halt_we;
  logic [31:0] jump_in, lcnt_in, lbuf_in;
  logic imem_en, valid, busy, lb_replay;
  logic [5:0] imem_addr;
  logic [IW-1:0] imem_rdata, instr;
  logic [IW-1:0] prog [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gcu dut (.*);

  always_ff @(posedge clk) if (imem_en) imem_rdata <= prog[imem_addr];

  // word fields
  function automatic logic [IW-1:0] w(int id, int jmp = -1, int lcnt = -1, int lbuf = 0, bit halt = 0);
    logic [IW-1:0] x = '0;
    x[7:0] = 8'(id);
    if (jmp >= 0)  begin x[8] = 1; x[15:9] = 7'(jmp); end
    if (lcnt >= 0) begin x[16] = 1; x[23:17] = 7'(lcnt); end
    if (lbuf > 0)  begin x[24] = 1; x[27:25] = 3'(lbuf); end
    x[28] = halt;
    return x;
  endfunction

  always_comb begin
    jump_we = valid && instr[8];  jump_in = 32'(instr[15:9]);
    lcnt_we = valid && instr[16]; lcnt_in = 32'(instr[23:17]);
    lbuf_we = valid && instr[24]; lbuf_in = 32'(instr[27:25]);
    halt_we = valid && instr[28];
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // reference interpreter
  int exp_ids[$];
  int exp_replays;
  task automatic interpret();
    int a = 0, k = 1;
    exp_ids = {}; exp_replays = 0;
    forever begin
      logic [IW-1:0] x = prog[a];
      exp_ids.push_back(int'(x[7:0]));
      if (x[16]) k = int'(x[23:17]);
      if (x[28]) break;
      if (x[24]) begin
        int l = int'(x[27:25]);
        for (int it = 0; it < k; it++)
          for (int b = 1; b <= l; b++) begin
            exp_ids.push_back(int'(prog[a + b][7:0]));
            if (it > 0) exp_replays++;
          end
        a = a + l + 1;
      end else if (x[8]) begin
        exp_ids.push_back(int'(prog[a + 1][7:0]));
        a = int'(x[15:9]);
      end else a++;
    end
  endtask

  int got_ids[$];
  int replays, lock_cycles, busy_cycles;
  logic imem_en_prev;

  task automatic run(input bit with_lock);
    got_ids = {}; replays = 0; lock_cycles = 0; busy_cycles = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) begin
      lock = with_lock && ($urandom_range(4) == 0);
      @(posedge clk);
      busy_cycles++;
      if (lock) lock_cycles++;
      if (valid && !lock) begin
        got_ids.push_back(int'(instr[7:0]));
        if (lb_replay) begin
          replays++;
          chk(!imem_en_prev, "instruction memory idle while the loop buffer is read");
        end
      end
      if (!lock) imem_en_prev = imem_en;
      @(negedge clk);
      if (busy_cycles > 1000) break;
    end
    lock = 0;
    chk(got_ids.size() == exp_ids.size(), $sformatf("executed %0d words, expected %0d", got_ids.size(), exp_ids.size()));
    foreach (exp_ids[i])
      chk(i < got_ids.size() && got_ids[i] == exp_ids[i],
          $sformatf("word %0d: id %0d expected %0d", i, i < got_ids.size() ? got_ids[i] : -1, exp_ids[i]));
    chk(replays == exp_replays, $sformatf("replays %0d expected %0d", replays, exp_replays));
    chk(busy_cycles == exp_ids.size() + 1 + lock_cycles,
        $sformatf("busy %0d cycles, expected %0d", busy_cycles, exp_ids.size() + 1 + lock_cycles));
    if (with_lock) chk(lock_cycles > 0, "lock occurred");
  endtask

  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    foreach (prog[i]) prog[i] = w(100 + i);
    prog[0]  = w(0, -1, 3);
    prog[1]  = w(1, -1, -1, 2);       // body 2,3 three times
    prog[4]  = w(4, -1, 4, 1);        // body 5 four times
    prog[6]  = w(6, 10);              // jump to 10, 7 is the delay slot
    prog[10] = w(10, -1, 2);
    prog[11] = w(11, -1, -1, 4);      // body 12..15 twice
    prog[16] = w(16, -1, 1, 3);       // body 17..19 once
    prog[20] = w(20, -1, -1, 0, 1);   // halt
    interpret();
    imem_en_prev = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0);
    repeat (5) @(negedge clk);
    chk(!busy, "idle after halt");
    run(1);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
