// tb_par_mem: random pairs of reads or writes (one or both ports valid) on the
// parallel memory logic with two banked memories (reduced to 2 x 512 words).
// The requester holds its pair while lock is high, as the frozen core does.
// Checks: lock is raised exactly for pairs whose two addresses have the same
// XOR parity, for one cycle; read data of an accepted pair appears on the next
// cycle and matches a reference memory; outputs do not change across the
// cycle that follows a lock; each memory gets only addresses of its parity.
module tb_par_mem;
  import fft_tta_pkg::*;
  localparam int AW = 10;
  logic clk = 0, rst_n, lock;
  mem_pair_t req;
  logic [31:0] rdata_a, rdata_b;
  logic [1:0] m_en, m_we;
  logic [AW-2:0] m_addr [2];
  logic [31:0] m_wdata [2], m_rdata [2];
  int checks = 0, failures = 0, locks = 0, conflicts = 0;
  always #5 clk = ~clk;
  par_mem #(.AW(AW)) dut (.*);
  for (genvar m = 0; m < 2; m++) begin : g_m
    logic [AW-2:0] be;
    dmem_bank #(.LOG2_NMAX(AW)) u_bank (.clk(clk), .en(m_en[m]), .we(m_we[m]), .addr(m_addr[m]),
      .wdata(m_wdata[m]), .rdata(m_rdata[m]), .blk_en(be));
  end
  logic [31:0] model [1 << AW];
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic bit par(logic [31:0] a);
    return ^a[AW-1:0];
  endfunction
  initial begin
    bit exp_rd, exp_va, exp_vb, was_lock;
    logic [31:0] ea, eb, la, lb;
    rst_n = 0; req = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // initialise memory through the pair port (no conflicts: parities differ)
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk);
      req = '0; req.valid_a = 1; req.we = 1; req.addr_a = a; req.wdata_a = $urandom;
      model[a] = req.wdata_a;
    end
    exp_rd = 0; was_lock = 0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      // check what the previous accepted read returns
      if (was_lock) chk(rdata_a == la && rdata_b == lb, "outputs changed after lock");
      else if (exp_rd) begin
        if (exp_va) chk(rdata_a == ea, $sformatf("rdata_a %h exp %h", rdata_a, ea));
        if (exp_vb) chk(rdata_b == eb, $sformatf("rdata_b %h exp %h", rdata_b, eb));
      end
      if (!was_lock) begin
        // previous request accepted; new request (held through a lock)
        req.valid_a = $urandom_range(3) != 0; req.valid_b = $urandom_range(3) != 0;
        req.we = $urandom_range(1);
        req.addr_a = $urandom_range((1 << AW) - 1); req.addr_b = $urandom_range((1 << AW) - 1);
        if (req.addr_a == req.addr_b) req.addr_b = req.addr_b ^ 3;
        req.wdata_a = $urandom; req.wdata_b = $urandom;
      end
      #1;
      begin
        bit conf;
        conf = req.valid_a && req.valid_b && par(req.addr_a) == par(req.addr_b);
        if (!was_lock) begin
          chk(lock == conf, "lock iff same parity");
          if (conf) conflicts++;
        end else chk(!lock, "lock lasts one cycle");
        if (lock) locks++;
        for (int m = 0; m < 2; m++)
          if (m_en[m]) chk((req.valid_a && m_addr[m] == req.addr_a[AW-1:1] && par(req.addr_a) == m) ||
                           (req.valid_b && m_addr[m] == req.addr_b[AW-1:1] && par(req.addr_b) == m), "routing");
      end
      la = rdata_a; lb = rdata_b;
      if (!lock) begin
        exp_rd = !req.we; exp_va = req.valid_a; exp_vb = req.valid_b;
        ea = model[req.addr_a[AW-1:0]]; eb = model[req.addr_b[AW-1:0]];
        if (req.we) begin
          if (req.valid_a) model[req.addr_a[AW-1:0]] = req.wdata_a;
          if (req.valid_b) model[req.addr_b[AW-1:0]] = req.wdata_b;
        end
      end
      was_lock = lock;
      @(posedge clk);
    end
    chk(locks == conflicts && locks > 0, $sformatf("locks %0d conflicts %0d", locks, conflicts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
