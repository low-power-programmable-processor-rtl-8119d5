// tb_lsu_sched: drives the LSU pair and scheduler as the FFT kernel does (one
// read and one write trigger per cycle, with random gaps and stalls) against
// a memory model that serves one pair per cycle with data on the next cycle.
// Checks: every read returns the addressed word exactly 3 unstalled cycles
// after its trigger; every request is a pair of two reads or two writes made
// of consecutive triggers in order; every written word reaches the memory;
// the write queue is observed holding a pair back.
module tb_lsu_sched;
  import fft_tta_pkg::*;
  logic clk = 0, rst_n, stall;
  logic rd_t_we, wr_o_we, wr_t_we, wq_wait, pending;
  logic [31:0] rd_t_in, wr_o_in, wr_t_in, rd_r, rdata_a, rdata_b;
  mem_pair_t req;
  int checks = 0, failures = 0, waits = 0;
  always #5 clk = ~clk;
  lsu_sched #(.AW(10)) dut (.*);

  logic [31:0] mem [1024];
  logic [31:0] exp_mem [1024];
  int rd_addr_q [$], wr_addr_q [$];
  logic [31:0] wr_data_q [$];
  typedef struct { int due; logic [31:0] val; } pend_t;
  pend_t rd_pend [$];
  int ucyc = 0;   // unstalled cycles
  int rd_cnt = 0;

  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // memory model
  always @(posedge clk) begin
    if (!stall && req.valid_a && req.valid_b) begin
      if (req.we) begin
        int a0, a1;
        a0 = wr_addr_q.pop_front(); a1 = wr_addr_q.pop_front();
        chk(req.addr_a == a0 && req.addr_b == a1, "write pair order");
        chk(req.wdata_a == wr_data_q.pop_front() && req.wdata_b == wr_data_q.pop_front(), "write pair data");
        mem[req.addr_a[9:0]] <= req.wdata_a;
        mem[req.addr_b[9:0]] <= req.wdata_b;
      end else begin
        int a0, a1;
        a0 = rd_addr_q.pop_front(); a1 = rd_addr_q.pop_front();
        chk(req.addr_a == a0 && req.addr_b == a1, "read pair order");
        rdata_a <= mem[req.addr_a[9:0]];
        rdata_b <= mem[req.addr_b[9:0]];
      end
    end
    if (wq_wait) waits++;
  end

  initial begin
    rst_n = 0; stall = 0; rd_t_we = 0; wr_o_we = 0; wr_t_we = 0;
    rd_t_in = 0; wr_o_in = 0; wr_t_in = 0; rdata_a = 0; rdata_b = 0;
    for (int a = 0; a < 1024; a++) begin mem[a] = $urandom; exp_mem[a] = mem[a]; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      stall = ($urandom_range(9) == 0);
      // the two reads of a pair come in consecutive (unstalled) cycles; reads use
      // addresses 0..511, writes 512..1023, so read data is never stale
      rd_t_we = (k < 2800 && $urandom_range(5) != 0) || rd_cnt % 2 == 1;
      wr_t_we = (k < 2800) && ($urandom_range(5) != 0);
      rd_t_in = $urandom_range(511);
      wr_t_in = 512 + $urandom_range(511);
      wr_o_we = wr_t_we; wr_o_in = $urandom;
      if (!stall) begin
        if (rd_t_we) begin
          rd_cnt++;
          rd_addr_q.push_back(rd_t_in);
          rd_pend.push_back('{ucyc + 3, mem[rd_t_in[9:0]]});
        end
        if (wr_t_we) begin
          wr_addr_q.push_back(wr_t_in); wr_data_q.push_back(wr_o_in);
          exp_mem[wr_t_in[9:0]] = wr_o_in;
        end
      end
      #1;
      if (!stall && rd_pend.size() > 0 && rd_pend[0].due == ucyc) begin
        chk(rd_r == rd_pend[0].val, $sformatf("read data %h exp %h k=%0d u=%0d", rd_r, rd_pend[0].val, k, ucyc));
        void'(rd_pend.pop_front());
      end
      @(posedge clk);
      if (!stall) ucyc++;
    end
    // leave an even number of writes so the last pair completes
    @(negedge clk); stall = 0; rd_t_we = 0;
    wr_t_we = (wr_addr_q.size() % 2 == 1); wr_o_we = wr_t_we; wr_t_in = 600; wr_o_in = 32'h1234;
    if (wr_t_we) begin wr_addr_q.push_back(600); wr_data_q.push_back(32'h1234); exp_mem[600] = 32'h1234; end
    @(negedge clk); wr_t_we = 0; wr_o_we = 0;
    repeat (10) @(negedge clk);
    chk(!pending, "scheduler drained");
    chk(rd_pend.size() == 0, "all reads returned");
    for (int a = 512; a < 1024; a++) chk(mem[a] == exp_mem[a], $sformatf("mem[%0d]", a));
    chk(waits > 0, "write pair never held back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
