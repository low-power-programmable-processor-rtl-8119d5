// tb_loop_buffer: random writes and reads of the 4-entry loop buffer against a
// reference; checks one-cycle read latency, hold while not reading, and that
// a read of the entry being written in the same cycle returns the new word.
module tb_loop_buffer;
  logic clk = 0, wr, rd;
  logic [1:0] widx, ridx;
  logic [132:0] wdata, rdata, exp_r;
  logic [132:0] model [4];
  int checks = 0, failures = 0, bypass = 0;
  always #5 clk = ~clk;
  loop_buffer dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr = 0; rd = 0; widx = 0; ridx = 0; wdata = 0;
    for (int a = 0; a < 4; a++) begin
      @(negedge clk); wr = 1; widx = 2'(a); wdata = {5'(a), 128'(a)}; model[a] = wdata;
    end
    @(negedge clk); wr = 0; rd = 1; ridx = 0;
    @(posedge clk); #1; exp_r = model[0];
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      wr = $urandom_range(1); rd = $urandom_range(1);
      widx = 2'($urandom); ridx = 2'($urandom);
      wdata = {5'($urandom), $urandom, $urandom, $urandom, $urandom};
      if (rd) exp_r = (wr && widx == ridx) ? wdata : model[ridx];
      if (rd && wr && widx == ridx) bypass++;
      @(posedge clk); #1;
      if (wr) model[widx] = wdata;
      checks++;
      if (rdata !== exp_r) begin failures++; if (failures < 10) $display("FAIL k=%0d", k); end
    end
    checks++; if (bypass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
