// tb_dmem_bank: random reads and writes over the whole default 8192-word bank
// against a reference array; checks one-cycle read latency, output hold while
// idle, and that exactly the block holding the address is enabled: block 0
// for 0..31, block i for 2^(4+i) .. 2^(5+i)-1 (sizes 32, 32, 64, ..., 4096).
module tb_dmem_bank;
  logic clk = 0, en, we;
  logic [12:0] addr, blk_en;
  logic [31:0] wdata, rdata;
  logic [31:0] model [8192];
  bit valid [8192];
  int checks = 0, failures = 0;
  int used [9];
  always #5 clk = ~clk;
  dmem_bank dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  function automatic int ref_blk(int a);
    if (a < 32) return 0;
    for (int i = 1; i <= 8; i++) if (a >= (16 << i) && a < (32 << i)) return i;
    return -1;
  endfunction
  initial begin
    logic [31:0] held;
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int k = 0; k < 30000; k++) begin
      @(negedge clk);
      en = $urandom_range(3) != 0; we = $urandom_range(1);
      // bias towards small addresses so every block is used
      addr = 13'($urandom_range(8191) >> $urandom_range(8));
      wdata = $urandom;
      #1;
      if (en) begin
        chk(blk_en == (13'(1) << ref_blk(int'(addr))), $sformatf("block enable %b for %0d", blk_en, addr));
        used[ref_blk(int'(addr))]++;
      end else chk(blk_en == 0, "no block enabled while idle");
      held = rdata;
      @(posedge clk); #1;
      if (en && we) begin model[addr] = wdata; valid[addr] = 1; end
      if (en && !we && valid[addr]) chk(rdata == model[addr], $sformatf("read %0d: %h exp %h", addr, rdata, model[addr]));
      if (!en || we) chk(rdata == held, "output holds");
    end
    foreach (used[i]) chk(used[i] > 0, $sformatf("block %0d never used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
