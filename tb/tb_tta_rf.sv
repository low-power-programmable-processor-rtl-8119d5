// tb_tta_rf: random writes and reads of the 8x32 register file against a
// reference array; checks read-before-write in the same cycle and stall.
module tb_tta_rf;
  logic clk = 0, rst_n, stall, we;
  logic [2:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [8];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tta_rf dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rst_n = 0; stall = 0; we = 0; waddr = 0; raddr = 0; wdata = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      stall = ($urandom_range(7) == 0);
      we = $urandom_range(1); waddr = 3'($urandom); raddr = 3'($urandom); wdata = $urandom;
      #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; if (failures < 10) $display("FAIL rd %0d %h %h", raddr, rdata, model[raddr]); end
      @(posedge clk);
      if (we && !stall) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
