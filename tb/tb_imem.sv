// tb_imem: loads random 133-bit words through the host port and fetches them
// back; checks the one-cycle fetch latency and that the output holds while
// the fetch enable is low.
module tb_imem;
  logic clk = 0, en, h_we;
  logic [5:0] addr, h_addr;
  logic [132:0] rdata, h_wdata, held;
  logic [132:0] model [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  imem dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    en = 0; h_we = 0; addr = 0; h_addr = 0; h_wdata = 0;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      h_we = 1; h_addr = 6'(a);
      h_wdata = {5'($urandom), $urandom, $urandom, $urandom, $urandom};
      model[a] = h_wdata;
    end
    @(negedge clk); h_we = 0;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      en = $urandom_range(3) != 0; addr = 6'($urandom);
      held = rdata;
      @(posedge clk); #1;
      checks++;
      if (en ? (rdata !== model[addr]) : (rdata !== held)) begin
        failures++; if (failures < 10) $display("FAIL addr %0d en %0d", addr, en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
