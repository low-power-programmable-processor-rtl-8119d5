// tb_fu_dly: pushes random values with random gaps and stalls and checks that
// the output is always the value pushed DEPTH (8) triggers earlier.
module tb_fu_dly;
  logic clk = 0, rst_n, stall, t_we;
  logic [31:0] t_in, r;
  logic [31:0] hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_dly dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rst_n = 0; stall = 0; t_we = 0; t_in = 0;
    for (int k = 0; k < 8; k++) hist.push_back(32'd0);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      stall = ($urandom_range(7) == 0);
      t_we = ($urandom_range(3) != 0); t_in = $urandom;
      @(posedge clk);
      if (t_we && !stall) begin hist.push_back(t_in); void'(hist.pop_front()); end
      #1;
      checks++;
      if (r !== hist[0]) begin failures++; if (failures < 10) $display("FAIL r=%h exp=%h", r, hist[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
