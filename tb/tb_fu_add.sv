// tb_fu_add: checks the adder unit: r = o + t one cycle after the trigger,
// the same-cycle operand rule, result hold without a trigger, and stall.
module tb_fu_add;
  logic clk = 0, rst_n, stall, o_we, t_we;
  logic [31:0] o_in, t_in, r, o_model, exp_r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_add dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rst_n = 0; stall = 0; o_we = 0; t_we = 0; o_in = 0; t_in = 0; o_model = 0; exp_r = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      stall = ($urandom_range(7) == 0);
      o_we = $urandom_range(1); t_we = $urandom_range(1);
      o_in = $urandom; t_in = $urandom;
      if (!stall) begin
        if (o_we) o_model = o_in;
        if (t_we) exp_r = o_model + t_in;
      end
      @(posedge clk); #1;
      checks++;
      if (r !== exp_r) begin failures++; if (failures < 10) $display("FAIL r=%h exp=%h", r, exp_r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
