// tb_fu_sh: checks shift left, arithmetic and logical shift right against
// bit-loop reference shifts, with random amounts and stalls.
module tb_fu_sh;
  logic clk = 0, rst_n, stall, o_we;
  logic [1:0] t_op;
  logic [31:0] o_in, t_in, r, amt_model, exp_r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_sh dut (.*);
  function automatic logic [31:0] ref_shift(logic [1:0] op, logic [31:0] v, int a);
    logic [31:0] x;
    x = v;
    for (int k = 0; k < a; k++) begin
      if (op == 2'd1) x = {x[30:0], 1'b0};
      else if (op == 2'd2) x = {x[31], x[31:1]};
      else x = {1'b0, x[31:1]};
    end
    return x;
  endfunction
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rst_n = 0; stall = 0; o_we = 0; t_op = 0; o_in = 0; t_in = 0; amt_model = 0; exp_r = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      stall = ($urandom_range(7) == 0);
      o_we = $urandom_range(1); t_op = 2'($urandom_range(3));
      o_in = $urandom; t_in = $urandom;
      if (!stall) begin
        if (o_we) amt_model = o_in;
        if (t_op != 0) exp_r = ref_shift(t_op, t_in, int'(amt_model[4:0]));
      end
      @(posedge clk); #1;
      checks++;
      if (r !== exp_r) begin failures++; if (failures < 10) $display("FAIL op=%0d r=%h exp=%h", t_op, r, exp_r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
