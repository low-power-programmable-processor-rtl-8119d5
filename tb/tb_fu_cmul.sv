// tb_fu_cmul: random complex products compared with (a*w)/65536 rounded down,
// computed in real arithmetic; includes the same-cycle operand rule.
module tb_fu_cmul;
  logic clk = 0, rst_n, stall, o_we, t_we;
  logic [31:0] o_in, t_in, r, w_model;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_cmul dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    real ar, ai, wr, wi;
    int er, ei;
    rst_n = 0; stall = 0; o_we = 0; t_we = 0; o_in = 0; t_in = 0; w_model = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      o_we = $urandom_range(1); t_we = 1; stall = 0;
      o_in = {16'($urandom_range(65534) - 32767), 16'($urandom_range(65534) - 32767)};
      t_in = {16'($urandom_range(65534) - 32767), 16'($urandom_range(65534) - 32767)};
      if (o_we) w_model = o_in;
      ar = real'($signed(t_in[15:0])); ai = real'($signed(t_in[31:16]));
      wr = real'($signed(w_model[15:0])); wi = real'($signed(w_model[31:16]));
      er = int'($floor((ar * wr - ai * wi) / 65536.0));
      ei = int'($floor((ar * wi + ai * wr) / 65536.0));
      @(posedge clk); #1;
      checks++;
      if ($signed(r[15:0]) != 16'(er) || $signed(r[31:16]) != 16'(ei)) begin
        failures++; if (failures < 10) $display("FAIL r=%h exp=(%0d,%0d)", r, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
