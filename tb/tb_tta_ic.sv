// tb_tta_ic: random instructions through the transport network. Each has
// distinct destinations (one writer per port) and at most one register of
// the register file as a source. The expected per-port write enables and
// data are worked out here from the numeric source and destination codes:
// 0 none, 1 immediate, 2..9 the result ports of ADD, SH, AG, TFG, DLY, CMUL,
// CADD, LSU read, 10..17 registers 0..7. Also checked: the register read
// address, the 1-bit bus (rx2) move, and that nothing is written for an
// invalid instruction.
module tb_tta_ic;
  import fft_tta_pkg::*;
  logic clk = 0, rst_n = 0, valid;
  instr_t instr;
  fu_out_t fu;
  logic [2:0] rf_raddr;
  logic [31:0] dst_we;
  logic [31:0] dst_data [32];
  logic b_we, b_val;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tta_ic dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] vals [18];
    logic [31:0] exp_we, exp_data [32];
    int reg_sel;
    bit used [32];
    instr = '0; valid = 0; fu = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      instr.imm = $urandom;
      instr.b_move = 1'($urandom);
      fu.add_r = $urandom; fu.sh_r = $urandom; fu.ag_r = $urandom; fu.tfg_r = $urandom;
      fu.dly_r = $urandom; fu.cmul_r = $urandom; fu.cadd_r = $urandom; fu.lsur_r = $urandom;
      fu.rf_r = $urandom; fu.tfg_rx2 = 1'($urandom);
      valid = $urandom_range(7) != 0;
      vals[0] = 0; vals[1] = instr.imm;
      vals[2] = fu.add_r; vals[3] = fu.sh_r; vals[4] = fu.ag_r; vals[5] = fu.tfg_r;
      vals[6] = fu.dly_r; vals[7] = fu.cmul_r; vals[8] = fu.cadd_r; vals[9] = fu.lsur_r;
      for (int r = 10; r < 18; r++) vals[r] = fu.rf_r;
      reg_sel = $urandom_range(7);
      foreach (used[d]) used[d] = 0;
      exp_we = '0;
      foreach (exp_data[d]) exp_data[d] = '0;
      for (int s = 0; s < int'(NBUS); s++) begin
        int src, dst;
        src = $urandom_range(17);
        if (src >= 10) src = 10 + reg_sel;
        dst = $urandom_range(29);
        if (used[dst]) dst = 0;
        if (dst != 0) used[dst] = 1;
        instr.slot[s].src = CW'(src);
        instr.slot[s].dst = CW'(dst);
        if (dst != 0 && valid) begin
          exp_we[dst] = 1;
          exp_data[dst] = vals[src];
        end
      end
      #1;
      chk(dst_we == exp_we, $sformatf("write enables %h expected %h", dst_we, exp_we));
      for (int d = 1; d < 30; d++)
        if (exp_we[d]) chk(dst_data[d] == exp_data[d], $sformatf("port %0d data %h expected %h", d, dst_data[d], exp_data[d]));
      for (int s = 0; s < int'(NBUS); s++)
        if (instr.slot[s].src >= 10) chk(rf_raddr == 3'(reg_sel), "register read address");
      chk(b_we == (valid && instr.b_move), "1-bit bus move");
      chk(b_val == fu.tfg_rx2, "1-bit bus value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
