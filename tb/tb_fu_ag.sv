// tb_fu_ag: for FFT sizes 2^6..2^11 runs the counter through every stage and
// checks that (1) each group of four consecutive counter values addresses the
// four operands of one butterfly: base + q*4^s for a radix-4 stage s, or
// {2r, 2r+N/2, 2r+1, 2r+1+N/2} for the radix-2 stage; (2) every stage touches
// every address exactly once; (3) counter and address have the same XOR
// parity. The expected addresses are built digit by digit, independently of
// the unit's shift-and-mask formula. Latency 1 is checked on every trigger.
module tb_fu_ag;
  logic clk = 0, rst_n, stall, o_we, t_we;
  logic [31:0] o_in, t_in, r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_ag dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic int expected(int n, int s, int idx);
    int q, g, j, span;
    q = idx & 3;
    if (n % 2 == 1 && s == (n - 1) / 2) begin
      int rr;
      rr = idx >> 2;
      return ((q & 1) != 0 ? (1 << (n - 1)) : 0) + 2 * rr + ((q >> 1) & 1);
    end
    span = 1 << (2 * s);
    j = (idx >> 2) % span;                  // position inside the group
    g = (idx >> 2) / span;                  // group number
    return g * span * 4 + j + q * span;
  endfunction

  initial begin
    rst_n = 0; stall = 0; o_we = 0; t_we = 0; o_in = 0; t_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 6; n <= 11; n++) begin
      int nn, ns;
      bit seen [];
      nn = 1 << n; ns = (n + 1) / 2;
      seen = new[nn];
      @(negedge clk); o_we = 1; o_in = n; t_we = 0;
      for (int s = 0; s < ns; s++) begin
        foreach (seen[a]) seen[a] = 0;
        for (int idx = 0; idx < nn; idx++) begin
          @(negedge clk);
          o_we = 0; t_we = 1; t_in = (s << n) + idx;
          @(posedge clk); #1;
          chk(r == expected(n, s, idx), $sformatf("n=%0d s=%0d idx=%0d r=%0d exp=%0d", n, s, idx, r, expected(n, s, idx)));
          chk(^r[15:0] == ^idx[15:0], "parity");
          if (r < nn) seen[r] = 1;
        end
        begin
          int cnt; cnt = 0;
          foreach (seen[a]) cnt += seen[a];
          chk(cnt == nn, $sformatf("n=%0d s=%0d not a permutation (%0d)", n, s, cnt));
        end
      end
    end
    // stall holds the result
    @(negedge clk); stall = 1; t_in = 5; t_we = 1;
    begin logic [31:0] r0; r0 = r; @(posedge clk); #1; chk(r == r0, "stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
