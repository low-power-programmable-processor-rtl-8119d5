// tb_fu_cadd: streams random samples into the serial complex adder in groups
// of four, with rx2 random per group, and checks each result (one per
// trigger, group results starting with the trigger of the group's fourth
// sample) against a radix-4 DFT / radix-2 pair computed in real arithmetic
// and scaled by 1/4 or 1/2 (rounded down).
module tb_fu_cadd;
  logic clk = 0, rst_n, stall, rx2_we, rx2_in, t_we;
  logic [31:0] t_in, r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_cadd dut (.*);
  int exp_re [$], exp_im [$];
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // expected outputs of one group
  task automatic expect_group(input real xr[4], input real xi[4], input bit rx2);
    real yr, yi, c, s;
    for (int k = 0; k < 4; k++) begin
      if (!rx2) begin
        yr = 0; yi = 0;
        for (int q = 0; q < 4; q++) begin
          c = $cos(2.0 * 3.14159265358979 * q * k / 4.0);
          s = -$sin(2.0 * 3.14159265358979 * q * k / 4.0);
          yr += xr[q] * c - xi[q] * s;
          yi += xr[q] * s + xi[q] * c;
        end
        exp_re.push_back(int'($floor(yr / 4.0 + 1e-6)));
        exp_im.push_back(int'($floor(yi / 4.0 + 1e-6)));
      end else begin
        int p;
        p = (k < 2) ? 0 : 2;
        yr = (k % 2 == 0) ? xr[p] + xr[p+1] : xr[p] - xr[p+1];
        yi = (k % 2 == 0) ? xi[p] + xi[p+1] : xi[p] - xi[p+1];
        exp_re.push_back(int'($floor(yr / 2.0)));
        exp_im.push_back(int'($floor(yi / 2.0)));
      end
    end
  endtask

  initial begin
    real xr[4], xi[4];
    bit rx2;
    int trig;
    rst_n = 0; stall = 0; rx2_we = 0; rx2_in = 0; t_we = 0; t_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    trig = 0;
    for (int g = 0; g < 500; g++) begin
      rx2 = $urandom_range(1);
      for (int q = 0; q < 4; q++) begin
        @(negedge clk);
        // occasional idle cycles and stalls must not disturb the sequence
        while ($urandom_range(5) == 0) begin
          t_we = 0; rx2_we = 0; stall = $urandom_range(1);
          @(negedge clk);
        end
        stall = 0;
        xr[q] = real'(int'($urandom_range(65535)) - 32768);
        xi[q] = real'(int'($urandom_range(65535)) - 32768);
        t_in = {16'(int'(xi[q])), 16'(int'(xr[q]))};
        t_we = 1;
        rx2_we = (q == 0); rx2_in = rx2;
        if (q == 3) expect_group(xr, xi, rx2);
        @(posedge clk); #1;
        if (trig >= 3) begin
          checks++;
          if ($signed(r[15:0]) != 16'(exp_re[0]) || $signed(r[31:16]) != 16'(exp_im[0])) begin
            failures++;
            if (failures < 10) $display("FAIL trig %0d r=(%0d,%0d) exp=(%0d,%0d)", trig,
                                        int'($signed(r[15:0])), int'($signed(r[31:16])), exp_re[0], exp_im[0]);
          end
          void'(exp_re.pop_front()); void'(exp_im.pop_front());
        end
        trig++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
