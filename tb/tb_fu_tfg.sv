// tb_fu_tfg: drives the twiddle generator (with its ROM) by a counter through
// all stages of FFTs of 2^6 .. 2^11 points and 2^14 points, one trigger per
// cycle as in the FFT kernel. Each result, 4 cycles after its trigger, is
// compared with exp(-j*2*pi*e/N) computed here, where e is q*j*N/4^(s+1) for
// a radix-4 stage (q = operand, j = position in the group) and q0*(2r+q1) for
// the radix-2 stage; tolerance 2 LSB. rx2 must be 1 exactly in the radix-2
// stage.
module tb_fu_tfg;
  logic clk = 0, rst_n, stall, o_we, t_we, rx2, rom_en;
  logic [31:0] o_in, t_in, r, rom_data;
  logic [11:0] rom_addr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fu_tfg dut (.*);
  twiddle_rom u_rom (.clk(clk), .en(rom_en), .addr(rom_addr), .data(rom_data));
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  initial begin repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  typedef struct { real re; real im; bit rx2; } tw_t;
  tw_t pipe [$];

  function automatic tw_t ref_tw(int n, int s, int idx);
    tw_t t;
    int q, e, nn, j;
    nn = 1 << n; q = idx & 3;
    t.rx2 = (n % 2 == 1) && (s == (n - 1) / 2);
    if (t.rx2) e = (q & 1) * (2 * (idx >> 2) + (q >> 1));
    else begin
      j = (idx >> 2) % (1 << (2 * s));
      e = q * j * (nn >> (2 * s + 2));
    end
    t.re = 32768.0 * $cos(2.0 * 3.14159265358979323846 * e / nn);
    t.im = -32768.0 * $sin(2.0 * 3.14159265358979323846 * e / nn);
    return t;
  endfunction

  task automatic run_size(int n);
    int total;
    total = ((n + 1) / 2) << n;
    @(negedge clk); o_we = 1; o_in = n; t_we = 0;
    pipe.delete();
    for (int c = 0; c < total + 3; c++) begin
      @(negedge clk);
      o_we = 0;
      t_we = (c < total); t_in = c;
      if (c < total) pipe.push_back(ref_tw(n, c >> n, c & ((1 << n) - 1)));
      @(posedge clk); #1;
      if (c >= 3) begin
        tw_t e;
        e = pipe.pop_front();
        checks++;
        if (fabs(real'($signed(r[15:0])) - e.re) > 2.0 || fabs(real'($signed(r[31:16])) - e.im) > 2.0 || rx2 != e.rx2) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d r=(%0d,%0d) exp=(%f,%f) rx2=%b/%b", n, c - 3,
            $signed(r[15:0]), $signed(r[31:16]), e.re, e.im, rx2, e.rx2);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; stall = 0; o_we = 0; t_we = 0; o_in = 0; t_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 6; n <= 11; n++) run_size(n);
    run_size(14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
