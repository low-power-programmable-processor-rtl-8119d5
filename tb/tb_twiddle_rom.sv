// tb_twiddle_rom: reads every entry of the default 2049-entry ROM and compares
// cos and sin of 2*pi*k/16384 (Q1.15, computed here) within 1 LSB; checks the
// one-cycle read latency and that the output holds while en is low.
module tb_twiddle_rom;
  logic clk = 0, en;
  logic [11:0] addr;
  logic [31:0] data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  twiddle_rom dut (.*);
  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    real th, c, s;
    logic [31:0] held;
    en = 0; addr = 0;
    for (int k = 0; k <= 2048; k++) begin
      @(negedge clk); en = 1; addr = 12'(k);
      @(posedge clk); #1;
      th = 2.0 * 3.14159265358979323846 * k / 16384.0;
      c = 32768.0 * $cos(th); s = 32768.0 * $sin(th);
      if (c > 32767.0) c = 32767.0;
      checks++;
      if (fabs(real'($signed(data[15:0])) - c) > 1.0 || fabs(real'($signed(data[31:16])) - s) > 1.0) begin
        failures++; if (failures < 10) $display("FAIL k=%0d data=%h", k, data);
      end
    end
    held = data;
    @(negedge clk); en = 0; addr = 12'd100;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (data !== held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
