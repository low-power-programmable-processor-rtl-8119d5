// tb_fft_tta_full: end-to-end test of the processor with every parameter at
// its default (LOG2_NMAX = 14: two 8192-word data memories, 2049-entry twiddle
// ROM). Runs the check program and FFTs of 4096, 8192 and 16384 points; the
// 8192-point one ends with a radix-2 stage.
module tb_fft_tta_full;
  import fft_tta_pkg::*;
  localparam int L = 14;
  logic clk, rst_n, start, busy, h_imem_we, h_dmem_en, h_dmem_we;
  logic [5:0] h_imem_addr;
  logic [IW-1:0] h_imem_wdata;
  logic [L-1:0] h_dmem_addr;
  logic [31:0] h_dmem_wdata, h_dmem_rdata;
  logic lock, imem_fetch, lb_replay, rx2_stage, wq_wait;

  fft_tta_top dut (.*);
  fft_bench #(.LOG2_NMAX(L), .N_LO(12), .N_HI(L)) bench (.*);
endmodule
