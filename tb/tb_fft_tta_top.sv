// tb_fft_tta_top: end-to-end test of the processor at a reduced maximum size
// (LOG2_NMAX = 10, data memory 2 x 512 words, 129-entry twiddle ROM): runs the
// check program and FFTs of 64, 128, 256, 512 and 1024 points.
module tb_fft_tta_top;
  import fft_tta_pkg::*;
  localparam int L = 10;
  logic clk, rst_n, start, busy, h_imem_we, h_dmem_en, h_dmem_we;
  logic [5:0] h_imem_addr;
  logic [IW-1:0] h_imem_wdata;
  logic [L-1:0] h_dmem_addr;
  logic [31:0] h_dmem_wdata, h_dmem_rdata;
  logic lock, imem_fetch, lb_replay, rx2_stage, wq_wait;

  fft_tta_top #(.LOG2_NMAX(L)) dut (.*);
  fft_bench #(.LOG2_NMAX(L), .N_LO(6), .N_HI(L)) bench (.*);
endmodule
