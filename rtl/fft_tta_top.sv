// fft_tta_top: transport-triggered FFT processor.
//
// A software-programmable processor for power-of-two FFTs of 64 to 2^LOG2_NMAX
// points (mixed radix-4/2, decimation in time, in place). Ten 32-bit buses and
// a 1-bit bus connect the function units: ADD (the linear counter in the FFT
// program), SH, an 8x32 RF, the address generator AG, the twiddle generator
// TFG with its ROM, the delay unit DLY, the complex multiplier CMUL, the serial
// complex adder CADD, the read and write LSUs with their access scheduler, and
// the control unit GCU with its loop buffer. The data memory is two
// single-port banks of 2^(LOG2_NMAX-1) words behind the parallel memory logic;
// a bank conflict raises lock, which freezes the whole core for a cycle.
//
// Host interface: while the core is idle (busy low) the host loads the program
// through h_imem_* and reads and writes the data memory through h_dmem_*
// (one word per cycle, read data on the next cycle). A pulse on start runs the
// program from address 0 until it moves to the GCU halt port.
// Data word layout: {imag[31:16], real[15:0]}, 16-bit two's complement.
// The architecture is the paper's; the instruction encoding, the full socket
// connectivity, the latencies and the host ports are this design's choices.
module fft_tta_top #(
  parameter int unsigned LOG2_NMAX = 14,
  parameter int unsigned IMEM_AW   = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  // program load
  input  logic                  h_imem_we,
  input  logic [IMEM_AW-1:0]    h_imem_addr,
  input  logic [fft_tta_pkg::IW-1:0] h_imem_wdata,
  // data memory access while idle
  input  logic                  h_dmem_en,
  input  logic                  h_dmem_we,
  input  logic [LOG2_NMAX-1:0]  h_dmem_addr,
  input  logic [31:0]           h_dmem_wdata,
  output logic [31:0]           h_dmem_rdata,
  // observation
  output logic                  lock,
  output logic                  imem_fetch,
  output logic                  lb_replay,
  output logic                  rx2_stage,
  output logic                  wq_wait
);
  import fft_tta_pkg::*;

  // ---------------- control ----------------
  logic [IW-1:0]      imem_rdata, instr_w;
  logic               imem_en;
  logic [IMEM_AW-1:0] imem_addr;
  logic               valid;
  instr_t             instr;
  fu_out_t            fu;
  logic [31:0]        dst_we;
  logic [31:0]        dst_data [32];
  logic [2:0]         rf_raddr;
  logic               b_we, b_val;
  logic               gcu_busy, sched_pending;

  imem #(.DEPTH(1 << IMEM_AW), .IW(IW)) u_imem (
    .clk(clk), .en(imem_en), .addr(imem_addr), .rdata(imem_rdata),
    .h_we(h_imem_we), .h_addr(h_imem_addr), .h_wdata(h_imem_wdata)
  );

  gcu #(.IW(IW), .IMEM_AW(IMEM_AW)) u_gcu (
    .clk(clk), .rst_n(rst_n), .lock(lock), .start(start),
    .jump_we(dst_we[DST_GCU_JUMP]), .jump_in(dst_data[DST_GCU_JUMP]),
    .lcnt_we(dst_we[DST_GCU_LCNT]), .lcnt_in(dst_data[DST_GCU_LCNT]),
    .lbuf_we(dst_we[DST_GCU_LBUF]), .lbuf_in(dst_data[DST_GCU_LBUF]),
    .halt_we(dst_we[DST_GCU_HALT]),
    .imem_en(imem_en), .imem_addr(imem_addr), .imem_rdata(imem_rdata),
    .instr(instr_w), .valid(valid), .busy(gcu_busy), .lb_replay(lb_replay)
  );
  assign instr      = instr_t'(instr_w);
  assign imem_fetch = imem_en;

  tta_ic u_ic (
    .clk(clk), .rst_n(rst_n),
    .instr(instr), .valid(valid), .fu(fu), .rf_raddr(rf_raddr),
    .dst_we(dst_we), .dst_data(dst_data), .b_we(b_we), .b_val(b_val)
  );

  // ---------------- function units ----------------
  fu_add u_add (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .o_we(dst_we[DST_ADD_O]), .o_in(dst_data[DST_ADD_O]),
    .t_we(dst_we[DST_ADD_T]), .t_in(dst_data[DST_ADD_T]), .r(fu.add_r)
  );

  logic [1:0] sh_op;
  logic [31:0] sh_t;
  always_comb begin
    sh_op = 2'd0; sh_t = '0;
    if (dst_we[DST_SH_T_SHL])  begin sh_op = 2'd1; sh_t = dst_data[DST_SH_T_SHL];  end
    if (dst_we[DST_SH_T_SHR])  begin sh_op = 2'd2; sh_t = dst_data[DST_SH_T_SHR];  end
    if (dst_we[DST_SH_T_SHRU]) begin sh_op = 2'd3; sh_t = dst_data[DST_SH_T_SHRU]; end
  end
  fu_sh u_sh (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .o_we(dst_we[DST_SH_O]), .o_in(dst_data[DST_SH_O]),
    .t_op(sh_op), .t_in(sh_t), .r(fu.sh_r)
  );

  logic       rf_we;
  logic [2:0] rf_waddr;
  logic [31:0] rf_wdata;
  always_comb begin
    rf_we = 1'b0; rf_waddr = '0; rf_wdata = '0;
    for (int k = 0; k < 8; k++)
      if (dst_we[int'(DST_RF0) + k]) begin
        rf_we = 1'b1; rf_waddr = 3'(k); rf_wdata = dst_data[int'(DST_RF0) + k];
      end
  end
  tta_rf u_rf (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata),
    .raddr(rf_raddr), .rdata(fu.rf_r)
  );

  fu_ag u_ag (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .o_we(dst_we[DST_AG_O]), .o_in(dst_data[DST_AG_O]),
    .t_we(dst_we[DST_AG_T]), .t_in(dst_data[DST_AG_T]), .r(fu.ag_r)
  );

  logic                 rom_en;
  logic [LOG2_NMAX-3:0] rom_addr;
  logic [31:0]          rom_data;
  fu_tfg #(.LOG2_NMAX(LOG2_NMAX)) u_tfg (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .o_we(dst_we[DST_TFG_O]), .o_in(dst_data[DST_TFG_O]),
    .t_we(dst_we[DST_TFG_T]), .t_in(dst_data[DST_TFG_T]),
    .r(fu.tfg_r), .rx2(fu.tfg_rx2),
    .rom_en(rom_en), .rom_addr(rom_addr), .rom_data(rom_data)
  );
  twiddle_rom #(.LOG2_NMAX(LOG2_NMAX)) u_lut (
    .clk(clk), .en(rom_en), .addr(rom_addr), .data(rom_data)
  );

  fu_dly u_dly (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .t_we(dst_we[DST_DLY_T]), .t_in(dst_data[DST_DLY_T]), .r(fu.dly_r)
  );

  fu_cmul u_cmul (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .o_we(dst_we[DST_CMUL_O]), .o_in(dst_data[DST_CMUL_O]),
    .t_we(dst_we[DST_CMUL_T]), .t_in(dst_data[DST_CMUL_T]), .r(fu.cmul_r)
  );

  fu_cadd u_cadd (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .rx2_we(b_we), .rx2_in(b_val),
    .t_we(dst_we[DST_CADD_T]), .t_in(dst_data[DST_CADD_T]), .r(fu.cadd_r)
  );

  // ---------------- memory system ----------------
  mem_pair_t   core_req, req;
  logic [31:0] rdata_a, rdata_b;

  lsu_sched #(.AW(LOG2_NMAX)) u_lsu (
    .clk(clk), .rst_n(rst_n), .stall(lock),
    .rd_t_we(dst_we[DST_LSUR_T]), .rd_t_in(dst_data[DST_LSUR_T]), .rd_r(fu.lsur_r),
    .wr_o_we(dst_we[DST_LSUW_O]), .wr_o_in(dst_data[DST_LSUW_O]),
    .wr_t_we(dst_we[DST_LSUW_T]), .wr_t_in(dst_data[DST_LSUW_T]),
    .req(core_req), .rdata_a(rdata_a), .rdata_b(rdata_b), .wq_wait(wq_wait),
    .pending(sched_pending)
  );
  assign busy      = gcu_busy || sched_pending;
  assign rx2_stage = fu.tfg_rx2;

  // The host uses port A while the core is idle.
  always_comb begin
    req = core_req;
    if (!busy) begin
      req         = '0;
      req.valid_a = h_dmem_en;
      req.we      = h_dmem_we;
      req.addr_a  = 32'(h_dmem_addr);
      req.wdata_a = h_dmem_wdata;
    end
  end
  assign h_dmem_rdata = rdata_a;

  logic [1:0]           m_en, m_we;
  logic [LOG2_NMAX-2:0] m_addr  [2];
  logic [31:0]          m_wdata [2];
  logic [31:0]          m_rdata [2];

  par_mem #(.AW(LOG2_NMAX)) u_pmem (
    .clk(clk), .rst_n(rst_n), .req(req), .lock(lock),
    .rdata_a(rdata_a), .rdata_b(rdata_b),
    .m_en(m_en), .m_we(m_we), .m_addr(m_addr), .m_wdata(m_wdata), .m_rdata(m_rdata)
  );

  for (genvar m = 0; m < 2; m++) begin : g_bank
    logic [LOG2_NMAX-2:0] blk_en;
    dmem_bank #(.LOG2_NMAX(LOG2_NMAX)) u_bank (
      .clk(clk), .en(m_en[m]), .we(m_we[m]), .addr(m_addr[m]),
      .wdata(m_wdata[m]), .rdata(m_rdata[m]), .blk_en(blk_en)
    );
  end
endmodule
