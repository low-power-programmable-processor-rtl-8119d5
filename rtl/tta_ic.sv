// tta_ic: transport network of the processor (buses and sockets).
//
// Ten 32-bit move buses and one 1-bit bus. Every instruction has one slot per
// 32-bit bus; a slot's source code selects what drives the bus (a function
// unit's result port, a register of the register file, or the instruction's
// immediate) and its destination code selects the function-unit input port the
// bus value is written to in the same cycle. The 1-bit bus carries the twiddle
// generator's rx2 flag to the complex adder when the instruction's b_move bit
// is set. Outputs are per-destination write enables and data; at most one bus
// may write a destination per cycle, and all register-file reads of one cycle
// must name the same register (it has one read port): both are asserted.
// Purely combinational (clk and rst_n only time the assertions). The bus count is the paper's; the socket pattern is
// simplified to full connectivity (every bus reaches every port), a superset
// of the paper's sparse pattern, and the codes are this design's.
module tta_ic (
  input  logic                    clk,      // for the assertions only
  input  logic                    rst_n,
  input  fft_tta_pkg::instr_t     instr,
  input  logic                    valid,
  input  fft_tta_pkg::fu_out_t    fu,
  output logic [2:0]              rf_raddr,
  output logic [31:0]             dst_we,
  output logic [31:0]             dst_data [32],
  output logic                    b_we,
  output logic                    b_val
);
  import fft_tta_pkg::*;

  logic [DW-1:0] bus [NBUS];

  always_comb begin
    rf_raddr = '0;
    for (int k = NBUS - 1; k >= 0; k--)
      if (instr.slot[k].src >= SRC_RF0 && instr.slot[k].src <= SRC_RF0 + 5'd7)
        rf_raddr = 3'(instr.slot[k].src - SRC_RF0);
  end

  always_comb begin
    for (int k = 0; k < int'(NBUS); k++) begin
      unique case (instr.slot[k].src)
        SRC_IMM:  bus[k] = instr.imm;
        SRC_ADD:  bus[k] = fu.add_r;
        SRC_SH:   bus[k] = fu.sh_r;
        SRC_AG:   bus[k] = fu.ag_r;
        SRC_TFG:  bus[k] = fu.tfg_r;
        SRC_DLY:  bus[k] = fu.dly_r;
        SRC_CMUL: bus[k] = fu.cmul_r;
        SRC_CADD: bus[k] = fu.cadd_r;
        SRC_LSUR: bus[k] = fu.lsur_r;
        default:  bus[k] = (instr.slot[k].src >= SRC_RF0 && instr.slot[k].src <= SRC_RF0 + 5'd7)
                           ? fu.rf_r : '0;
      endcase
    end
  end

  always_comb begin
    dst_we = '0;
    for (int d = 0; d < 32; d++) dst_data[d] = '0;
    for (int k = 0; k < int'(NBUS); k++) begin
      if (valid && instr.slot[k].dst != DST_NONE) begin
        dst_we[instr.slot[k].dst]   = 1'b1;
        dst_data[instr.slot[k].dst] = dst_data[instr.slot[k].dst] | bus[k];
      end
    end
    b_we  = valid && instr.b_move;
    b_val = fu.tfg_rx2;
  end

  // one writer per destination, one register read per cycle
  logic multi_write, multi_rf;
  always_comb begin
    multi_write = 1'b0;
    multi_rf    = 1'b0;
    for (int k = 0; k < int'(NBUS); k++)
      for (int m = k + 1; m < int'(NBUS); m++) begin
        if (instr.slot[k].dst != DST_NONE && instr.slot[k].dst == instr.slot[m].dst)
          multi_write = 1'b1;
        if (instr.slot[k].src >= SRC_RF0 && instr.slot[m].src >= SRC_RF0 &&
            instr.slot[k].src <= SRC_RF0 + 5'd7 && instr.slot[m].src <= SRC_RF0 + 5'd7 &&
            instr.slot[k].src != instr.slot[m].src)
          multi_rf = 1'b1;
      end
  end
  a_one_writer:  assert property (@(posedge clk) disable iff (!rst_n) valid |-> !multi_write);
  a_one_rf_read: assert property (@(posedge clk) disable iff (!rst_n) valid |-> !multi_rf);
endmodule
