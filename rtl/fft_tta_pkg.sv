// fft_tta_pkg: types and constants shared by the TTA FFT processor.
//
// The processor is a transport triggered architecture: every instruction is a
// set of data moves, one per bus. Each of the ten 32-bit buses has a slot with
// a 5-bit source code (which FU result or the immediate drives the bus) and a
// 5-bit destination code (which FU input port the bus writes). The 1-bit bus
// has a single enable bit: it moves TFG.rx2 to CADD.rx2. A 32-bit immediate
// field is shared by all slots that select SRC_IMM.
//
// The ten buses and the 1-bit bus follow the paper. The instruction encoding
// (133 bits instead of the paper's 51) and the port codes are this design's
// own, since the paper does not publish its encoding.
package fft_tta_pkg;

  localparam int unsigned NBUS  = 10;   // 32-bit move buses B0..B9
  localparam int unsigned DW    = 32;   // bus / data word width
  localparam int unsigned CW    = 5;    // source and destination code width
  localparam int unsigned IMMW  = 32;   // shared immediate
  localparam int unsigned IW    = NBUS * 2 * CW + 1 + IMMW;  // 133

  // Sources: FU result ports that can drive a bus.
  typedef enum logic [CW-1:0] {
    SRC_NONE = 5'd0,
    SRC_IMM  = 5'd1,
    SRC_ADD  = 5'd2,
    SRC_SH   = 5'd3,
    SRC_AG   = 5'd4,
    SRC_TFG  = 5'd5,
    SRC_DLY  = 5'd6,
    SRC_CMUL = 5'd7,
    SRC_CADD = 5'd8,
    SRC_LSUR = 5'd9,
    SRC_RF0  = 5'd10   // SRC_RF0 + k reads register k, k = 0..7
  } src_e;

  // Destinations: FU input ports. *_T are trigger ports.
  typedef enum logic [CW-1:0] {
    DST_NONE     = 5'd0,
    DST_ADD_O    = 5'd1,
    DST_ADD_T    = 5'd2,
    DST_SH_O     = 5'd3,
    DST_SH_T_SHL = 5'd4,
    DST_SH_T_SHR = 5'd5,
    DST_SH_T_SHRU= 5'd6,
    DST_AG_O     = 5'd7,
    DST_AG_T     = 5'd8,
    DST_TFG_O    = 5'd9,
    DST_TFG_T    = 5'd10,
    DST_DLY_T    = 5'd11,
    DST_CMUL_O   = 5'd12,
    DST_CMUL_T   = 5'd13,
    DST_CADD_T   = 5'd14,
    DST_LSUR_T   = 5'd15,
    DST_LSUW_O   = 5'd16,
    DST_LSUW_T   = 5'd17,
    DST_RF0      = 5'd18,  // DST_RF0 + k writes register k, k = 0..7
    DST_GCU_JUMP = 5'd26,
    DST_GCU_LCNT = 5'd27,
    DST_GCU_LBUF = 5'd28,
    DST_GCU_HALT = 5'd29
  } dst_e;

  localparam int unsigned NDST = 32;

  typedef struct packed {
    logic [CW-1:0] dst;
    logic [CW-1:0] src;
  } slot_t;

  typedef struct packed {
    logic [IMMW-1:0]     imm;
    logic                b_move;   // 1-bit bus: TFG.rx2 -> CADD.rx2
    slot_t [NBUS-1:0]    slot;
  } instr_t;

  // Values the FUs put on their result sockets.
  typedef struct packed {
    logic [DW-1:0] add_r;
    logic [DW-1:0] sh_r;
    logic [DW-1:0] ag_r;
    logic [DW-1:0] tfg_r;
    logic [DW-1:0] dly_r;
    logic [DW-1:0] cmul_r;
    logic [DW-1:0] cadd_r;
    logic [DW-1:0] lsur_r;
    logic [DW-1:0] rf_r;     // the register named by rf_raddr
    logic          tfg_rx2;
  } fu_out_t;

  // One pair of accesses from the scheduler to the parallel memory logic.
  typedef struct packed {
    logic          valid_a;
    logic          valid_b;
    logic          we;
    logic [31:0]   addr_a;
    logic [31:0]   addr_b;
    logic [DW-1:0] wdata_a;
    logic [DW-1:0] wdata_b;
  } mem_pair_t;

  // Complex sample: real part in the LSBs, imaginary in the MSBs (paper Sec. 5).
  typedef struct packed {
    logic signed [15:0] im;
    logic signed [15:0] re;
  } cplx_t;

endpackage
