// gcu: general control unit with loop buffer.
//
// Fetches one instruction per cycle and hands it to the interconnect. Fetch is
// one cycle ahead of execution: the word fetched in cycle k executes in k+1.
// The unit is itself a function unit with four input ports:
//   jump  (trigger)  jump to the address moved in; one delay slot.
//   lcnt  (operand)  iteration count K for the next loop-buffer loop.
//   lbuf  (trigger)  the L instructions that follow this one form a loop body
//                    executed K times in all: the first time from instruction
//                    memory, while each word is copied into the loop buffer,
//                    then K-1 times from the loop buffer with the instruction
//                    memory disabled. Fetch then continues after the body.
//   halt  (trigger)  stop; busy falls and the host may use the memories.
// start (host) begins execution at address 0. lock (from the parallel memory
// logic) freezes the unit and both instruction stores hold their outputs, so
// the same instruction is presented again in the next cycle.
// The loop buffer inside the control unit is the paper's; the port set, the
// fetch timing and the halt port are this design's choices.
module gcu #(
  parameter int unsigned IW      = 133,
  parameter int unsigned IMEM_AW = 6,
  parameter int unsigned LB_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               lock,
  input  logic               start,
  // control ports written by moves
  input  logic               jump_we,
  input  logic [31:0]        jump_in,
  input  logic               lcnt_we,
  input  logic [31:0]        lcnt_in,
  input  logic               lbuf_we,
  input  logic [31:0]        lbuf_in,
  input  logic               halt_we,
  // instruction memory
  output logic               imem_en,
  output logic [IMEM_AW-1:0] imem_addr,
  input  logic [IW-1:0]      imem_rdata,
  // instruction to execute
  output logic [IW-1:0]      instr,
  output logic               valid,
  output logic               busy,
  output logic               lb_replay     // current instruction comes from the loop buffer
);
  localparam int unsigned LBW = $clog2(LB_DEPTH);
  typedef enum logic [1:0] {M_NORMAL, M_RECORD, M_PLAY} mode_e;

  mode_e              mode;
  logic               running;
  logic [IMEM_AW-1:0] pc;
  logic               valid_q, src_q, tag_v_q;
  logic [LBW-1:0]     tag_idx_q, fidx;
  logic [LBW:0]       lb_len;
  logic [31:0]        iters_left, lcnt_q, lcnt_eff;
  logic [IW-1:0]      lb_rdata;

  logic go;                         // this cycle advances
  assign go = running && !lock;

  assign lcnt_eff = lcnt_we ? lcnt_in : lcnt_q;

  // fetch
  logic           lb_rd;
  logic [LBW-1:0] lb_ridx;
  assign imem_en   = go && (mode != M_PLAY);
  assign imem_addr = pc;
  assign lb_rd     = go && (mode == M_PLAY);
  assign lb_ridx   = fidx;

  // execute
  assign instr     = src_q ? lb_rdata : imem_rdata;
  assign valid     = valid_q;
  assign busy      = running || valid_q;
  assign lb_replay = valid_q && src_q;

  loop_buffer #(.DEPTH(LB_DEPTH), .IW(IW)) u_lb (
    .clk  (clk),
    .wr   (valid_q && tag_v_q && !lock),
    .widx (tag_idx_q),
    .wdata(imem_rdata),
    .rd   (lb_rd),
    .ridx (lb_ridx),
    .rdata(lb_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= M_NORMAL; running <= 1'b0; pc <= '0;
      valid_q <= 1'b0; src_q <= 1'b0; tag_v_q <= 1'b0; tag_idx_q <= '0;
      fidx <= '0; lb_len <= '0; iters_left <= '0; lcnt_q <= 32'd1;
    end else if (!running) begin
      valid_q <= 1'b0;
      if (start) begin
        running <= 1'b1;
        pc      <= '0;
        mode    <= M_NORMAL;
      end
    end else if (!lock) begin
      if (lcnt_we) lcnt_q <= lcnt_in;
      // what is fetched this cycle
      valid_q   <= !halt_we;
      src_q     <= (mode == M_PLAY);
      tag_v_q   <= (mode == M_RECORD) || (mode == M_NORMAL && lbuf_we);
      tag_idx_q <= (mode == M_RECORD) ? fidx : '0;
      if (mode != M_PLAY) pc <= pc + 1'b1;
      if (jump_we) pc <= jump_in[IMEM_AW-1:0];
      // loop buffer sequencing
      if (lbuf_we) begin
        lb_len     <= lbuf_in[LBW:0];
        iters_left <= (lcnt_eff > 32'd1) ? lcnt_eff - 32'd1 : 32'd0;
        if (lbuf_in[LBW:0] == (LBW+1)'(1)) begin
          mode <= (lcnt_eff > 32'd1) ? M_PLAY : M_NORMAL;
          fidx <= '0;
        end else begin
          mode <= M_RECORD;
          fidx <= LBW'(1);
        end
      end else if (mode == M_RECORD) begin
        if ((LBW+1)'(fidx) == lb_len - 1'b1) begin
          mode <= (iters_left != 0) ? M_PLAY : M_NORMAL;
          fidx <= '0;
        end else begin
          fidx <= fidx + 1'b1;
        end
      end else if (mode == M_PLAY) begin
        if ((LBW+1)'(fidx) == lb_len - 1'b1) begin
          fidx       <= '0;
          iters_left <= iters_left - 32'd1;
          if (iters_left == 32'd1) mode <= M_NORMAL;
        end else begin
          fidx <= fidx + 1'b1;
        end
      end
      if (halt_we) begin
        running <= 1'b0;
        mode    <= M_NORMAL;
      end
    end
  end

  a_lbuf_len: assert property (@(posedge clk) disable iff (!rst_n)
    lbuf_we && !lock |-> (lbuf_in >= 32'd1 && lbuf_in <= 32'(LB_DEPTH)));
endmodule
