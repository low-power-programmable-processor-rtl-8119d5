// lsu_sched: the two load-store units (LSUr, LSUw) and the access scheduler.
//
// LSUr: a move into its trigger port is a read address; the data comes back
// on its result port exactly 3 cycles later. LSUw: the operand port takes the
// data, a move into the trigger port gives the address and starts the write.
//
// The FFT kernel issues one read and one write every cycle. Sent straight to
// two single-port memories, a read and a write could hit the same memory. The
// scheduler therefore buffers accesses: two consecutive reads are paired and
// issued together, two consecutive writes likewise, and the memory sees one
// pair of reads or one pair of writes per cycle. Because the address generator
// gives consecutive counter values different parity, both halves of a pair go
// to different memories and never conflict. Read pairs go first; a completed
// write pair waits in a 2-entry queue for a cycle without a read pair (there
// is always one, since read pairs come at most every other cycle).
//
// Read timing: reads t-1 and t form a pair, issued in cycle t+1, data from the
// memories in t+2; the first read's data is shown in t+2, the second's is
// buffered and shown in t+3. So every read has latency 3, provided the two
// reads of a pair are triggered in consecutive cycles, as the FFT kernel does
// (a lone first read waits for its partner).
// Pairing of consecutive accesses and read priority are the paper's
// description; queue depth and latencies are this design's. The software
// switch that could turn the scheduler off is only suggested by the paper and
// is not built: reads and writes must come in pairs.
// stall (global lock) freezes all state; req then stays unchanged.
module lsu_sched #(
  parameter int unsigned AW = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    stall,
  // LSUr
  input  logic                    rd_t_we,
  input  logic [31:0]             rd_t_in,
  output logic [31:0]             rd_r,
  // LSUw
  input  logic                    wr_o_we,
  input  logic [31:0]             wr_o_in,
  input  logic                    wr_t_we,
  input  logic [31:0]             wr_t_in,
  // to / from the parallel memory logic
  output fft_tta_pkg::mem_pair_t  req,
  input  logic [31:0]             rdata_a,
  input  logic [31:0]             rdata_b,
  // observation
  output logic                    wq_wait,     // a write pair is held back this cycle
  output logic                    pending      // accesses not yet done in memory
);
  import fft_tta_pkg::*;

  typedef struct packed {
    logic [AW-1:0] a0;
    logic [31:0]   d0;
    logic [AW-1:0] a1;
    logic [31:0]   d1;
  } wpair_t;

  logic          rfirst_v;
  logic [AW-1:0] rfirst_a;
  logic          wfirst_v;
  logic [AW-1:0] wfirst_a;
  logic [31:0]   wfirst_d;
  logic [31:0]   wdata_q, wdata_eff;
  wpair_t        wq [2];
  logic [1:0]    wq_cnt;
  logic          rd_phase;
  logic [31:0]   bsave;

  logic rpair_done, wpair_done, pop;
  assign wdata_eff  = wr_o_we ? wr_o_in : wdata_q;
  assign rpair_done = rd_t_we && rfirst_v;
  assign wpair_done = wr_t_we && wfirst_v;
  assign pop        = !rpair_done && (wq_cnt != 2'd0);
  assign wq_wait    = rpair_done && (wq_cnt != 2'd0) && !stall;

  assign pending = req.valid_a || (wq_cnt != 2'd0) || rd_phase;
  assign rd_r = rd_phase ? rdata_a : bsave;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rfirst_v <= 1'b0; rfirst_a <= '0;
      wfirst_v <= 1'b0; wfirst_a <= '0; wfirst_d <= '0;
      wdata_q  <= '0;
      wq[0] <= '0; wq[1] <= '0; wq_cnt <= '0;
      req <= '0;
      rd_phase <= 1'b0;
      bsave <= '0;
    end else if (!stall) begin
      if (wr_o_we) wdata_q <= wr_o_in;
      // read pairing
      if (rd_t_we) begin
        rfirst_v <= !rfirst_v;
        if (!rfirst_v) rfirst_a <= rd_t_in[AW-1:0];
      end
      // write pairing
      if (wr_t_we) begin
        wfirst_v <= !wfirst_v;
        if (!wfirst_v) begin
          wfirst_a <= wr_t_in[AW-1:0];
          wfirst_d <= wdata_eff;
        end
      end
      // write queue: pop head, push completed pair
      begin
        wpair_t q0, q1;
        logic [1:0] c;
        q0 = wq[0]; q1 = wq[1]; c = wq_cnt;
        if (pop) begin
          q0 = q1; c = c - 2'd1;
        end
        if (wpair_done) begin
          if (c == 2'd0) q0 = {wfirst_a, wfirst_d, wr_t_in[AW-1:0], wdata_eff};
          else           q1 = {wfirst_a, wfirst_d, wr_t_in[AW-1:0], wdata_eff};
          c = c + 2'd1;
        end
        wq[0] <= q0; wq[1] <= q1; wq_cnt <= c;
      end
      // issue register
      if (rpair_done) begin
        req.valid_a <= 1'b1; req.valid_b <= 1'b1; req.we <= 1'b0;
        req.addr_a  <= 32'(rfirst_a);
        req.addr_b  <= 32'(rd_t_in[AW-1:0]);
        req.wdata_a <= '0; req.wdata_b <= '0;
      end else if (pop) begin
        req.valid_a <= 1'b1; req.valid_b <= 1'b1; req.we <= 1'b1;
        req.addr_a  <= 32'(wq[0].a0);
        req.addr_b  <= 32'(wq[0].a1);
        req.wdata_a <= wq[0].d0; req.wdata_b <= wq[0].d1;
      end else begin
        req.valid_a <= 1'b0; req.valid_b <= 1'b0; req.we <= 1'b0;
      end
      // read data return
      rd_phase <= req.valid_a && !req.we;
      if (rd_phase) bsave <= rdata_b;
    end
  end

  // The queue can never overflow: a write pair needs two triggers, and every
  // cycle without a new read pair drains one entry.
  a_wq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(wpair_done && !pop && wq_cnt == 2'd2 && !stall));
endmodule
