// par_mem: parallel memory logic in front of the two single-port data memories.
//
// Takes one pair of accesses (ports A and B, both reads or both writes) per
// cycle and makes the two single-port memories behave like one dual-port
// memory of 2^AW words. The memory an address goes to is its parity, the XOR
// of all its bits; the word inside that memory is address >> 1 (address and
// parity together give back the full address). If both ports hit the same
// memory, lock is raised for one cycle: port A is served in the locked cycle,
// port B in the next, and the processor, frozen by lock, sees one extra cycle.
//
// Read data: for an access in cycle X the data is on rdata_a/rdata_b in X+1.
// Across a lock cycle the outputs repeat what was shown in the locked cycle,
// so a frozen consumer sees no change; after a conflict the saved port-A word
// is returned together with port B. The memories' outputs must hold while
// they are not enabled.
// Parity selection and locking on a conflict are the paper's; XOR parity (the
// parity a bit permutation preserves) and serving A first are this design's
// reading of it.
module par_mem #(
  parameter int unsigned AW = 14
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  fft_tta_pkg::mem_pair_t req,
  output logic                   lock,
  output logic [31:0]            rdata_a,
  output logic [31:0]            rdata_b,
  // the two single-port memories
  output logic [1:0]             m_en,
  output logic [1:0]             m_we,
  output logic [AW-2:0]          m_addr  [2],
  output logic [31:0]            m_wdata [2],
  input  logic [31:0]            m_rdata [2]
);
  logic par_a, par_b, conflict;
  logic busy;                          // second cycle of a conflict
  logic sel_a_q, sel_b_q, lock_q, conf_q;
  logic [31:0] last_a, last_b, save_a;

  assign par_a    = ^req.addr_a[AW-1:0];
  assign par_b    = ^req.addr_b[AW-1:0];
  assign conflict = req.valid_a && req.valid_b && (par_a == par_b);
  assign lock     = conflict && !busy;

  logic do_a, do_b;
  assign do_a = req.valid_a && !busy;
  assign do_b = req.valid_b && (!conflict || busy);

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      m_en[m]    = 1'b0;
      m_we[m]    = 1'b0;
      m_addr[m]  = '0;
      m_wdata[m] = '0;
    end
    if (do_a) begin
      m_en[par_a]    = 1'b1;
      m_we[par_a]    = req.we;
      m_addr[par_a]  = req.addr_a[AW-1:1];
      m_wdata[par_a] = req.wdata_a;
    end
    if (do_b) begin
      m_en[par_b]    = 1'b1;
      m_we[par_b]    = req.we;
      m_addr[par_b]  = req.addr_b[AW-1:1];
      m_wdata[par_b] = req.wdata_b;
    end
  end

  always_comb begin
    if (lock_q) begin
      rdata_a = last_a;
      rdata_b = last_b;
    end else if (conf_q) begin
      rdata_a = save_a;
      rdata_b = m_rdata[sel_b_q];
    end else begin
      rdata_a = m_rdata[sel_a_q];
      rdata_b = m_rdata[sel_b_q];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; sel_a_q <= 1'b0; sel_b_q <= 1'b1;
      lock_q <= 1'b0; conf_q <= 1'b0;
      last_a <= '0; last_b <= '0; save_a <= '0;
    end else begin
      busy   <= lock;
      lock_q <= lock;
      conf_q <= busy;
      if (busy) save_a <= m_rdata[sel_a_q];
      if (do_a) sel_a_q <= par_a;
      if (do_b) sel_b_q <= par_b;
      last_a <= rdata_a;
      last_b <= rdata_b;
    end
  end

  a_pair_same_kind: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> conflict);
endmodule
