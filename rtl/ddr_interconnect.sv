// ddr_interconnect: shares the single DDR controller port among NUM_M
// memory masters (the PRR memory ports and the host memory interface).
//
// Arbitration is round-robin: the search for the next master starts one
// past the master served last. Once a master's command is presented to the
// DDR port and stalled there (waitrequest), the grant is held on it until
// the command is taken, so the DDR port sees a stable command, as the bus
// rules require. Every other master sees waitrequest.
//
// The DDR controller returns read data in order. For each read the index
// of its master is pushed into a FIFO of MAX_RD entries; each rvalid from
// the DDR pops the FIFO and is routed to that master. When the FIFO is
// full, reads wait (writes may still pass).
//
// Timing: the grant is combinational, so a command with no contention goes
// to the DDR port in the cycle it is presented; responses pass in the
// same cycle they arrive.
//
// From the design being reproduced: one interconnect between the PRRs, the
// memory interface and the DDR controller. Everything about how it
// arbitrates is this design's own choice.
module ddr_interconnect
  import vfpga_pkg::*;
#(
  parameter int unsigned NUM_M  = NUM_PRR_DEF + 1,
  parameter int unsigned MAX_RD = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t m_req [NUM_M],
  output mem_rsp_t m_rsp [NUM_M],
  output mem_req_t ddr_req,
  input  mem_rsp_t ddr_rsp
);

  localparam int unsigned IW = (NUM_M > 1) ? $clog2(NUM_M) : 1;
  localparam int unsigned FW = $clog2(MAX_RD);

  logic [IW-1:0] last_q, lock_id_q, sel;
  logic          lock_q, present, take;
  logic [NUM_M-1:0] want;

  logic [IW-1:0] fifo_q [MAX_RD];
  logic [FW-1:0] wr_ptr_q, rd_ptr_q;
  logic [FW:0]   count_q;
  logic          fifo_full, push, pop;

  assign fifo_full = count_q == (FW+1)'(MAX_RD);

  always_comb begin
    for (int i = 0; i < NUM_M; i++)
      want[i] = m_req[i].write || (m_req[i].read && !fifo_full);
  end

  // Round-robin pick, or the locked master.
  always_comb begin
    logic [IW-1:0] idx;
    idx = '0;
    sel = last_q;
    if (lock_q) begin
      sel = lock_id_q;
    end else begin
      for (int k = NUM_M; k >= 1; k--) begin
        idx = IW'((int'(last_q) + k) % NUM_M);
        if (want[idx]) sel = idx;
      end
    end
  end

  assign present = want[sel];
  assign take    = present && !ddr_rsp.waitrequest;
  assign push    = take && m_req[sel].read;
  assign pop     = ddr_rsp.rvalid;

  always_comb begin
    ddr_req = MEM_REQ_IDLE;
    if (present) ddr_req = m_req[sel];
  end

  always_comb begin
    for (int i = 0; i < NUM_M; i++) begin
      m_rsp[i].waitrequest = !(take && sel == IW'(i));
      m_rsp[i].rvalid      = pop && count_q != '0 && fifo_q[rd_ptr_q] == IW'(i);
      m_rsp[i].rdata       = ddr_rsp.rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= '0;
      lock_q    <= 1'b0;
      lock_id_q <= '0;
      wr_ptr_q  <= '0;
      rd_ptr_q  <= '0;
      count_q   <= '0;
      for (int j = 0; j < MAX_RD; j++) fifo_q[j] <= '0;
    end else begin
      lock_q    <= present && ddr_rsp.waitrequest;
      lock_id_q <= sel;
      if (take) last_q <= sel;
      if (push) begin
        fifo_q[wr_ptr_q] <= sel;
        wr_ptr_q <= (wr_ptr_q == FW'(MAX_RD-1)) ? '0 : wr_ptr_q + 1'b1;
      end
      if (pop && count_q != '0)
        rd_ptr_q <= (rd_ptr_q == FW'(MAX_RD-1)) ? '0 : rd_ptr_q + 1'b1;
      count_q <= count_q + (FW+1)'(push) - (FW+1)'(pop && count_q != '0);
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    ddr_rsp.rvalid |-> count_q != '0);
  a_hold_stalled: assert property (@(posedge clk) disable iff (!rst_n)
    (ddr_req.read || ddr_req.write) && ddr_rsp.waitrequest |=> $stable(ddr_req));

endmodule
