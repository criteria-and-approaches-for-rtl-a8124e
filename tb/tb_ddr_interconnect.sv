// tb_ddr_interconnect: self-checking test of the DDR port arbiter with three
// masters in front of the behavioural DDR model. Each master issues random
// reads and writes in its own address range, so the data every read must
// return is known. Checks: every command reaches the DDR once, unchanged;
// each read response goes to the master that asked, in its order, with the
// right data; with all three masters requesting all the time, the grants
// rotate (no master is served twice while another waits).
module tb_ddr_interconnect;
  import vfpga_pkg::*;

  localparam int unsigned NM = 3;
  localparam int unsigned K  = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  mem_req_t mreq [NM];
  mem_rsp_t mrsp [NM];
  mem_req_t dreq;
  mem_rsp_t drsp;
  int checks = 0, failures = 0;

  ddr_interconnect #(.NUM_M(NM), .MAX_RD(4)) dut (.clk, .rst_n, .m_req(mreq), .m_rsp(mrsp),
                                                  .ddr_req(dreq), .ddr_rsp(drsp));
  ddr_model #(.LAT(5), .STALL_PCT(25)) u_ddr (.clk, .rst_n, .req(dreq), .rsp(drsp));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [MEM_DW-1:0] exp_q [NM][$];
  int rd_err [NM], rd_got [NM], issued [NM], grants [NM];
  int taken_total = 0, rr_err = 0, contention = 0;
  logic all_want;
  int since [NM];   // grants to others since this master was last served

  always @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++) if (mrsp[m].rvalid) begin
        rd_got[m]++;
        if (exp_q[m].size() == 0 || exp_q[m][0] != mrsp[m].rdata) rd_err[m]++;
        if (exp_q[m].size() != 0) void'(exp_q[m].pop_front());
      end
      if ((dreq.read || dreq.write) && !drsp.waitrequest) taken_total++;
      all_want = 1'b1;
      for (int m = 0; m < NM; m++)
        all_want &= mreq[m].write || (mreq[m].read && !dut.fifo_full);
      if (!all_want && !dut.lock_q) for (int m = 0; m < NM; m++) since[m] = 0;
      for (int m = 0; m < NM; m++)
        if ((mreq[m].read || mreq[m].write) && !mrsp[m].waitrequest) begin
          grants[m]++;
          if (all_want) begin
            contention++;
            for (int o = 0; o < NM; o++) if (o != m) begin
              since[o]++;
              if (since[o] > NM - 1) rr_err++;
            end
            since[m] = 0;
          end
        end
    end
  end

  task automatic run_master(input int m);
    mem_req_t r;
    for (int i = 0; i < K; i++) begin
      r.read  = ($urandom_range(0, 1) == 1);
      r.write = !r.read;
      r.addr  = MEM_AW'(m * 256 + $urandom_range(0, 15));
      for (int w = 0; w < MEM_DW / 32; w++) r.wdata[w*32 +: 32] = $urandom;
      r.be    = '1;
      mreq[m] = r;
      @(posedge clk);
      while (mrsp[m].waitrequest) @(posedge clk);
      issued[m]++;
      if (r.read) exp_q[m].push_back(u_ddr.peek(r.addr));
      #1;
      if (i >= K / 2 && $urandom_range(0, 3) == 0) begin
        mreq[m] = MEM_REQ_IDLE;
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
      end
    end
    mreq[m] = MEM_REQ_IDLE;
  endtask

  initial begin
    for (int m = 0; m < NM; m++) begin
      mreq[m] = MEM_REQ_IDLE; rd_err[m] = 0; rd_got[m] = 0; issued[m] = 0;
      grants[m] = 0; since[m] = 0;
    end
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;
    fork
      run_master(0);
      run_master(1);
      run_master(2);
    join
    repeat (40) @(posedge clk); #1;
    check(taken_total == NM * K, $sformatf("all commands reach DDR once (%0d)", taken_total));
    for (int m = 0; m < NM; m++) begin
      check(issued[m] == K && grants[m] == K, $sformatf("master %0d served %0d", m, grants[m]));
      check(exp_q[m].size() == 0, $sformatf("master %0d got all its read data", m));
      check(rd_err[m] == 0, $sformatf("master %0d read data and order correct", m));
    end
    check(contention > 30, $sformatf("contention exercised (%0d)", contention));
    check(rr_err == 0, "grants rotate round-robin under contention");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
