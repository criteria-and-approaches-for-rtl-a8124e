// tb_mem_pipe: self-checking test of the PRR memory-port pipeline, run with
// two stages in front of the behavioural DDR model. A master stand-in
// issues random reads and writes. Checks: every command reaches the DDR
// unchanged and in order; reads return the data the DDR holds; with no
// stalls, 64 back-to-back commands pass in 64 + STAGES cycles (one per
// cycle); while frozen no command is taken; read data still owed to the PRR
// when freeze rises never reaches it, and the port works again afterwards.
module tb_mem_pipe;
  import vfpga_pkg::*;

  localparam int unsigned ST = 2;
  logic clk = 1'b0, rst_n = 1'b0, freeze = 1'b0;
  mem_req_t ureq, dreq;
  mem_rsp_t ursp, drsp;
  int checks = 0, failures = 0;

  mem_pipe #(.STAGES(ST)) dut (.clk, .rst_n, .freeze, .up_req(ureq), .up_rsp(ursp),
                               .dn_req(dreq), .dn_rsp(drsp));
  ddr_model #(.LAT(3), .STALL_PCT(30)) u_ddr (.clk, .rst_n, .req(dreq), .rsp(drsp));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // command scoreboard: what the master issued vs what the DDR took
  mem_req_t sent [$];
  logic [MEM_DW-1:0] exp_rd [$];
  int order_err = 0, dn_taken = 0, rd_got = 0, rd_err = 0;
  always @(posedge clk) begin
    if (rst_n && (dreq.read || dreq.write) && !drsp.waitrequest) begin
      dn_taken++;
      if (sent.size() == 0 || sent[0] != dreq) order_err++;
      else void'(sent.pop_front());
    end
    if (rst_n && ursp.rvalid) begin
      rd_got++;
      if (exp_rd.size() == 0 || exp_rd[0] != ursp.rdata) rd_err++;
      if (exp_rd.size() != 0) void'(exp_rd.pop_front());
    end
  end

  task automatic issue(input mem_req_t r);
    ureq = r;
    @(posedge clk);
    while (ursp.waitrequest) @(posedge clk);
    sent.push_back(r);
    if (r.read) exp_rd.push_back(u_ddr.peek(r.addr));   // no overlapping writes in flight
    #1 ureq = MEM_REQ_IDLE;
  endtask

  function automatic mem_req_t rnd_req(input logic rd);
    mem_req_t r;
    r.read  = rd;
    r.write = !rd;
    r.addr  = MEM_AW'($urandom_range(0, 63));
    for (int i = 0; i < MEM_DW / 32; i++) r.wdata[i*32 +: 32] = $urandom;
    r.be    = {$urandom, $urandom};
    return r;
  endfunction

  initial begin
    int t0, n_rd;
    ureq = MEM_REQ_IDLE;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    // writes first (data then known), then reads of those words
    for (int i = 0; i < 30; i++) issue(rnd_req(1'b0));
    repeat (10) @(posedge clk); #1;
    for (int i = 0; i < 30; i++) issue(rnd_req(1'b1));
    repeat (30) @(posedge clk); #1;
    check(order_err == 0, "commands reach DDR unchanged and in order");
    check(dn_taken == 60 && sent.size() == 0, "every command taken once");
    check(rd_got == 30, $sformatf("all read data returned (%0d)", rd_got));
    check(rd_err == 0, "read data correct");

    // throughput with no stalls
    force drsp.waitrequest = 1'b0;
    t0 = dn_taken;
    ureq = rnd_req(1'b0);
    fork
      begin
        for (int i = 0; i < 64; i++) begin
          @(posedge clk);
          check(!ursp.waitrequest, "no stall at full rate");
          sent.push_back(ureq);
          #1 ureq = rnd_req(1'b0);
        end
        ureq = MEM_REQ_IDLE;
      end
    join
    repeat (ST) @(posedge clk); #1;
    check(dn_taken - t0 == 64, $sformatf("64 commands in 64+%0d cycles (%0d)", ST, dn_taken - t0));
    release drsp.waitrequest;

    // freeze with reads in flight
    n_rd = rd_got;
    for (int i = 0; i < 4; i++) issue(rnd_req(1'b1));
    freeze = 1'b1;
    exp_rd.delete();
    ureq = rnd_req(1'b1);
    repeat (20) @(posedge clk); #1;
    check(ursp.waitrequest, "port closed while frozen");
    check(rd_got == n_rd, "no read data reaches a frozen PRR");
    check(sent.size() == 0, "no command taken while frozen");
    ureq = MEM_REQ_IDLE;
    freeze = 1'b0;
    repeat (5) @(posedge clk); #1;
    check(rd_got == n_rd, "stale read data dropped after freeze");
    for (int i = 0; i < 5; i++) issue(rnd_req(1'b1));
    repeat (30) @(posedge clk); #1;
    check(rd_got == n_rd + 5 && rd_err == 0, "port works after freeze");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
