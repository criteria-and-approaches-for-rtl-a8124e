// tb_prr_interface: self-checking test of the per-PRR control bridge.
// An accelerator register-file stand-in (16 words) answers with a random
// waitrequest and a random read latency of 1-4 cycles. Checks: host writes
// land in the right register, reads return the written values, the host is
// stalled while the buffer is busy; while frozen no access reaches the
// accelerator, writes are dropped, reads return 0 and the interrupt is
// masked; a read in flight when freeze rises returns 0 and the bridge keeps
// working after freeze falls.
module tb_prr_interface;
  import vfpga_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, freeze = 1'b0;
  csr_req_t hreq, kreq;
  csr_rsp_t hrsp, krsp;
  logic krn_irq = 1'b0, irq;
  int checks = 0, failures = 0;

  prr_interface dut (.clk, .rst_n, .freeze, .host_req(hreq), .host_rsp(hrsp),
                     .krn_req(kreq), .krn_rsp(krsp), .krn_irq, .irq);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // accelerator register-file stand-in
  logic [31:0] regs [16];
  int   krn_accesses = 0, rd_delay = -1, max_lat = 1;
  logic [31:0] rd_data;
  always @(posedge clk) begin
    krsp.rvalid <= 1'b0;
    if (rd_delay == 0) begin
      krsp.rvalid <= 1'b1; krsp.rdata <= rd_data;
    end
    if (rd_delay >= 0) rd_delay <= rd_delay - 1;
    krsp.waitrequest <= ($urandom_range(0, 2) == 0);
    if (rst_n && (kreq.read || kreq.write) && !krsp.waitrequest) begin
      krn_accesses++;
      if (kreq.write) regs[kreq.addr[5:2]] <= kreq.wdata;
      else begin rd_data <= regs[kreq.addr[5:2]]; rd_delay <= $urandom_range(0, 3); end
    end
  end

  int host_stalls = 0;
  task automatic hwrite(input logic [11:0] a, input logic [31:0] d);
    hreq = '{read: 1'b0, write: 1'b1, addr: CSR_AW'(a), wdata: d};
    @(posedge clk);
    while (hrsp.waitrequest) begin host_stalls++; @(posedge clk); end
    #1 hreq = CSR_REQ_IDLE;
  endtask

  task automatic hread(input logic [11:0] a, output logic [31:0] d);
    hreq = '{read: 1'b1, write: 1'b0, addr: CSR_AW'(a), wdata: '0};
    @(posedge clk);
    while (hrsp.waitrequest) begin host_stalls++; @(posedge clk); end
    #1 hreq = CSR_REQ_IDLE;
    while (!hrsp.rvalid) @(posedge clk);
    d = hrsp.rdata;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] d, model [16];
    int n;
    hreq = CSR_REQ_IDLE;
    krsp = '{waitrequest: 1'b1, rvalid: 1'b0, rdata: '0};
    foreach (regs[i]) begin regs[i] = 32'h0; model[i] = 32'h0; end
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    for (int i = 0; i < 40; i++) begin
      int r;
      r = $urandom_range(0, 15);
      if ($urandom_range(0, 1) == 1) begin
        d = $urandom; model[r] = d; hwrite(12'(r * 4), d);
      end else begin
        hread(12'(r * 4), d);
        check(d == model[r], $sformatf("read reg %0d: %h vs %h", r, d, model[r]));
      end
    end
    check(host_stalls > 0, "host stalled while buffer busy");
    krn_irq = 1'b1; #1;
    check(irq == 1'b1, "interrupt passes when not frozen");

    // frozen
    repeat (6) @(posedge clk); #1;
    freeze = 1'b1; #1;
    check(irq == 1'b0, "interrupt masked while frozen");
    n = krn_accesses;
    hwrite(12'h8, 32'hCAFE_0001);
    hread(12'h4, d);
    check(d == 32'h0, "read while frozen returns 0");
    repeat (6) @(posedge clk); #1;
    check(krn_accesses == n, "no access reaches a frozen PRR");
    check(regs[2] == model[2], "write while frozen dropped");
    freeze = 1'b0;

    // freeze in the middle of a read
    hreq = '{read: 1'b1, write: 1'b0, addr: CSR_AW'(12'h4), wdata: '0};
    @(posedge clk);
    while (hrsp.waitrequest) @(posedge clk);
    #1 hreq = CSR_REQ_IDLE;
    freeze = 1'b1;
    while (!hrsp.rvalid) @(posedge clk);
    check(hrsp.rdata == 32'h0, "read aborted by freeze returns 0");
    @(posedge clk); #1 freeze = 1'b0;
    repeat (8) @(posedge clk); #1;
    hwrite(12'h0, 32'h5A5A_A5A5); model[0] = 32'h5A5A_A5A5;
    hread(12'h0, d);
    check(d == 32'h5A5A_A5A5, "bridge works after freeze");

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
