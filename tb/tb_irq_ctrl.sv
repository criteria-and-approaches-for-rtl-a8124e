// tb_irq_ctrl: self-checking test of the interrupt controller.
// Checks the STATUS register follows the PRR lines one cycle late, MASK
// resets to all ones and blocks the MSI, an unmasked line raises exactly one
// MSI request held until acknowledge, and unmasking a still-pending line
// after service raises a new one. The MSI latency (line change to msi_req)
// is checked to be 2 cycles: one for the STATUS register, one for msi_req.
module tb_irq_ctrl;
  import vfpga_pkg::*;

  localparam int unsigned N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t req;
  csr_rsp_t rsp;
  logic [N-1:0] irq;
  logic msi_req, msi_ack;
  int checks = 0, failures = 0;

  irq_ctrl #(.NUM_PRR(N)) dut (.clk, .rst_n, .csr_req(req), .csr_rsp(rsp),
                               .prr_irq(irq), .msi_req, .msi_ack);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    req = '{read: 1'b0, write: 1'b1, addr: CSR_AW'(a), wdata: d};
    @(posedge clk); #1 req = CSR_REQ_IDLE;
  endtask

  task automatic csr_read(input logic [11:0] a, output logic [31:0] d);
    req = '{read: 1'b1, write: 1'b0, addr: CSR_AW'(a), wdata: '0};
    @(posedge clk); #1 req = CSR_REQ_IDLE;
    while (!rsp.rvalid) @(posedge clk);
    d = rsp.rdata;
    @(posedge clk); #1;
  endtask

  int msi_count = 0;
  logic msi_prev = 1'b0;
  always @(posedge clk) begin
    if (rst_n && msi_req && !msi_prev) msi_count++;
    msi_prev <= msi_req;
  end

  initial begin
    logic [31:0] d;
    int t0;
    req = CSR_REQ_IDLE; irq = '0; msi_ack = 1'b0;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    csr_read(IRQ_MASK, d);
    check(d[N-1:0] == 4'hF, "MASK resets to all ones");
    irq = 4'b0100;
    repeat (3) @(posedge clk); #1;
    csr_read(IRQ_STATUS, d);
    check(d[N-1:0] == 4'b0100, "STATUS shows buffered lines");
    check(msi_count == 0 && !msi_req, $sformatf("masked line raises no MSI (%0d %0d)", msi_count, msi_req));
    irq = '0;
    repeat (2) @(posedge clk); #1;
    csr_read(IRQ_STATUS, d);
    check(d[N-1:0] == 4'b0000, "STATUS follows lines");

    csr_write(IRQ_MASK, 32'hA);          // unmask PRR 0 and 2
    csr_read(IRQ_MASK, d);
    check(d[N-1:0] == 4'hA, "MASK readback");
    irq = 4'b0001; t0 = 0;
    while (!msi_req && t0 < 10) begin @(posedge clk); #1 t0++; end
    check(t0 == 2, $sformatf("MSI latency 2 cycles (got %0d)", t0));
    repeat (4) @(posedge clk); #1;
    check(msi_req, "MSI held until acknowledge");
    msi_ack = 1'b1; @(posedge clk); #1 msi_ack = 1'b0;
    check(!msi_req, "MSI dropped on acknowledge");
    repeat (3) @(posedge clk); #1;
    check(msi_count == 1, "one MSI per event while line stays high");

    // ISR: mask all, then unmask while still pending -> a new MSI
    csr_write(IRQ_MASK, 32'hF);
    repeat (2) @(posedge clk); #1;
    csr_write(IRQ_MASK, 32'hE);
    repeat (3) @(posedge clk); #1;
    check(msi_count == 2 && msi_req, "pending line raises a new MSI when unmasked");
    msi_ack = 1'b1; @(posedge clk); #1 msi_ack = 1'b0;

    // a second source while the first is pending: no new edge
    irq = 4'b0011;
    repeat (3) @(posedge clk); #1;
    check(msi_count == 2, "masked source 1 raises nothing");
    csr_read(IRQ_STATUS, d);
    check(d[N-1:0] == 4'b0011, "STATUS shows both sources");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
