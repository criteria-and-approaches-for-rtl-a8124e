// tb_vfpga_shell: end-to-end test of the shell at its default size (four
// PRRs, one memory pipeline stage). Around the shell sit behavioural
// stand-ins for the PCIe side (tasks driving the host bus and taking the
// MSI), the PR control block, the DDR controller and one vector-add
// accelerator per region.
// Sequence: load every region through the PRR controller (checking the
// freeze while loading and the kernel identity afterwards); load a corrupt
// bitfile into one region (error, region stays frozen) and reload it; write
// the A and B vectors of every region into DDR through the host window;
// unmask interrupts and start all four kernels together; serve the MSIs
// the way a host driver would (read STATUS, mask, clear the kernel
// interrupt, unmask); read every C vector back and compare it with A + B.
// It counts how often each mechanism of the shell happened and fails if one
// never did: freeze, a frozen access, a PR error, MSI, a source masked while
// pending, a re-raised MSI on unmask, DDR arbitration between PRRs, a
// stalled PRR memory command, an unmapped access.
module tb_vfpga_shell;
  import vfpga_pkg::*;

  localparam int unsigned N  = NUM_PRR_DEF;
  localparam int unsigned NW = 8;          // 512-bit words per vector
  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t host_req;
  csr_rsp_t host_rsp;
  logic msi_req, msi_ack;
  logic cb_start, cb_data_valid, cb_data_ready, cb_done, cb_error;
  logic [7:0] cb_region;
  logic [31:0] cb_data;
  mem_req_t ddr_req;
  mem_rsp_t ddr_rsp;
  csr_req_t prr_csr_req [N];
  csr_rsp_t prr_csr_rsp [N];
  logic [N-1:0] prr_irq, prr_freeze;
  mem_req_t prr_mem_req [N];
  mem_rsp_t prr_mem_rsp [N];
  logic [7:0] loaded_id [N];
  int checks = 0, failures = 0;

  vfpga_shell dut (
    .clk, .rst_n, .host_req, .host_rsp, .msi_req, .msi_ack,
    .cb_start, .cb_region, .cb_data, .cb_data_valid, .cb_data_ready, .cb_done, .cb_error,
    .ddr_req, .ddr_rsp, .prr_csr_req, .prr_csr_rsp, .prr_irq,
    .prr_mem_req, .prr_mem_rsp, .prr_freeze
  );

  pr_cb_model #(.NUM_PRR(N), .LOAD_CYCLES(30)) u_cb (
    .clk, .rst_n, .start(cb_start), .region(cb_region), .data(cb_data),
    .data_valid(cb_data_valid), .data_ready(cb_data_ready), .done(cb_done),
    .error(cb_error), .loaded_id
  );

  ddr_model #(.LAT(6), .STALL_PCT(15)) u_ddr (.clk, .rst_n, .req(ddr_req), .rsp(ddr_rsp));

  for (genvar k = 0; k < N; k++) begin : g_krn
    vadd_kernel u_k (
      .clk, .rst(!rst_n || prr_freeze[k]), .id(loaded_id[k]),
      .csr_req(prr_csr_req[k]), .csr_rsp(prr_csr_rsp[k]), .irq(prr_irq[k]),
      .mem_req(prr_mem_req[k]), .mem_rsp(prr_mem_rsp[k])
    );
  end

  always #2.5 clk = ~clk;   // 200 MHz

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_freeze = 0, n_frozen_acc = 0, n_pr_err = 0, n_msi = 0, n_masked_pend = 0;
  int n_remsi = 0, n_arb = 0, n_mem_stall = 0, n_unmapped = 0;
  logic msi_prev = 1'b0;
  logic [N-1:0] frz_prev = '0;
  always @(posedge clk) if (rst_n) begin
    int req_n;
    for (int k = 0; k < N; k++) if (prr_freeze[k] && !frz_prev[k]) n_freeze++;
    frz_prev <= prr_freeze;
    if (msi_req && !msi_prev) n_msi++;
    msi_prev <= msi_req;
    req_n = 0;
    for (int k = 0; k < N; k++) if (dut.m_req[k].read || dut.m_req[k].write) req_n++;
    if (req_n >= 2) n_arb++;
    for (int k = 0; k < N; k++)
      if ((prr_mem_req[k].read || prr_mem_req[k].write) && prr_mem_rsp[k].waitrequest) n_mem_stall++;
  end

  // ---------------- host bus tasks ----------------
  task automatic hwrite(input logic [19:0] a, input logic [31:0] d);
    host_req = '{read: 1'b0, write: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    while (host_rsp.waitrequest) @(posedge clk);
    #1 host_req = CSR_REQ_IDLE;
  endtask

  task automatic hread(input logic [19:0] a, output logic [31:0] d);
    host_req = '{read: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    while (host_rsp.waitrequest) @(posedge clk);
    #1 host_req = CSR_REQ_IDLE;
    while (!host_rsp.rvalid) @(posedge clk);
    d = host_rsp.rdata;
    @(posedge clk); #1;
  endtask

  function automatic logic [19:0] slot(input int s, input logic [11:0] off);
    return {1'b0, 7'(s), off};
  endfunction
  function automatic logic [19:0] prr(input int k, input logic [11:0] off);
    return slot(16 + k, off);
  endfunction

  // PR of region k with kernel identity id; corrupt makes the check word wrong
  task automatic reconfigure(input int k, input logic [7:0] id, input logic corrupt,
                             output logic [31:0] st);
    logic [31:0] d, xr;
    int plen;
    plen = 6 + k;
    hwrite(slot(1, PR_CTRL), {16'h0, 8'(k), 8'h01});
    hread(slot(1, PR_STATUS), d);
    check(d[0] && d[16 + k], $sformatf("region %0d busy and frozen during PR", k));
    hread(prr(k, 12'h000), d);
    if (d == 32'h0) n_frozen_acc++;
    check(d == 32'h0, "register read of a frozen region returns 0");
    hwrite(slot(1, PR_DATA), {16'hB17F, 8'h00, id});
    hwrite(slot(1, PR_DATA), 32'(plen));
    xr = '0;
    for (int i = 0; i < plen; i++) begin
      d = $urandom; xr ^= d;
      hwrite(slot(1, PR_DATA), d);
    end
    hwrite(slot(1, PR_DATA), corrupt ? ~xr : xr);
    do hread(slot(1, PR_STATUS), st); while (st[0]);
  endtask

  // ---------------- MSI service (host driver) ----------------
  logic [N-1:0] served = '0;
  bit isr_on = 1'b0;
  task automatic isr();
    logic [31:0] st, d;
    msi_ack = 1'b1; @(posedge clk); #1 msi_ack = 1'b0;
    hwrite(slot(0, IRQ_MASK), 32'hF);              // mask all while serving
    hread(slot(0, IRQ_STATUS), st);
    for (int k = 0; k < N; k++) if (st[k] && !served[k]) begin
      hread(prr(k, 12'h008), d);
      check(d[1], $sformatf("kernel %0d reports done", k));
      hwrite(prr(k, 12'h004), 32'h2);              // clear kernel interrupt
      served[k] = 1'b1;
    end
    hread(slot(0, IRQ_STATUS), st);
    // sources that rose while masked are still pending here
    for (int k = 0; k < N; k++) if (st[k] && !served[k]) n_masked_pend++;
    hwrite(slot(0, IRQ_MASK), 32'h0);              // unmask: pending ones re-raise MSI
    if (|(st[N-1:0] & ~served)) begin
      repeat (3) @(posedge clk); #1;
      if (msi_req) n_remsi++;
    end
  endtask

  function automatic logic [31:0] va(input int k, input int w, input int l);
    return 32'(k * 32'h0100_0000 + w * 32'h1_0000 + l * 32'h11 + 32'h7);
  endfunction
  function automatic logic [31:0] vb(input int k, input int w, input int l);
    return 32'((k + 1) * 32'h0003_1000 + w * 32'h1234 + l * 32'h0300_0001);
  endfunction

  initial begin
    logic [31:0] d, st;
    int t;
    host_req = CSR_REQ_IDLE; msi_ack = 1'b0;
    repeat (4) @(posedge clk); #1 rst_n = 1'b1;
    repeat (2) @(posedge clk); #1;

    hread(slot(0, IRQ_MASK), d);
    check(d[N-1:0] == '1, "interrupts masked after reset");
    hread(slot(5, 12'h0), d);
    if (d == 32'hDEAD_BEEF) n_unmapped++;
    check(d == 32'hDEAD_BEEF, "unmapped read");

    // load a kernel into every region
    for (int k = 0; k < N; k++) begin
      reconfigure(k, 8'h10 + 8'(k), 1'b0, st);
      check(st[2:0] == 3'b010, $sformatf("region %0d PR done", k));
      check(prr_freeze[k] == 1'b0, $sformatf("region %0d unfrozen", k));
      hread(prr(k, 12'h000), d);
      check(d == 32'h10 + 32'(k), $sformatf("region %0d runs kernel %h (got %h)", k, 8'h10 + 8'(k), d));
    end
    // a corrupt bitfile for region 2, then a good one
    reconfigure(2, 8'h77, 1'b1, st);
    if (st[2]) n_pr_err++;
    check(st[2:0] == 3'b100, "corrupt bitfile reports error");
    check(prr_freeze[2] == 1'b1, "region stays frozen after PR error");
    reconfigure(2, 8'h12, 1'b0, st);
    check(st[2:0] == 3'b010 && !prr_freeze[2], "region 2 reloaded");

    // vectors into DDR: region k uses words 64k.. (A), +16 (B), +32 (C)
    hwrite(slot(2, MEM_PAGE), 32'h0);
    for (int k = 0; k < N; k++)
      for (int w = 0; w < NW; w++)
        for (int l = 0; l < 16; l++) begin
          hwrite({1'b1, 19'((64 * k + w) * 64 + l * 4)}, va(k, w, l));
          hwrite({1'b1, 19'((64 * k + 16 + w) * 64 + l * 4)}, vb(k, w, l));
        end
    // program and start every kernel together
    for (int k = 0; k < N; k++) begin
      hwrite(prr(k, 12'h00C), 32'(64 * k));
      hwrite(prr(k, 12'h010), 32'(64 * k + 16));
      hwrite(prr(k, 12'h014), 32'(64 * k + 32));
      hwrite(prr(k, 12'h018), 32'(NW));
    end
    hwrite(slot(0, IRQ_MASK), 32'h0);
    for (int k = 0; k < N; k++) hwrite(prr(k, 12'h004), 32'h1);

    t = 0;
    while (served != '1 && t < 20000) begin
      if (msi_req) isr();
      else begin @(posedge clk); #1; t++; end
    end
    check(served == '1, "every kernel finished and was served");

    // read results back
    for (int k = 0; k < N; k++) begin
      int bad;
      bad = 0;
      for (int w = 0; w < NW; w++)
        for (int l = 0; l < 16; l++) begin
          hread({1'b1, 19'((64 * k + 32 + w) * 64 + l * 4)}, d);
          if (d != va(k, w, l) + vb(k, w, l)) bad++;
        end
      check(bad == 0, $sformatf("region %0d result C = A + B (%0d wrong lanes)", k, bad));
    end

    $display("mechanisms: freeze=%0d frozen_access=%0d pr_error=%0d msi=%0d masked_pending=%0d remsi=%0d arbitration=%0d mem_stall=%0d unmapped=%0d",
             n_freeze, n_frozen_acc, n_pr_err, n_msi, n_masked_pend, n_remsi, n_arb, n_mem_stall, n_unmapped);
    check(n_freeze > 0, "freeze happened");
    check(n_frozen_acc > 0, "frozen access happened");
    check(n_pr_err > 0, "PR error happened");
    check(n_msi > 0, "MSI happened");
    check(n_masked_pend > 0, "masked pending interrupt happened");
    check(n_remsi > 0, "MSI re-raised on unmask happened");
    check(n_arb > 0, "DDR arbitration between PRRs happened");
    check(n_mem_stall > 0, "PRR memory stall happened");
    check(n_unmapped > 0, "unmapped access happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
