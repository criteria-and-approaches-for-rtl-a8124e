// tb_mem_bandwidth: memory-bandwidth micro-benchmark of the shell at its
// default size. Stand-in region masters stream back-to-back memory
// commands (reads and writes alternating) into a DDR model that never
// stalls. Measured over a window of W cycles:
//   * one region alone gets the full DDR port: one 512-bit word per cycle
//     (64 bytes per cycle, 12.8 GB/s at 200 MHz);
//   * all four regions together still fill the port (W words in W cycles)
//     and share it evenly, W/4 words each, by the round-robin arbiter.
// All read data must come back to the region that asked.
module tb_mem_bandwidth;
  import vfpga_pkg::*;

  localparam int unsigned N = NUM_PRR_DEF;
  localparam int unsigned W = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t host_req;
  csr_rsp_t host_rsp;
  logic msi_req;
  logic cb_start, cb_data_valid;
  logic [7:0] cb_region;
  logic [31:0] cb_data;
  mem_req_t ddr_req;
  mem_rsp_t ddr_rsp;
  csr_req_t prr_csr_req [N];
  csr_rsp_t prr_csr_rsp [N];
  logic [N-1:0] prr_freeze;
  mem_req_t prr_mem_req [N];
  mem_rsp_t prr_mem_rsp [N];
  int checks = 0, failures = 0;

  vfpga_shell dut (
    .clk, .rst_n, .host_req, .host_rsp, .msi_req, .msi_ack(1'b0),
    .cb_start, .cb_region, .cb_data, .cb_data_valid, .cb_data_ready(1'b1),
    .cb_done(1'b0), .cb_error(1'b0),
    .ddr_req, .ddr_rsp, .prr_csr_req, .prr_csr_rsp, .prr_irq('0),
    .prr_mem_req, .prr_mem_rsp, .prr_freeze
  );
  ddr_model #(.LAT(8), .STALL_PCT(0)) u_ddr (.clk, .rst_n, .req(ddr_req), .rsp(ddr_rsp));

  always #2.5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [N-1:0] on = '0;
  int taken [N], rd_sent [N], rd_back [N], rd_bad [N];
  logic [MEM_DW-1:0] exp_q [N][$];

  for (genvar k = 0; k < N; k++) begin : g_m
    logic rd_next = 1'b0;
    logic [MEM_AW-1:0] a = MEM_AW'(k * 4096);
    assign prr_csr_rsp[k] = '{waitrequest: 1'b0, rvalid: 1'b0, rdata: '0};
    always_comb begin
      prr_mem_req[k] = MEM_REQ_IDLE;
      if (on[k]) begin
        prr_mem_req[k].read  = rd_next;
        prr_mem_req[k].write = !rd_next;
        prr_mem_req[k].addr  = a;
        prr_mem_req[k].wdata = {16{32'(a)}};
        prr_mem_req[k].be    = '1;
      end
    end
    always @(posedge clk) if (rst_n) begin
      if (on[k] && !prr_mem_rsp[k].waitrequest) begin
        taken[k]++;
        if (rd_next) begin
          rd_sent[k]++;
          exp_q[k].push_back({16{32'(a)}});   // reads the word just written
        end
        if (rd_next) a <= a + 1;
        rd_next <= !rd_next;
      end
      if (prr_mem_rsp[k].rvalid) begin
        rd_back[k]++;
        if (exp_q[k].size() == 0 || exp_q[k][0] != prr_mem_rsp[k].rdata) rd_bad[k]++;
        if (exp_q[k].size() != 0) void'(exp_q[k].pop_front());
      end
    end
  end

  int ddr_taken = 0;
  always @(posedge clk)
    if (rst_n && (ddr_req.read || ddr_req.write) && !ddr_rsp.waitrequest) ddr_taken++;

  initial begin
    int t0 [N], d0;
    host_req = CSR_REQ_IDLE;
    foreach (taken[k]) begin taken[k] = 0; rd_sent[k] = 0; rd_back[k] = 0; rd_bad[k] = 0; end
    repeat (4) @(posedge clk); #1 rst_n = 1'b1;
    repeat (4) @(posedge clk); #1;

    // one region alone
    on = 4'b0001;
    repeat (20) @(posedge clk); #1;
    t0[0] = taken[0]; d0 = ddr_taken;
    repeat (W) @(posedge clk); #1;
    $display("one region: %0d words in %0d cycles", taken[0] - t0[0], W);
    check(taken[0] - t0[0] == W, "one region gets one word per cycle");
    check(ddr_taken - d0 == W, "DDR port full with one region");

    // all regions
    on = '1;
    repeat (20) @(posedge clk); #1;
    foreach (t0[k]) t0[k] = taken[k];
    d0 = ddr_taken;
    repeat (W) @(posedge clk); #1;
    check(ddr_taken - d0 == W, $sformatf("DDR port full with four regions (%0d)", ddr_taken - d0));
    for (int k = 0; k < N; k++) begin
      $display("region %0d: %0d words in %0d cycles", k, taken[k] - t0[k], W);
      check((taken[k] - t0[k]) >= W / N - 1 && (taken[k] - t0[k]) <= W / N + 1,
            $sformatf("region %0d gets a quarter of the port", k));
    end
    on = '0;
    repeat (40) @(posedge clk); #1;
    for (int k = 0; k < N; k++)
      check(rd_back[k] == rd_sent[k] && rd_bad[k] == 0,
            $sformatf("region %0d read data complete and correct (%0d %0d %0d)", k, rd_sent[k], rd_back[k], rd_bad[k]));

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
