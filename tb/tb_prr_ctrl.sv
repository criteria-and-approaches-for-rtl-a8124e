// tb_prr_ctrl: self-checking test of the PRR controller.
// A small control-block stand-in accepts bitfile words with a random ready,
// records them, and answers done (or error) after the expected number of
// words. Checks: freeze of the chosen region rises in the cycle after the
// start write and no other region freezes; the start pulse carries the
// region; every word reaches the control block once, in order, with the host
// stalled while ready is low; STATUS bits; freeze falls on done; a start
// while busy and a start for a region that does not exist are ignored; a
// region stays frozen after an error.
module tb_prr_ctrl;
  import vfpga_pkg::*;

  localparam int unsigned N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t req;
  csr_rsp_t rsp;
  logic [N-1:0] freeze;
  logic cb_start, cb_data_valid, cb_data_ready, cb_done, cb_error;
  logic [7:0] cb_region;
  logic [31:0] cb_data;
  int checks = 0, failures = 0;

  prr_ctrl #(.NUM_PRR(N)) dut (.clk, .rst_n, .csr_req(req), .csr_rsp(rsp), .freeze,
    .cb_start, .cb_region, .cb_data, .cb_data_valid, .cb_data_ready, .cb_done, .cb_error);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int stalls = 0;
  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    req = '{read: 1'b0, write: 1'b1, addr: CSR_AW'(a), wdata: d};
    @(posedge clk);
    while (rsp.waitrequest) begin stalls++; @(posedge clk); end
    #1 req = CSR_REQ_IDLE;
  endtask

  task automatic csr_read(input logic [11:0] a, output logic [31:0] d);
    req = '{read: 1'b1, write: 1'b0, addr: CSR_AW'(a), wdata: '0};
    @(posedge clk); #1 req = CSR_REQ_IDLE;
    while (!rsp.rvalid) @(posedge clk);
    d = rsp.rdata;
    @(posedge clk); #1;
  endtask

  // control block stand-in
  logic [31:0] got [$];
  int   expect_words = 0, starts = 0;
  logic fail_next = 1'b0;
  logic [7:0] start_region;
  always @(posedge clk) begin
    cb_done  <= 1'b0;
    cb_error <= 1'b0;
    cb_data_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n && cb_start) begin starts++; start_region = cb_region; end
    if (cb_data_valid && cb_data_ready) begin
      got.push_back(cb_data);
      if (got.size() == expect_words) begin
        if (fail_next) cb_error <= 1'b1; else cb_done <= 1'b1;
      end
    end
  end

  initial begin
    logic [31:0] d;
    logic [31:0] words [8];
    req = CSR_REQ_IDLE; cb_data_ready = 1'b0; cb_done = 1'b0; cb_error = 1'b0;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;
    check(freeze == '0, "no region frozen after reset");

    // reconfigure region 2 with 8 words
    expect_words = 8; got.delete();
    foreach (words[i]) words[i] = $urandom;
    csr_write(PR_CTRL, 32'h0000_0201);
    check(freeze == 4'b0100, "freeze of region 2 rises with start");
    @(posedge clk); #1;
    check(starts == 1 && start_region == 8'd2, $sformatf("start pulse carries region 2 (%0d %0d)", starts, start_region));
    csr_read(PR_STATUS, d);
    check(d[0] == 1'b1 && d[15:8] == 8'd2 && d[19:16] == 4'b0100, "STATUS busy, region, freeze");
    csr_write(PR_CTRL, 32'h0000_0101);    // busy: ignored
    check(starts == 1 && freeze == 4'b0100, "start while busy ignored");
    for (int i = 0; i < 8; i++) begin
      csr_write(PR_DATA, words[i]);
      if (i < 7) check(freeze == 4'b0100, "region stays frozen during load");
    end
    repeat (3) @(posedge clk); #1;
    check(got.size() == 8, "all words delivered once");
    for (int i = 0; i < 8 && i < got.size(); i++)
      check(got[i] == words[i], $sformatf("word %0d in order", i));
    check(stalls > 0, "host stalled while control block not ready");
    check(freeze == 4'b0000, "freeze released on done");
    csr_read(PR_STATUS, d);
    check(d[2:0] == 3'b010, "STATUS done");

    // non-existent region
    csr_write(PR_CTRL, 32'h0000_0701);
    repeat (2) @(posedge clk); #1;
    check(starts == 1 && freeze == '0, $sformatf("start for region 7 ignored (%0d %b)", starts, freeze));

    // error on region 1: stays frozen
    expect_words = 2; got.delete(); fail_next = 1'b1;
    csr_write(PR_CTRL, 32'h0000_0101);
    csr_write(PR_DATA, 32'h1234_5678);
    csr_write(PR_DATA, 32'h9ABC_DEF0);
    repeat (3) @(posedge clk); #1;
    csr_read(PR_STATUS, d);
    check(d[2:0] == 3'b100, "STATUS error");
    check(freeze == 4'b0010, "region stays frozen after error");
    // data write while idle is dropped
    csr_write(PR_DATA, 32'hFFFF_FFFF);
    repeat (2) @(posedge clk); #1;
    check(got.size() == 2, "data while idle dropped");
    // successful retry releases it
    expect_words = 1; got.delete(); fail_next = 1'b0;
    csr_write(PR_CTRL, 32'h0000_0101);
    csr_write(PR_DATA, 32'h0BAD_F00D);
    repeat (3) @(posedge clk); #1;
    check(freeze == 4'b0000 && starts == 3, "retry succeeds and releases freeze");

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
