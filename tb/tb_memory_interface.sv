// tb_memory_interface: self-checking test of the host window into DDR, in
// front of the behavioural DDR model. Checks: PAGE register readback; a
// window write changes exactly the addressed 32-bit lane of the addressed
// DDR word {PAGE, offset[18:6]}; window reads return that lane; the same
// window offset on another page reaches another DDR word; the host is held
// while an access is in flight.
module tb_memory_interface;
  import vfpga_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t creq, wreq;
  csr_rsp_t crsp, wrsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;

  memory_interface dut (.clk, .rst_n, .csr_req(creq), .csr_rsp(crsp),
                        .win_req(wreq), .win_rsp(wrsp), .mem_req(mreq), .mem_rsp(mrsp));
  ddr_model #(.LAT(4), .STALL_PCT(30)) u_ddr (.clk, .rst_n, .req(mreq), .rsp(mrsp));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int stalls = 0;
  task automatic acc(input logic win, input logic rd, input logic [18:0] a,
                     input logic [31:0] wd, output logic [31:0] d);
    csr_req_t r;
    r = '{read: rd, write: !rd, addr: CSR_AW'(a), wdata: wd};
    if (win) wreq = r; else creq = r;
    @(posedge clk);
    while (win && wrsp.waitrequest) begin stalls++; @(posedge clk); end
    #1 wreq = CSR_REQ_IDLE; creq = CSR_REQ_IDLE;
    d = '0;
    if (rd) begin
      while (!(win ? wrsp.rvalid : crsp.rvalid)) @(posedge clk);
      d = win ? wrsp.rdata : crsp.rdata;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    logic [31:0] d, v;
    logic [18:0] off;
    logic [MEM_DW-1:0] w_old, w_new, expw;
    logic [MEM_AW-1:0] wa;
    creq = CSR_REQ_IDLE; wreq = CSR_REQ_IDLE;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    acc(1'b0, 1'b0, 19'h0, 32'h0000_0ABC, d);
    acc(1'b0, 1'b1, 19'h0, 32'h0, d);
    check(d == 32'h0000_0ABC, "PAGE readback");

    for (int i = 0; i < 20; i++) begin
      off = {$urandom_range(0, 8191), 4'($urandom), 2'b00};
      v   = $urandom;
      wa  = {12'hABC, off[18:6]};
      w_old = u_ddr.peek(wa);
      acc(1'b1, 1'b0, off, v, d);
      repeat (6) @(posedge clk); #1;   // posted write: let it land
      w_new = u_ddr.peek(wa);
      expw = w_old;
      expw[off[5:2]*32 +: 32] = v;
      check(w_new == expw, $sformatf("write hits lane %0d of word %h only", off[5:2], wa));
      acc(1'b1, 1'b1, off, 32'h0, d);
      check(d == v, "window read returns written lane");
    end
    // two back-to-back writes: the second must wait for the first
    wreq = '{read: 1'b0, write: 1'b1, addr: CSR_AW'(19'h100), wdata: 32'h0};
    @(posedge clk); #1;
    check(wrsp.waitrequest, "host held while access in flight");
    while (wrsp.waitrequest) @(posedge clk);
    #1 wreq = CSR_REQ_IDLE;

    // another page, same offset
    acc(1'b1, 1'b0, 19'h0_0040, 32'h1111_2222, d);
    acc(1'b0, 1'b0, 19'h0, 32'h0000_0001, d);
    acc(1'b1, 1'b1, 19'h0_0040, 32'h0, d);
    check(d == u_ddr.init_word({12'h001, 13'h1})[31:0], "other page shows other DDR word");
    acc(1'b0, 1'b0, 19'h0, 32'h0000_0ABC, d);
    acc(1'b1, 1'b1, 19'h0_0040, 32'h0, d);
    check(d == 32'h1111_2222, "back on first page");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
