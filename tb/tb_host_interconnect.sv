// tb_host_interconnect: self-checking test of the host address decoder with
// two PRR slots. Every slave port has a stand-in that answers with a random
// waitrequest and a random read latency, returning {port, address bits}.
// Checks: each address in the map reaches exactly the expected port, with
// the full address and write data; reads return that port's data; unmapped
// reads return 0xDEADBEEF and unmapped writes go nowhere; the host is held
// while a read is outstanding.
module tb_host_interconnect;
  import vfpga_pkg::*;

  localparam int unsigned N  = 2;
  localparam int unsigned NS = 4 + N;
  logic clk = 1'b0, rst_n = 1'b0;
  csr_req_t hreq;
  csr_rsp_t hrsp;
  csr_req_t sreq [NS];
  csr_rsp_t srsp [NS];
  int checks = 0, failures = 0;

  host_interconnect #(.NUM_PRR(N)) dut (.clk, .rst_n, .host_req(hreq), .host_rsp(hrsp),
                                        .s_req(sreq), .s_rsp(srsp));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int hits [NS];
  logic [CSR_AW-1:0] last_addr [NS];
  logic [31:0] last_wdata [NS];
  int delay [NS];
  logic [31:0] pend [NS];
  for (genvar i = 0; i < NS; i++) begin : g_sl
    initial begin delay[i] = -1; srsp[i] = '{waitrequest: 1'b1, rvalid: 1'b0, rdata: '0}; end
    always @(posedge clk) begin
      srsp[i].rvalid <= 1'b0;
      if (delay[i] == 0) begin srsp[i].rvalid <= 1'b1; srsp[i].rdata <= pend[i]; end
      if (delay[i] >= 0) delay[i] <= delay[i] - 1;
      if (rst_n && (sreq[i].read || sreq[i].write) && !srsp[i].waitrequest) begin
        hits[i]++;
        last_addr[i]  <= sreq[i].addr;
        last_wdata[i] <= sreq[i].wdata;
        if (sreq[i].read) begin
          pend[i]  <= {8'(i), 4'h0, sreq[i].addr};
          delay[i] <= $urandom_range(0, 3);
        end
      end
      srsp[i].waitrequest <= ($urandom_range(0, 2) == 0);
    end
  end

  int held = 0;
  task automatic hacc(input logic rd, input logic [19:0] a, input logic [31:0] wd,
                      output logic [31:0] d);
    hreq = '{read: rd, write: !rd, addr: a, wdata: wd};
    @(posedge clk);
    while (hrsp.waitrequest) @(posedge clk);
    #1 hreq = CSR_REQ_IDLE;
    d = '0;
    if (rd) begin
      // a second access presented now must be held until the data returns
      hreq = '{read: 1'b1, write: 1'b0, addr: 20'h0_0000, wdata: '0};
      #0;
      if (!hrsp.rvalid) begin
        #1;
        if (hrsp.waitrequest) held++;
      end
      hreq = CSR_REQ_IDLE;
      while (!hrsp.rvalid) @(posedge clk);
      d = hrsp.rdata;
      @(posedge clk); #1;
    end
  endtask

  function automatic int expect_port(input logic [19:0] a);
    if (a[19]) return 3;
    case (a[18:12])
      7'd0: return 0;
      7'd1: return 1;
      7'd2: return 2;
      default: if (a[18:12] >= 7'd16 && a[18:12] < 7'd16 + 7'(N)) return 4 + int'(a[18:12]) - 16;
    endcase
    return -1;
  endfunction

  initial begin
    logic [31:0] d;
    logic [19:0] a;
    int p, hits0 [NS], tot;
    hreq = CSR_REQ_IDLE;
    foreach (hits[i]) hits[i] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    for (int t = 0; t < 80; t++) begin
      logic rd;
      logic [31:0] wd;
      case ($urandom_range(0, 5))
        0: a = {1'b1, 19'($urandom)};
        1: a = {1'b0, 7'($urandom_range(0, 2)), 12'($urandom)};
        2, 3: a = {1'b0, 7'(16 + $urandom_range(0, N - 1)), 12'($urandom)};
        default: a = {1'b0, 7'($urandom_range(3, 127)), 12'($urandom)};
      endcase
      a[1:0] = 2'b00;
      rd = ($urandom_range(0, 1) == 1);
      wd = $urandom;
      p  = expect_port(a);
      foreach (hits[i]) hits0[i] = hits[i];
      hacc(rd, a, wd, d);
      repeat (5) @(posedge clk); #1;
      tot = 0;
      foreach (hits[i]) tot += hits[i] - hits0[i];
      if (p < 0) begin
        check(tot == 0, $sformatf("unmapped %h reaches no port", a));
        if (rd) check(d == 32'hDEAD_BEEF, "unmapped read returns DEADBEEF");
      end else begin
        check(tot == 1 && hits[p] - hits0[p] == 1, $sformatf("%h reaches port %0d only", a, p));
        check(last_addr[p] == a, "slave sees full address");
        if (rd) check(d == {8'(p), 4'h0, a}, $sformatf("read data from port %0d", p));
        else    check(last_wdata[p] == wd, "slave sees write data");
      end
    end
    check(held > 0, $sformatf("host held while a read is outstanding (%0d)", held));

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
