// ddr_model: behavioural stand-in for the DDR controller user port, used
// by the testbenches only. Sparse memory of 512-bit words (unwritten words
// read as a pattern derived from the address, see init_word), a random
// waitrequest (STALL_PCT percent of cycles) and a fixed read latency of LAT
// cycles, read data returned in order. Counts the commands it takes.
module ddr_model
  import vfpga_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output mem_rsp_t rsp
);

  logic [MEM_DW-1:0] mem [logic [MEM_AW-1:0]];
  logic [MEM_DW-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];
  int reads = 0, writes = 0, stall_cycles = 0;

  function automatic logic [MEM_DW-1:0] init_word(input logic [MEM_AW-1:0] a);
    logic [MEM_DW-1:0] w;
    for (int i = 0; i < MEM_DW / 32; i++) w[i*32 +: 32] = {7'(a), 4'(i), 21'h0} ^ 32'h1357_9BDF;
    return w;
  endfunction

  function automatic logic [MEM_DW-1:0] peek(input logic [MEM_AW-1:0] a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  function automatic void poke(input logic [MEM_AW-1:0] a, input logic [MEM_DW-1:0] d);
    mem[a] = d;
  endfunction

  initial begin
    rsp = '{waitrequest: 1'b1, rvalid: 1'b0, rdata: '0};
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    logic [MEM_DW-1:0] w;
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= 1'b0;
    if (rst_n && (req.read || req.write) && !rsp.waitrequest) begin
      if (req.write) begin
        writes++;
        w = peek(req.addr);
        for (int b = 0; b < MEM_BW; b++)
          if (req.be[b]) w[b*8 +: 8] = req.wdata[b*8 +: 8];
        mem[req.addr] = w;
      end else begin
        reads++;
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= peek(req.addr);
      end
    end
    if (rsp.waitrequest && (req.read || req.write)) stall_cycles++;
    rsp.waitrequest <= ($urandom_range(0, 99) < STALL_PCT);
    rsp.rvalid      <= pipe_v[LAT-1];
    rsp.rdata       <= pipe_d[LAT-1];
  end

endmodule
