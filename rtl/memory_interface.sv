// memory_interface: host access path to the board DDR memory.
//
// The host sees a 512 KiB window (win_*) in its register space and a PAGE
// register (csr_*, offset 0x0) that chooses which 512 KiB page of the DDR
// the window shows. A 32-bit host access at window offset o goes to DDR
// byte address {PAGE, o}: the 512-bit DDR word {PAGE, o[18:6]}, 32-bit lane
// o[5:2], with PAGE as it was when the access was taken. A write is sent with the byte enables of that lane only; a read
// fetches the whole DDR word and returns the lane.
//
// One window access is handled at a time. The access is taken into a
// buffer in the cycle it is presented (writes are posted), then issued on
// the memory port until the interconnect takes it; a read returns its data
// to the host the cycle after the DDR read data arrives. Further host
// accesses wait (waitrequest) until the buffer is free. PAGE reads return
// one cycle after they are taken.
//
// The design being reproduced names this block only; the windowed bridge
// is the simplest host-to-DDR path and is this design's own choice.
module memory_interface
  import vfpga_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  csr_req_t csr_req,
  output csr_rsp_t csr_rsp,
  input  csr_req_t win_req,
  output csr_rsp_t win_rsp,
  output mem_req_t mem_req,
  input  mem_rsp_t mem_rsp
);

  localparam int unsigned PAGE_W = MEM_AW + 6 - WIN_AW;  // 12 bits
  localparam int unsigned LANES  = MEM_DW / CSR_DW;        // 16 lanes

  typedef enum logic [1:0] {MI_IDLE, MI_ISSUE, MI_WAIT, MI_RESP} mi_state_e;

  mi_state_e            state_q;
  logic [PAGE_W-1:0]    page_q;
  csr_req_t             buf_q;
  logic [CSR_DW-1:0]    wdata_rd_q, pg_rdata_q;
  logic                 pg_rvalid_q;
  logic [3:0]           lane;
  logic [MEM_AW-1:0]    word_addr_q;   // page taken with the access

  assign lane = buf_q.addr[5:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= MI_IDLE;
      page_q      <= '0;
      buf_q       <= CSR_REQ_IDLE;
      word_addr_q <= '0;
      wdata_rd_q  <= '0;
      pg_rdata_q  <= '0;
      pg_rvalid_q <= 1'b0;
    end else begin
      // page register
      if (csr_req.write && csr_req.addr[11:0] == MEM_PAGE)
        page_q <= csr_req.wdata[PAGE_W-1:0];
      pg_rvalid_q <= csr_req.read;
      pg_rdata_q  <= (csr_req.addr[11:0] == MEM_PAGE) ? CSR_DW'(page_q) : '0;

      unique case (state_q)
        MI_IDLE: if (win_req.read || win_req.write) begin
          buf_q       <= win_req;
          word_addr_q <= {page_q, win_req.addr[WIN_AW-1:6]};
          state_q     <= MI_ISSUE;
        end
        MI_ISSUE: if (!mem_rsp.waitrequest)
          state_q <= buf_q.read ? MI_WAIT : MI_IDLE;
        MI_WAIT: if (mem_rsp.rvalid) begin
          wdata_rd_q <= mem_rsp.rdata[lane*CSR_DW +: CSR_DW];
          state_q    <= MI_RESP;
        end
        MI_RESP: state_q <= MI_IDLE;
        default: state_q <= MI_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req = MEM_REQ_IDLE;
    if (state_q == MI_ISSUE) begin
      mem_req.read  = buf_q.read;
      mem_req.write = buf_q.write;
      mem_req.addr  = word_addr_q;
      mem_req.wdata = {LANES{buf_q.wdata}};
      mem_req.be    = MEM_BW'(4'hF) << (lane * 4);
    end
  end

  assign win_rsp = '{waitrequest: state_q != MI_IDLE,
                     rvalid: state_q == MI_RESP, rdata: wdata_rd_q};
  assign csr_rsp = '{waitrequest: 1'b0, rvalid: pg_rvalid_q, rdata: pg_rdata_q};

endmodule
