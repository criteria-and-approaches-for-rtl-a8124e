// vadd_kernel: behavioural stand-in for a user accelerator placed in one
// PRR, used by the testbenches only. It computes C[i] = A[i] + B[i] over
// n 512-bit words, adding 16 lanes of 32 bits each, through its memory
// master, then raises its interrupt until the host clears it.
// Register map (byte offsets): 0x00 ID (the kernel identity loaded by the
// last reconfiguration), 0x04 CTRL (write bit0 start, bit1 clear
// interrupt), 0x08 STATUS (bit0 busy, bit1 done), 0x0C A, 0x10 B, 0x14 C
// (DDR word addresses), 0x18 n. Reads return one cycle after they are
// taken; the register port never stalls. rst is the region's reset
// (shell reset or freeze).
module vadd_kernel
  import vfpga_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] id,
  input  csr_req_t   csr_req,
  output csr_rsp_t   csr_rsp,
  output logic       irq,
  output mem_req_t   mem_req,
  input  mem_rsp_t   mem_rsp
);

  typedef enum logic [2:0] {K_IDLE, K_RDA, K_RDB, K_WAIT, K_WR} k_state_e;

  k_state_e          st;
  logic [MEM_AW-1:0] a_q, b_q, c_q;
  logic [31:0]       n_q, i_q;
  logic              done_q;
  logic [MEM_DW-1:0] da, db;
  logic [1:0]        got;
  logic              rv_q;
  logic [31:0]       rd_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= K_IDLE; done_q <= 1'b0; irq <= 1'b0; rv_q <= 1'b0; rd_q <= '0;
      a_q <= '0; b_q <= '0; c_q <= '0; n_q <= '0; i_q <= '0; got <= '0;
      da <= '0; db <= '0;
    end else begin
      rv_q <= csr_req.read;
      if (csr_req.read) begin
        case (csr_req.addr[7:0])
          8'h00: rd_q <= 32'(id);
          8'h08: rd_q <= {30'h0, done_q, st != K_IDLE};
          8'h0C: rd_q <= 32'(a_q);
          8'h18: rd_q <= n_q;
          default: rd_q <= '0;
        endcase
      end
      if (csr_req.write) begin
        case (csr_req.addr[7:0])
          8'h04: begin
            if (csr_req.wdata[1]) irq <= 1'b0;
            if (csr_req.wdata[0] && st == K_IDLE) begin
              st <= (n_q == 0) ? K_IDLE : K_RDA; i_q <= '0; done_q <= 1'b0;
            end
          end
          8'h0C: a_q <= MEM_AW'(csr_req.wdata);
          8'h10: b_q <= MEM_AW'(csr_req.wdata);
          8'h14: c_q <= MEM_AW'(csr_req.wdata);
          8'h18: n_q <= csr_req.wdata;
          default: ;
        endcase
      end
      if (mem_rsp.rvalid) begin
        if (got == 2'd0) da <= mem_rsp.rdata; else db <= mem_rsp.rdata;
        got <= got + 2'd1;
      end
      case (st)
        K_RDA: if (!mem_rsp.waitrequest) st <= K_RDB;
        K_RDB: if (!mem_rsp.waitrequest) st <= K_WAIT;
        K_WAIT: if (got == 2'd2) st <= K_WR;
        K_WR: if (!mem_rsp.waitrequest) begin
          got <= '0;
          i_q <= i_q + 1;
          if (i_q + 1 == n_q) begin st <= K_IDLE; done_q <= 1'b1; irq <= 1'b1; end
          else st <= K_RDA;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    mem_req = MEM_REQ_IDLE;
    case (st)
      K_RDA: begin mem_req.read = 1'b1; mem_req.addr = a_q + MEM_AW'(i_q); end
      K_RDB: begin mem_req.read = 1'b1; mem_req.addr = b_q + MEM_AW'(i_q); end
      K_WR: begin
        mem_req.write = 1'b1;
        mem_req.addr  = c_q + MEM_AW'(i_q);
        mem_req.be    = '1;
        for (int l = 0; l < MEM_DW / 32; l++)
          mem_req.wdata[l*32 +: 32] = da[l*32 +: 32] + db[l*32 +: 32];
      end
      default: ;
    endcase
  end

  assign csr_rsp = '{waitrequest: 1'b0, rvalid: rv_q, rdata: rd_q};

endmodule
