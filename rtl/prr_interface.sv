// prr_interface: control-domain bridge between the host and the register
// set of the accelerator in one PRR. The shell holds one copy per PRR.
//
// Every host access is first captured in a one-entry buffer (address, data,
// direction); the host is then held off with waitrequest until the buffer
// is free again. From the buffer the access is replayed on the PRR's
// register port, waiting out the accelerator's waitrequest, and for a read
// its rvalid; the read data is returned to the host one cycle later. Host
// writes are therefore posted: the host is released as soon as the buffer
// has taken them.
//
// Freeze: while the PRR controller reconfigures this PRR nothing reaches
// the PRR. Host writes are dropped, host reads complete with data 0, the
// accelerator's interrupt is masked, and an access already in flight when
// freeze rises is abandoned (a read returns 0).
//
// Latency: a read takes 1 cycle into the buffer, the accelerator's own
// latency (at least 2 cycles to present and return), then 1 cycle back.
//
// From the design being reproduced: an intermediate buffer between host and
// PRR registers, duplicated per PRR, frozen with the PRR. This design's own
// choices: buffer depth one, read data 0 while frozen.
module prr_interface
  import vfpga_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     freeze,
  input  csr_req_t host_req,
  output csr_rsp_t host_rsp,
  output csr_req_t krn_req,
  input  csr_rsp_t krn_rsp,
  input  logic     krn_irq,
  output logic     irq
);

  typedef enum logic [1:0] {PI_IDLE, PI_FWD, PI_RD, PI_RESP} pi_state_e;

  pi_state_e         state_q;
  csr_req_t          buf_q;
  logic [CSR_DW-1:0] rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= PI_IDLE;
      buf_q   <= CSR_REQ_IDLE;
      rdata_q <= '0;
    end else begin
      unique case (state_q)
        PI_IDLE: if (host_req.read || host_req.write) begin
          buf_q   <= host_req;
          rdata_q <= '0;
          if (freeze) state_q <= host_req.read ? PI_RESP : PI_IDLE;
          else        state_q <= PI_FWD;
        end
        PI_FWD: begin
          if (freeze)                    state_q <= buf_q.read ? PI_RESP : PI_IDLE;
          else if (!krn_rsp.waitrequest) state_q <= buf_q.read ? PI_RD : PI_IDLE;
        end
        PI_RD: begin
          if (freeze) state_q <= PI_RESP;
          else if (krn_rsp.rvalid) begin
            rdata_q <= krn_rsp.rdata;
            state_q <= PI_RESP;
          end
        end
        PI_RESP: state_q <= PI_IDLE;
        default: state_q <= PI_IDLE;
      endcase
    end
  end

  always_comb begin
    krn_req = CSR_REQ_IDLE;
    if (state_q == PI_FWD && !freeze) krn_req = buf_q;
  end

  assign host_rsp = '{waitrequest: state_q != PI_IDLE,
                      rvalid: state_q == PI_RESP, rdata: rdata_q};
  assign irq = krn_irq && !freeze;

  a_no_krn_access_frozen: assert property (@(posedge clk) disable iff (!rst_n)
    freeze |-> !(krn_req.read || krn_req.write));

endmodule
