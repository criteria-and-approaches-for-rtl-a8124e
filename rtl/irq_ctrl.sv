// irq_ctrl: the shell's interrupt controller (one MSI line for all PRRs).
//
// The interrupt lines of the PRRs are concatenated and sampled into the
// STATUS register every cycle (one register stage, level sense). A MASK
// register holds one bit per PRR; a set bit keeps that PRR from raising the
// MSI. The MSI request rises when the set of pending-and-unmasked bits goes
// from empty to non-empty and stays high until the PCIe endpoint returns
// msi_ack. The host reads STATUS to find the source, typically sets MASK
// while its service routine runs and clears it at the end; a source that
// is still pending when it is unmasked raises a fresh MSI.
//
// Registers (byte offsets in the slot): 0x0 STATUS (read only),
// 0x4 MASK (read/write, resets to all ones: every PRR is inactive after
// reset). Register accesses never stall; read data is returned one cycle
// after the read is taken.
//
// From the design being reproduced: concatenation, buffering in a status
// register, one MSI, a mask register for the service routine and for
// inactive PRRs. This design's own choices: offsets, reset value of MASK,
// edge-triggered MSI request with acknowledge.
module irq_ctrl
  import vfpga_pkg::*;
#(
  parameter int unsigned NUM_PRR = NUM_PRR_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  csr_req_t           csr_req,
  output csr_rsp_t           csr_rsp,
  input  logic [NUM_PRR-1:0] prr_irq,
  output logic               msi_req,
  input  logic               msi_ack
);

  logic [NUM_PRR-1:0] status_q, mask_q;
  logic               active_q;      // any pending & unmasked, last cycle
  logic               active;
  logic               rvalid_q;
  logic [CSR_DW-1:0]  rdata_q;

  assign active = |(status_q & ~mask_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status_q <= '0;
      mask_q   <= '1;
      active_q <= 1'b0;
      msi_req  <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      status_q <= prr_irq;
      active_q <= active;
      if (active && !active_q) msi_req <= 1'b1;
      else if (msi_ack)        msi_req <= 1'b0;

      if (csr_req.write && csr_req.addr[11:0] == IRQ_MASK)
        mask_q <= csr_req.wdata[NUM_PRR-1:0];

      rvalid_q <= csr_req.read;
      rdata_q  <= '0;
      if (csr_req.read) begin
        unique case (csr_req.addr[11:0])
          IRQ_STATUS: rdata_q[NUM_PRR-1:0] <= status_q;
          IRQ_MASK:   rdata_q[NUM_PRR-1:0] <= mask_q;
          default:    rdata_q <= '0;
        endcase
      end
    end
  end

  assign csr_rsp = '{waitrequest: 1'b0, rvalid: rvalid_q, rdata: rdata_q};

endmodule
