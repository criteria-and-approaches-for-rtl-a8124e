// vfpga_shell: static region ("shell") of a PCIe FPGA card split into
// NUM_PRR partial reconfiguration regions, each of which a virtual machine
// uses as its own virtual FPGA.
//
// Structure (one clock, as in the working configuration where a single
// clock drives all regions):
//
//   PCIe endpoint --host bus--> host_interconnect --+-> irq_ctrl ---> MSI
//                                                   +-> prr_ctrl ---> PR control block
//                                                   |      | freeze[k]
//                                                   +-> prr_interface[k] <-> PRR k registers
//                                                   +-> memory_interface (PAGE + window)
//   PRR k memory master -> mem_pipe[k] --+
//   memory_interface ---------------------+-> ddr_interconnect -> DDR controller
//
// The regions, the PCIe endpoint, the PR control block and the DDR
// controller are not part of the shell; their buses are ports here:
//   host_req/host_rsp   register master of the PCIe endpoint
//   msi_req/msi_ack     the single MSI line
//   cb_*                partial reconfiguration control block
//   ddr_req/ddr_rsp     DDR controller user port
//   prr_csr_req/rsp[k]  register port of the accelerator in region k
//   prr_irq[k]          its interrupt
//   prr_mem_req/rsp[k]  its memory master
//   prr_freeze[k]       freeze of region k; the region's logic must treat it
//                       as a reset
// Memory port NUM_PRR of the DDR interconnect belongs to the host path;
// ports 0..NUM_PRR-1 to the regions. Timing is that of the parts: see each
// block's header.
//
// From the design being reproduced: the set of blocks and how they connect
// (PCIe-side interconnect, IRQ controller, PRR controller, one PRR
// interface per region, memory interface, pipeline stages towards the DDR
// interconnect), four regions and one clock for all of them. The bus
// protocol, widths and address map are this design's own choices.
module vfpga_shell
  import vfpga_pkg::*;
#(
  parameter int unsigned NUM_PRR    = NUM_PRR_DEF,
  parameter int unsigned MEM_STAGES = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // PCIe endpoint
  input  csr_req_t           host_req,
  output csr_rsp_t           host_rsp,
  output logic               msi_req,
  input  logic               msi_ack,
  // PR control block
  output logic               cb_start,
  output logic [7:0]         cb_region,
  output logic [CSR_DW-1:0]  cb_data,
  output logic               cb_data_valid,
  input  logic               cb_data_ready,
  input  logic               cb_done,
  input  logic               cb_error,
  // DDR controller
  output mem_req_t           ddr_req,
  input  mem_rsp_t           ddr_rsp,
  // partial reconfiguration regions
  output csr_req_t           prr_csr_req [NUM_PRR],
  input  csr_rsp_t           prr_csr_rsp [NUM_PRR],
  input  logic [NUM_PRR-1:0] prr_irq,
  input  mem_req_t           prr_mem_req [NUM_PRR],
  output mem_rsp_t           prr_mem_rsp [NUM_PRR],
  output logic [NUM_PRR-1:0] prr_freeze
);

  localparam int unsigned NS = 4 + NUM_PRR;

  csr_req_t           s_req [NS];
  csr_rsp_t           s_rsp [NS];
  mem_req_t           m_req [NUM_PRR+1];
  mem_rsp_t           m_rsp [NUM_PRR+1];
  logic [NUM_PRR-1:0] freeze, irq_gated;

  host_interconnect #(.NUM_PRR(NUM_PRR)) u_host_ic (
    .clk, .rst_n, .host_req, .host_rsp, .s_req, .s_rsp
  );

  irq_ctrl #(.NUM_PRR(NUM_PRR)) u_irq (
    .clk, .rst_n, .csr_req(s_req[0]), .csr_rsp(s_rsp[0]),
    .prr_irq(irq_gated), .msi_req, .msi_ack
  );

  prr_ctrl #(.NUM_PRR(NUM_PRR)) u_prr_ctrl (
    .clk, .rst_n, .csr_req(s_req[1]), .csr_rsp(s_rsp[1]), .freeze,
    .cb_start, .cb_region, .cb_data, .cb_data_valid, .cb_data_ready,
    .cb_done, .cb_error
  );

  memory_interface u_mem_if (
    .clk, .rst_n,
    .csr_req(s_req[2]), .csr_rsp(s_rsp[2]),
    .win_req(s_req[3]), .win_rsp(s_rsp[3]),
    .mem_req(m_req[NUM_PRR]), .mem_rsp(m_rsp[NUM_PRR])
  );

  for (genvar k = 0; k < NUM_PRR; k++) begin : g_prr
    prr_interface u_prr_if (
      .clk, .rst_n, .freeze(freeze[k]),
      .host_req(s_req[4+k]), .host_rsp(s_rsp[4+k]),
      .krn_req(prr_csr_req[k]), .krn_rsp(prr_csr_rsp[k]),
      .krn_irq(prr_irq[k]), .irq(irq_gated[k])
    );

    mem_pipe #(.STAGES(MEM_STAGES)) u_mem_pipe (
      .clk, .rst_n, .freeze(freeze[k]),
      .up_req(prr_mem_req[k]), .up_rsp(prr_mem_rsp[k]),
      .dn_req(m_req[k]), .dn_rsp(m_rsp[k])
    );
  end

  ddr_interconnect #(.NUM_M(NUM_PRR + 1)) u_ddr_ic (
    .clk, .rst_n, .m_req, .m_rsp, .ddr_req, .ddr_rsp
  );

  assign prr_freeze = freeze;

endmodule
