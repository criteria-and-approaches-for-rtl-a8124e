// vfpga_pkg: widths and bus types shared by the blocks of the vFPGA shell.
//
// The shell is the static region of a partially reconfigurable FPGA that
// hosts several user accelerators, one per partial reconfiguration region
// (PRR). Two buses recur through it:
//   * the host register bus (csr_req_t / csr_rsp_t): 32-bit single accesses
//     coming from the PCIe endpoint, byte addressed;
//   * the memory bus (mem_req_t / mem_rsp_t): 512-bit word accesses towards
//     the DDR controller, word addressed, with byte enables.
// Both follow Avalon-MM rules: a master holds read/write, addr and data
// stable while waitrequest is high; the access is taken in the cycle where
// (read|write) && !waitrequest; read data comes back later, in order, in a
// cycle with rvalid high. Four PRRs follow the design being reproduced; the
// bus protocol and all widths are this implementation's own choice.
package vfpga_pkg;

  localparam int unsigned NUM_PRR_DEF = 4;   // PRRs in the shell
  localparam int unsigned CSR_AW = 20;       // host byte address (1 MiB BAR)
  localparam int unsigned CSR_DW = 32;       // host data width
  localparam int unsigned MEM_AW = 25;       // DDR word address (2 GiB of 64 B)
  localparam int unsigned MEM_DW = 512;      // DDR data width
  localparam int unsigned MEM_BW = MEM_DW / 8;

  typedef struct packed {
    logic              read;
    logic              write;
    logic [CSR_AW-1:0] addr;
    logic [CSR_DW-1:0] wdata;
  } csr_req_t;

  typedef struct packed {
    logic              waitrequest;
    logic              rvalid;
    logic [CSR_DW-1:0] rdata;
  } csr_rsp_t;

  typedef struct packed {
    logic              read;
    logic              write;
    logic [MEM_AW-1:0] addr;
    logic [MEM_DW-1:0] wdata;
    logic [MEM_BW-1:0] be;
  } mem_req_t;

  typedef struct packed {
    logic              waitrequest;
    logic              rvalid;
    logic [MEM_DW-1:0] rdata;
  } mem_rsp_t;

  localparam csr_req_t CSR_REQ_IDLE = '{read: 1'b0, write: 1'b0, addr: '0, wdata: '0};
  localparam mem_req_t MEM_REQ_IDLE = '{read: 1'b0, write: 1'b0, addr: '0, wdata: '0, be: '0};

  // Register offsets (byte offsets inside a slave's 4 KiB slot)
  localparam logic [11:0] IRQ_STATUS = 12'h000;
  localparam logic [11:0] IRQ_MASK   = 12'h004;
  localparam logic [11:0] PR_CTRL    = 12'h000;
  localparam logic [11:0] PR_STATUS  = 12'h004;
  localparam logic [11:0] PR_DATA    = 12'h008;
  localparam logic [11:0] MEM_PAGE   = 12'h000;

  // Host address map: bit 19 set selects the 512 KiB DDR window, otherwise
  // bits [18:12] select a 4 KiB register slot.
  localparam logic [6:0] SLOT_IRQ  = 7'd0;
  localparam logic [6:0] SLOT_PR   = 7'd1;
  localparam logic [6:0] SLOT_MEM  = 7'd2;
  localparam logic [6:0] SLOT_PRR0 = 7'd16;  // PRR interface k at slot 16+k
  localparam int unsigned WIN_AW   = 19;     // window size 2^19 bytes

  localparam logic [CSR_DW-1:0] UNMAPPED_DATA = 32'hDEAD_BEEF;

endpackage
