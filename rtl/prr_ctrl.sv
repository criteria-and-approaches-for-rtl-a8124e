// prr_ctrl: PRR controller of the shell. It drives the device's partial
// reconfiguration control block and owns one freeze register per PRR.
//
// The host writes CTRL with the start bit and a region number. If no
// reconfiguration is running, the region's freeze bit is set in that same
// cycle and a one-cycle cb_start pulse with cb_region goes to the control
// block. The freeze bit both resets the region's logic and isolates all of
// its interfaces (see prr_interface and mem_pipe). The host then writes the
// partial bitfile word by word to DATA; each word is passed to the control
// block as a stream beat (cb_data/cb_data_valid) and the host is held with
// waitrequest until the control block takes it (cb_data_ready). The
// control block, which decodes the bitfile and checks its CRC, ends the
// operation with a cb_done or cb_error pulse. On cb_done the freeze bit is
// cleared; on cb_error the region stays frozen, since its contents are
// undefined, until a later reconfiguration succeeds.
//
// Registers (byte offsets): 0x0 CTRL  write: bit0 start, bits[15:8] region
//                           0x4 STATUS read: bit0 busy, bit1 done, bit2
//                               error, bits[15:8] region, bits[31:16] freeze
//                           0x8 DATA  write: next 32-bit bitfile word
// A start while busy or for a region number >= NUM_PRR is ignored; DATA
// writes while idle are dropped. Reads return one cycle after they are
// taken.
//
// From the design being reproduced: the control block does decoding, CRC
// and the PR flow; freeze registers per PRR, set at the beginning of a
// reconfiguration and cleared when it is done, also resetting the PRR.
// This design's own choices: the register map, the control block
// handshake and the behaviour on error.
module prr_ctrl
  import vfpga_pkg::*;
#(
  parameter int unsigned NUM_PRR = NUM_PRR_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  csr_req_t           csr_req,
  output csr_rsp_t           csr_rsp,
  output logic [NUM_PRR-1:0] freeze,
  output logic               cb_start,
  output logic [7:0]         cb_region,
  output logic [CSR_DW-1:0]  cb_data,
  output logic               cb_data_valid,
  input  logic               cb_data_ready,
  input  logic               cb_done,
  input  logic               cb_error
);

  localparam int unsigned RW = (NUM_PRR > 1) ? $clog2(NUM_PRR) : 1;

  typedef enum logic [0:0] {PR_IDLE, PR_BUSY} pr_state_e;

  pr_state_e          state_q;
  logic [7:0]         region_q;
  logic               done_q, error_q;
  logic [NUM_PRR-1:0] freeze_q;
  logic               rvalid_q;
  logic [CSR_DW-1:0]  rdata_q;
  logic               wr_ctrl, wr_data, start_ok;

  assign wr_ctrl  = csr_req.write && csr_req.addr[11:0] == PR_CTRL;
  assign wr_data  = csr_req.write && csr_req.addr[11:0] == PR_DATA;
  assign start_ok = wr_ctrl && csr_req.wdata[0] && state_q == PR_IDLE &&
                    csr_req.wdata[15:8] < 8'(NUM_PRR);

  // Bitfile words stream straight through while a reconfiguration runs.
  assign cb_data       = csr_req.wdata;
  assign cb_data_valid = wr_data && state_q == PR_BUSY;
  assign cb_region     = region_q;
  assign freeze        = freeze_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= PR_IDLE;
      region_q <= '0;
      done_q   <= 1'b0;
      error_q  <= 1'b0;
      freeze_q <= '0;
      cb_start <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      cb_start <= 1'b0;
      unique case (state_q)
        PR_IDLE: if (start_ok) begin
          state_q  <= PR_BUSY;
          region_q <= csr_req.wdata[15:8];
          freeze_q[RW'(csr_req.wdata[15:8])] <= 1'b1;
          done_q   <= 1'b0;
          error_q  <= 1'b0;
          cb_start <= 1'b1;
        end
        PR_BUSY: if (cb_done || cb_error) begin
          state_q <= PR_IDLE;
          done_q  <= cb_done;
          error_q <= cb_error && !cb_done;
          if (cb_done) freeze_q[RW'(region_q)] <= 1'b0;
        end
        default: state_q <= PR_IDLE;
      endcase

      rvalid_q <= csr_req.read;
      rdata_q  <= '0;
      if (csr_req.read && csr_req.addr[11:0] == PR_STATUS) begin
        rdata_q[0]     <= state_q == PR_BUSY;
        rdata_q[1]     <= done_q;
        rdata_q[2]     <= error_q;
        rdata_q[15:8]  <= region_q;
        rdata_q[16 +: NUM_PRR] <= freeze_q;
      end
    end
  end

  assign csr_rsp = '{waitrequest: cb_data_valid && !cb_data_ready,
                     rvalid: rvalid_q, rdata: rdata_q};

  // A region being reconfigured must be frozen.
  a_frozen_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == PR_BUSY |-> freeze_q[RW'(region_q)]);

endmodule
