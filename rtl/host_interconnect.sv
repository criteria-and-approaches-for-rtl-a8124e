// host_interconnect: address decoder between the PCIe endpoint's register
// master and the slaves of the shell.
//
// Address map (byte address, 20 bits):
//   bit 19 = 1            DDR window of the memory interface (512 KiB)
//   bits[18:12] = 0       IRQ controller
//   bits[18:12] = 1       PRR controller
//   bits[18:12] = 2       memory interface PAGE register
//   bits[18:12] = 16 + k  PRR interface k, k < NUM_PRR
// Slave port index: 0 IRQ, 1 PRR controller, 2 PAGE, 3 window, 4+k PRR k.
// Slaves see the full address and use the low bits.
//
// The decoder passes the request to the selected slave in the same cycle
// and returns that slave's waitrequest. After a read is taken it accepts
// nothing more until the read data has come back, so responses can never
// overtake each other. An access to an unmapped address is taken at once;
// a read there returns 0xDEADBEEF one cycle later.
//
// The design being reproduced shows this interconnect in its block diagram;
// the map and the one-read-at-a-time rule are this design's own choices.
module host_interconnect
  import vfpga_pkg::*;
#(
  parameter int unsigned NUM_PRR = NUM_PRR_DEF,
  localparam int unsigned NS = 4 + NUM_PRR
) (
  input  logic     clk,
  input  logic     rst_n,
  input  csr_req_t host_req,
  output csr_rsp_t host_rsp,
  output csr_req_t s_req [NS],
  input  csr_rsp_t s_rsp [NS]
);

  localparam int unsigned SW = $clog2(NS + 1);
  localparam logic [SW-1:0] NONE = SW'(NS);   // unmapped
  localparam int unsigned IW = $clog2(NS);

  typedef enum logic [1:0] {HI_IDLE, HI_WAIT, HI_UNMAP} hi_state_e;

  hi_state_e     state_q;
  logic [SW-1:0] dec, sel_q;
  logic          access, wait_sel, taken;

  always_comb begin
    logic [6:0] slot;
    slot = host_req.addr[18:12];
    dec  = NONE;
    if (host_req.addr[19])                         dec = SW'(3);
    else if (slot == SLOT_IRQ)                     dec = SW'(0);
    else if (slot == SLOT_PR)                      dec = SW'(1);
    else if (slot == SLOT_MEM)                     dec = SW'(2);
    else if (slot >= SLOT_PRR0 && slot < SLOT_PRR0 + 7'(NUM_PRR))
      dec = SW'(4) + SW'(slot - SLOT_PRR0);
  end

  assign access   = (host_req.read || host_req.write) && state_q == HI_IDLE;
  assign wait_sel = (dec == NONE) ? 1'b0 : s_rsp[IW'(dec)].waitrequest;
  assign taken    = access && !wait_sel;

  always_comb begin
    for (int i = 0; i < NS; i++) begin
      s_req[i] = CSR_REQ_IDLE;
      if (access && dec == SW'(i)) s_req[i] = host_req;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= HI_IDLE;
      sel_q   <= '0;
    end else begin
      unique case (state_q)
        HI_IDLE: if (taken && host_req.read) begin
          sel_q   <= dec;
          state_q <= (dec == NONE) ? HI_UNMAP : HI_WAIT;
        end
        HI_WAIT:  if (s_rsp[IW'(sel_q)].rvalid) state_q <= HI_IDLE;
        HI_UNMAP: state_q <= HI_IDLE;
        default:  state_q <= HI_IDLE;
      endcase
    end
  end

  always_comb begin
    host_rsp = '{waitrequest: 1'b1, rvalid: 1'b0, rdata: '0};
    unique case (state_q)
      HI_IDLE:  host_rsp.waitrequest = wait_sel;
      HI_WAIT:  begin
        host_rsp.rvalid = s_rsp[IW'(sel_q)].rvalid;
        host_rsp.rdata  = s_rsp[IW'(sel_q)].rdata;
      end
      HI_UNMAP: begin
        host_rsp.rvalid = 1'b1;
        host_rsp.rdata  = UNMAPPED_DATA;
      end
      default: ;
    endcase
  end

endmodule
