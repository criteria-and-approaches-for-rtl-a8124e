// mem_pipe: pipeline stages on the memory port of one PRR, between the
// accelerator's memory master and the DDR interconnect, plus the freeze
// gating of that port.
//
// Commands (read or write with address, data, byte enables) pass through
// STAGES two-entry skid buffers. A skid buffer registers the command and
// also the waitrequest going back upstream, so long routes from a PRR to
// the shell are cut in both directions, while one command per cycle still
// flows when nothing stalls. Read responses pass through STAGES plain
// registers (the response path has no back-pressure). Each stage adds one
// cycle to the command path and one to the response path.
//
// Freeze: while the PRR is frozen no command is taken from it (it sees
// waitrequest). Read responses still owed to the PRR when freeze rose are
// discarded, and the port stays closed after freeze falls until all of
// them have come back, so the newly loaded accelerator never receives data
// it did not ask for. At most 255 reads may be outstanding through the
// port.
//
// From the design being reproduced: pipeline stages between the PRR memory
// interfaces and the DDR side, and freezing of all PRR interfaces during
// reconfiguration. This design's own choices: the number of stages, skid
// buffers, and the draining rule.
module mem_pipe
  import vfpga_pkg::*;
#(
  parameter int unsigned STAGES = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     freeze,
  input  mem_req_t up_req,
  output mem_rsp_t up_rsp,
  output mem_req_t dn_req,
  input  mem_rsp_t dn_rsp
);

  mem_req_t          main_q [STAGES];
  mem_req_t          skid_q [STAGES];
  logic              main_v [STAGES];
  logic              skid_v [STAGES];
  mem_req_t          s_in   [STAGES];
  logic              s_in_v [STAGES];
  logic              s_out_rdy [STAGES];
  logic              rsp_v  [STAGES];
  logic [MEM_DW-1:0] rsp_d  [STAGES];

  logic [7:0] outst_q;
  logic       drop_q, blocked, up_valid, take_up, rsp_up, rd_full;

  assign rd_full  = outst_q == 8'hFF;
  assign blocked  = freeze || drop_q || (up_req.read && rd_full);
  assign up_valid = (up_req.read || up_req.write) && !blocked;
  assign take_up  = up_valid && !skid_v[0];
  assign rsp_up   = rsp_v[STAGES-1];

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    if (s == 0) begin : g_first
      assign s_in[s]   = up_req;
      assign s_in_v[s] = up_valid;
    end else begin : g_next
      assign s_in[s]   = main_q[s-1];
      assign s_in_v[s] = main_v[s-1];
    end
    if (s == STAGES - 1) begin : g_last
      assign s_out_rdy[s] = !dn_rsp.waitrequest;
    end else begin : g_mid
      assign s_out_rdy[s] = !skid_v[s+1];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        main_q[s] <= MEM_REQ_IDLE;
        skid_q[s] <= MEM_REQ_IDLE;
        main_v[s] <= 1'b0;
        skid_v[s] <= 1'b0;
        rsp_v[s]  <= 1'b0;
        rsp_d[s]  <= '0;
      end else begin
        if (!main_v[s] || s_out_rdy[s]) begin
          // main register empties (or was empty): refill from skid or input
          if (skid_v[s]) begin
            main_q[s] <= skid_q[s];
            main_v[s] <= 1'b1;
            skid_v[s] <= 1'b0;
          end else begin
            main_q[s] <= s_in[s];
            main_v[s] <= s_in_v[s];
          end
        end else if (s_in_v[s] && !skid_v[s]) begin
          // main is stalled: park the incoming command in the skid register
          skid_q[s] <= s_in[s];
          skid_v[s] <= 1'b1;
        end
        if (s == 0) begin
          rsp_v[s] <= dn_rsp.rvalid;
          rsp_d[s] <= dn_rsp.rdata;
        end else begin
          rsp_v[s] <= rsp_v[s-1];
          rsp_d[s] <= rsp_d[s-1];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outst_q <= '0;
      drop_q  <= 1'b0;
    end else begin
      outst_q <= outst_q + 8'(take_up && up_req.read) - 8'(rsp_up);
      drop_q  <= freeze ||
                 (drop_q && (outst_q + 8'(take_up && up_req.read) - 8'(rsp_up)) != 8'd0);
    end
  end

  always_comb begin
    dn_req = main_q[STAGES-1];
    if (!main_v[STAGES-1]) dn_req = MEM_REQ_IDLE;
  end

  assign up_rsp = '{waitrequest: blocked || skid_v[0],
                    rvalid: rsp_up && !(freeze || drop_q),
                    rdata: rsp_d[STAGES-1]};

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_up |-> outst_q != 8'd0);

endmodule
