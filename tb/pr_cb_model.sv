// pr_cb_model: behavioural stand-in for the device's partial
// reconfiguration control block, used by the testbenches only.
// Bitfile format of this model: word 0 = {16'hB17F, 8'h00, id}, word 1 =
// number of payload words p, then p payload words, then one check word equal
// to the XOR of the payload words. After the check word the model waits
// LOAD_CYCLES cycles (the load time) and pulses done, having set the
// region's identity to id; a bad header or check word pulses error and
// leaves the identity at 0. The data ready is random.
module pr_cb_model #(
  parameter int unsigned NUM_PRR     = 4,
  parameter int unsigned LOAD_CYCLES = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  region,
  input  logic [31:0] data,
  input  logic        data_valid,
  output logic        data_ready,
  output logic        done,
  output logic        error,
  output logic [7:0]  loaded_id [NUM_PRR]
);

  int          cnt = 0, plen = 0, wait_c = -1, loads = 0, errors = 0;
  logic [31:0] hdr = '0, xr = '0;
  logic [7:0]  reg_q = '0;
  logic        bad = 1'b0, active = 1'b0;

  initial begin
    for (int i = 0; i < NUM_PRR; i++) loaded_id[i] = '0;
    data_ready = 1'b0; done = 1'b0; error = 1'b0;
  end

  always @(posedge clk) begin
    done  <= 1'b0;
    error <= 1'b0;
    data_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && start) begin
      active = 1'b1; cnt = 0; xr = '0; bad = 1'b0; reg_q = region;
      loaded_id[region] <= '0;
    end
    if (rst_n && active && data_valid && data_ready) begin
      if (cnt == 0) begin hdr = data; if (data[31:16] != 16'hB17F) bad = 1'b1; end
      else if (cnt == 1) plen = int'(data);
      else if (cnt < plen + 2) xr ^= data;
      else begin
        if (data != xr) bad = 1'b1;
        active = 1'b0;
        wait_c = LOAD_CYCLES;
      end
      cnt++;
    end
    if (wait_c == 0) begin
      if (bad) begin error <= 1'b1; errors++; end
      else begin done <= 1'b1; loads++; loaded_id[reg_q] <= hdr[7:0]; end
    end
    if (wait_c >= 0) wait_c--;
  end

endmodule
