// periph_bus: the peripheral bus of SentryCore, bridging one OBI subordinate
// port of the system crossbar to the register-bus peripherals.
//
// Each device owns a 4 KiB window starting at PERIPH_BASE (device i at
// PERIPH_BASE + i * 0x1000) and receives the offset inside its window as
// address. A request is forwarded to the selected device as a register-bus
// access; the OBI gnt is the device's ready, and the read data and error
// come back with rvalid in the next cycle. An address beyond the last device
// is granted at once and answered with err.
//
// Interface: OBI subordinate in, NUM_DEV register-bus manager ports out.
// Timing: one cycle from gnt to rvalid; devices that are always ready give
// one access per cycle.
//
// The paper names a "Regbus/APB" peripheral bus and the devices on it; the
// window size, order and handshake are choices of this design.
module periph_bus
  import sc_pkg::*;
#(
  parameter int unsigned NUM_DEV = 6
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output reg_req_t dev_req_o [NUM_DEV],
  input  reg_rsp_t dev_rsp_i [NUM_DEV]
);

  logic [AW-1:0] offset;
  logic [2:0]    dev;
  logic          mapped;
  logic          rvalid_q;
  logic [DW-1:0] rdata_q;
  logic          err_q;
  logic          gnt;
  logic [DW-1:0] rdata_d;
  logic          err_d;

  assign offset = req_i.addr - PERIPH_BASE;
  assign dev    = offset[14:12];
  assign mapped = (offset[AW-1:15] == '0) && (32'(dev) < NUM_DEV);

  always_comb begin
    gnt     = 1'b0;
    rdata_d = '0;
    err_d   = 1'b0;
    for (int i = 0; i < NUM_DEV; i++) begin
      dev_req_o[i]       = '0;
      dev_req_o[i].write = req_i.we;
      dev_req_o[i].addr  = {20'd0, offset[11:0]};
      dev_req_o[i].wdata = req_i.wdata;
      dev_req_o[i].wstrb = req_i.be;
      if (req_i.req && mapped && dev == 3'(i)) begin
        dev_req_o[i].valid = 1'b1;
        gnt     = dev_rsp_i[i].ready;
        rdata_d = dev_rsp_i[i].rdata;
        err_d   = dev_rsp_i[i].error;
      end
    end
    if (req_i.req && !mapped) begin
      gnt   = 1'b1;
      err_d = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      err_q    <= 1'b0;
    end else begin
      rvalid_q <= gnt;
      if (gnt) begin
        rdata_q <= req_i.we ? '0 : rdata_d;
        err_q   <= err_d;
      end
    end
  end

  always_comb begin
    rsp_o        = '0;
    rsp_o.gnt    = gnt;
    rsp_o.rvalid = rvalid_q;
    rsp_o.rdata  = rdata_q;
    rsp_o.err    = err_q;
  end

endmodule
