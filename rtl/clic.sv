// clic: core-local interrupt controller (simplified RISC-V CLIC) of SentryCore.
//
// Every interrupt line i has a pending bit (ip), an enable bit (ie), a
// trigger attribute (level or rising edge) and an 8-bit control value (ctl)
// that sets its level. Level-triggered lines are pending while the input is
// high; edge-triggered lines become pending on a rising edge and stay pending
// until the core acknowledges that id (or software clears the bit). Among the
// pending and enabled lines the one with the highest ctl wins, ties going to
// the higher id; it is offered to the cores when its level is above the
// threshold mintthresh. The choice is registered, so irq_valid_o/irq_id_o/
// irq_level_o follow the inputs by one cycle.
//
// Registers (register bus, byte offsets):
//   0x008          mintthresh (bits 7:0)
//   0x800 + 4*i    clicint[i]: byte 0 ip, byte 1 ie, byte 2 attr (bit0 = edge),
//                  byte 3 ctl, written per byte
// The per-interrupt word layout follows the RISC-V CLIC draft; its base is
// moved from 0x1000 to 0x800 to fit the 4 KiB peripheral window.
//
// The paper states that SentryCore implements the RISC-V CLIC; vectoring
// modes, privilege modes and the nlbits/priority split are left out here, and
// the fastirq register banking lives in the cores, which are not part of
// this RTL.
module clic
  import sc_pkg::*;
#(
  parameter int unsigned NUM_IRQ  = 64,
  parameter int unsigned CTL_BITS = 8,
  localparam int unsigned IDW     = $clog2(NUM_IRQ)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  reg_req_t            reg_req_i,
  output reg_rsp_t            reg_rsp_o,
  input  logic [NUM_IRQ-1:0]  irq_i,
  output logic                irq_valid_o,
  output logic [IDW-1:0]      irq_id_o,
  output logic [CTL_BITS-1:0] irq_level_o,
  input  logic                irq_ack_i,
  input  logic [IDW-1:0]      irq_ack_id_i
);

  logic [NUM_IRQ-1:0]  ip_q, ie_q, edge_q, irq_prev_q, ip;
  logic [CTL_BITS-1:0] ctl_q [NUM_IRQ];
  logic [CTL_BITS-1:0] thresh_q;

  logic                best_valid;
  logic [IDW-1:0]      best_id;
  logic [CTL_BITS-1:0] best_ctl;

  logic wr;
  logic is_int;
  logic [IDW-1:0] int_idx;
  assign wr      = reg_req_i.valid && reg_req_i.write;
  assign is_int  = reg_req_i.addr[11] && (reg_req_i.addr[10:2] < 9'(NUM_IRQ));
  assign int_idx = IDW'(reg_req_i.addr[10:2]);

  // effective pending: level lines follow the input, edge lines the latch
  always_comb begin
    for (int i = 0; i < NUM_IRQ; i++) ip[i] = edge_q[i] ? ip_q[i] : irq_i[i];
  end

  // arbitration: highest ctl, ties to the higher id
  always_comb begin
    best_valid = 1'b0;
    best_id    = '0;
    best_ctl   = '0;
    for (int i = 0; i < NUM_IRQ; i++) begin
      if (ip[i] && ie_q[i] && (!best_valid || ctl_q[i] >= best_ctl)) begin
        best_valid = 1'b1;
        best_id    = IDW'(i);
        best_ctl   = ctl_q[i];
      end
    end
  end

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    if (is_int) begin
      reg_rsp_o.rdata = {ctl_q[int_idx], 7'd0, edge_q[int_idx], 7'd0, ie_q[int_idx], 7'd0, ip[int_idx]};
    end else if (reg_req_i.addr[11:0] == 12'h008) begin
      reg_rsp_o.rdata = 32'(thresh_q);
    end else if (reg_req_i.addr[11:0] != 12'h000) begin
      reg_rsp_o.error = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ip_q        <= '0;
      ie_q        <= '0;
      edge_q      <= '0;
      irq_prev_q  <= '0;
      thresh_q    <= '0;
      irq_valid_o <= 1'b0;
      irq_id_o    <= '0;
      irq_level_o <= '0;
      for (int i = 0; i < NUM_IRQ; i++) ctl_q[i] <= '0;
    end else begin
      irq_prev_q <= irq_i;
      for (int i = 0; i < NUM_IRQ; i++) begin
        if (irq_i[i] && !irq_prev_q[i]) ip_q[i] <= 1'b1;
        else if (irq_ack_i && irq_ack_id_i == IDW'(i)) ip_q[i] <= 1'b0;
      end
      if (wr && is_int) begin
        if (reg_req_i.wstrb[0] && edge_q[int_idx]) ip_q[int_idx]   <= reg_req_i.wdata[0];
        if (reg_req_i.wstrb[1])                    ie_q[int_idx]   <= reg_req_i.wdata[8];
        if (reg_req_i.wstrb[2])                    edge_q[int_idx] <= reg_req_i.wdata[16];
        if (reg_req_i.wstrb[3])                    ctl_q[int_idx]  <= reg_req_i.wdata[31:24];
      end
      if (wr && reg_req_i.addr[11:0] == 12'h008 && reg_req_i.wstrb[0]) begin
        thresh_q <= reg_req_i.wdata[CTL_BITS-1:0];
      end
      irq_valid_o <= best_valid && (best_ctl > thresh_q);
      irq_id_o    <= best_id;
      irq_level_o <= best_ctl;
    end
  end

endmodule
