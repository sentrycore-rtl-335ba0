// timer: the general-purpose timer on SentryCore's peripheral bus.
//
// A 32-bit counter advances once every PRESC+1 clock cycles while enabled.
// When it has reached the compare value it restarts from zero and irq_o
// pulses for one cycle, so the interrupt period is (CMP+1)*(PRESC+1) cycles;
// this is the tick an RTOS or a periodic control loop runs on.
//
// Registers (register bus, byte offsets, byte strobes honoured):
//   0x0 CTRL   bit0 enable, bits 15:8 prescaler PRESC
//   0x4 COUNT  current count (writable)
//   0x8 CMP    compare value
// Timing: always ready; reads return the value of the current cycle.
//
// The paper only names "a general-purpose timer"; its registers and
// behaviour here are choices of this design.
module timer
  import sc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     irq_o
);

  logic [31:0] ctrl_q, count_q, cmp_q;
  logic [7:0]  presc_cnt_q;
  logic        enable;
  logic [7:0]  presc;
  logic        tick, wr;

  assign enable = ctrl_q[0];
  assign presc  = ctrl_q[15:8];
  assign tick   = enable && (presc_cnt_q == presc);
  assign wr     = reg_req_i.valid && reg_req_i.write;
  assign irq_o  = tick && (count_q == cmp_q);

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[11:2])
      10'd0:   reg_rsp_o.rdata = ctrl_q;
      10'd1:   reg_rsp_o.rdata = count_q;
      10'd2:   reg_rsp_o.rdata = cmp_q;
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q      <= '0;
      count_q     <= '0;
      cmp_q       <= '1;
      presc_cnt_q <= '0;
    end else begin
      if (!enable || tick) presc_cnt_q <= '0;
      else                 presc_cnt_q <= presc_cnt_q + 1'b1;
      if (tick) count_q <= (count_q == cmp_q) ? '0 : count_q + 1;
      if (wr) begin
        unique case (reg_req_i.addr[11:2])
          10'd0: ctrl_q  <= apply_strb(ctrl_q, reg_req_i.wdata, reg_req_i.wstrb) & 32'h0000_FF01;
          10'd1: count_q <= apply_strb(count_q, reg_req_i.wdata, reg_req_i.wstrb);
          10'd2: cmp_q   <= apply_strb(cmp_q, reg_req_i.wdata, reg_req_i.wstrb);
          default: ;
        endcase
      end
    end
  end

endmodule
