// obi_to_axi: SentryCore's AXI4 manager port. System-bus accesses whose
// address lies outside SentryCore leave through it into the host system.
//
// Every OBI access becomes one single-beat AXI4 transaction (ID 0, LEN 0,
// SIZE 4 bytes, INCR): a write drives AW and W together and is granted once
// both have been accepted; a read drives AR and is granted when it is
// accepted. The B or R response is registered and returned as the OBI
// rvalid one cycle later; SLVERR and DECERR turn into an OBI err. One
// transaction is in flight at a time, so AXI ordering needs no IDs.
//
// Timing: gnt in the cycle the address (and data) handshakes complete,
// rvalid one cycle after the B or R handshake.
//
// The paper gives the manager AXI4 port; the single-beat, single-outstanding
// conversion is this design's simplest way to provide it.
module obi_to_axi
  import sc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT_B, S_WAIT_R} state_e;

  state_e        state_q;
  logic          aw_done_q, w_done_q;
  logic          rvalid_q, err_q;
  logic [DW-1:0] rdata_q;
  logic          aw_hs, w_hs, ar_hs, gnt;

  always_comb begin
    axi_req_o = '0;
    axi_req_o.aw.addr  = obi_req_i.addr;
    axi_req_o.aw.size  = 3'd2;
    axi_req_o.aw.burst = 2'b01;
    axi_req_o.ar       = axi_req_o.aw;
    axi_req_o.w.data   = obi_req_i.wdata;
    axi_req_o.w.strb   = obi_req_i.be;
    axi_req_o.w.last   = 1'b1;
    if (state_q == S_IDLE && obi_req_i.req) begin
      axi_req_o.aw_valid = obi_req_i.we && !aw_done_q;
      axi_req_o.w_valid  = obi_req_i.we && !w_done_q;
      axi_req_o.ar_valid = !obi_req_i.we;
    end
    axi_req_o.b_ready = (state_q == S_WAIT_B);
    axi_req_o.r_ready = (state_q == S_WAIT_R);
  end

  assign aw_hs = axi_req_o.aw_valid && axi_rsp_i.aw_ready;
  assign w_hs  = axi_req_o.w_valid && axi_rsp_i.w_ready;
  assign ar_hs = axi_req_o.ar_valid && axi_rsp_i.ar_ready;
  assign gnt   = ar_hs || ((aw_done_q || aw_hs) && (w_done_q || w_hs) && obi_req_i.we &&
                           state_q == S_IDLE && obi_req_i.req);

  always_comb begin
    obi_rsp_o        = '0;
    obi_rsp_o.gnt    = gnt;
    obi_rsp_o.rvalid = rvalid_q;
    obi_rsp_o.rdata  = rdata_q;
    obi_rsp_o.err    = err_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
      rvalid_q  <= 1'b0;
      err_q     <= 1'b0;
      rdata_q   <= '0;
    end else begin
      rvalid_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (gnt) begin
            aw_done_q <= 1'b0;
            w_done_q  <= 1'b0;
            state_q   <= obi_req_i.we ? S_WAIT_B : S_WAIT_R;
          end else begin
            if (aw_hs) aw_done_q <= 1'b1;
            if (w_hs)  w_done_q  <= 1'b1;
          end
        end
        S_WAIT_B: begin
          if (axi_rsp_i.b_valid) begin
            rvalid_q <= 1'b1;
            rdata_q  <= '0;
            err_q    <= axi_rsp_i.b.resp[1];
            state_q  <= S_IDLE;
          end
        end
        S_WAIT_R: begin
          if (axi_rsp_i.r_valid) begin
            rvalid_q <= 1'b1;
            rdata_q  <= axi_rsp_i.r.data;
            err_q    <= axi_rsp_i.r.resp[1];
            state_q  <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI4 rule: a valid address or data beat is held until accepted
  a_aw_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (axi_req_o.aw_valid && !axi_rsp_i.aw_ready) |=> (axi_req_o.aw_valid && $stable(axi_req_o.aw)));
  a_w_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (axi_req_o.w_valid && !axi_rsp_i.w_ready) |=> (axi_req_o.w_valid && $stable(axi_req_o.w)));
  a_ar_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (axi_req_o.ar_valid && !axi_rsp_i.ar_ready) |=> (axi_req_o.ar_valid && $stable(axi_req_o.ar)));

endmodule
