// axi_to_obi: SentryCore's AXI4 subordinate port. The host system reaches
// SentryCore's memories and peripherals through it (for example to load the
// program or exchange data with the control software).
//
// One AXI4 burst is served at a time. For a read burst the bridge issues one
// OBI read per beat and returns each word as an R beat (RLAST on the last);
// for a write burst it takes one W beat, issues the OBI write with the beat's
// strobes, and after the last beat answers on B. Beat addresses advance by
// 2^SIZE bytes for INCR (and WRAP, treated as INCR) bursts and stay put for
// FIXED bursts. The transaction's ID is echoed; any OBI error in the burst
// gives SLVERR. When both a read and a write are waiting they are taken in
// turn.
//
// Timing: per beat one OBI request and its response, plus the R or W
// handshake: at least three cycles per beat.
//
// The paper gives the subordinate AXI4 port; the beat-by-beat conversion is
// this design's simplest way to provide it. Data width is 32 bits.
module axi_to_obi
  import sc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output obi_req_t obi_req_o,
  input  obi_rsp_t obi_rsp_i
);

  typedef enum logic [2:0] {S_IDLE, S_R_REQ, S_R_WAIT, S_R_OUT, S_W_DATA, S_W_REQ, S_W_WAIT, S_B} state_e;

  state_e        state_q;
  axi_ax_t       ax_q;
  logic [7:0]    beats_q;       // beats left after the current one
  logic [DW-1:0] data_q;
  logic [3:0]    strb_q;
  logic          err_q;         // error in the current beat (reads)
  logic          berr_q;        // error anywhere in the write burst
  logic          prefer_w_q;
  logic [AW-1:0] next_addr;

  assign next_addr = (ax_q.burst == AXI_BURST_FIXED) ? ax_q.addr : ax_q.addr + (AW'(1) << ax_q.size);

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.ar_ready = (state_q == S_IDLE) && !(axi_req_i.aw_valid && prefer_w_q);
    axi_rsp_o.aw_ready = (state_q == S_IDLE) && !(axi_req_i.ar_valid && !prefer_w_q);
    axi_rsp_o.w_ready  = (state_q == S_W_DATA);
    axi_rsp_o.r_valid  = (state_q == S_R_OUT);
    axi_rsp_o.r.id     = ax_q.id;
    axi_rsp_o.r.data   = data_q;
    axi_rsp_o.r.resp   = err_q ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
    axi_rsp_o.r.last   = (beats_q == '0);
    axi_rsp_o.b_valid  = (state_q == S_B);
    axi_rsp_o.b.id     = ax_q.id;
    axi_rsp_o.b.resp   = berr_q ? AXI_RESP_SLVERR : AXI_RESP_OKAY;

    obi_req_o       = '0;
    obi_req_o.req   = (state_q == S_R_REQ) || (state_q == S_W_REQ);
    obi_req_o.we    = (state_q == S_W_REQ);
    obi_req_o.addr  = {ax_q.addr[AW-1:2], 2'b00};
    obi_req_o.be    = (state_q == S_W_REQ) ? strb_q : 4'hF;
    obi_req_o.wdata = data_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      ax_q       <= '0;
      beats_q    <= '0;
      data_q     <= '0;
      strb_q     <= '0;
      err_q      <= 1'b0;
      berr_q     <= 1'b0;
      prefer_w_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (axi_req_i.ar_valid && axi_rsp_o.ar_ready) begin
            ax_q       <= axi_req_i.ar;
            beats_q    <= axi_req_i.ar.len;
            state_q    <= S_R_REQ;
            prefer_w_q <= 1'b1;
          end else if (axi_req_i.aw_valid && axi_rsp_o.aw_ready) begin
            ax_q       <= axi_req_i.aw;
            beats_q    <= axi_req_i.aw.len;
            berr_q     <= 1'b0;
            state_q    <= S_W_DATA;
            prefer_w_q <= 1'b0;
          end
        end
        S_R_REQ:  if (obi_rsp_i.gnt) state_q <= S_R_WAIT;
        S_R_WAIT: begin
          if (obi_rsp_i.rvalid) begin
            data_q  <= obi_rsp_i.rdata;
            err_q   <= obi_rsp_i.err;
            state_q <= S_R_OUT;
          end
        end
        S_R_OUT: begin
          if (axi_req_i.r_ready) begin
            if (beats_q == '0) begin
              state_q <= S_IDLE;
            end else begin
              beats_q   <= beats_q - 1'b1;
              ax_q.addr <= next_addr;
              state_q   <= S_R_REQ;
            end
          end
        end
        S_W_DATA: begin
          if (axi_req_i.w_valid) begin
            data_q  <= axi_req_i.w.data;
            strb_q  <= axi_req_i.w.strb;
            state_q <= S_W_REQ;
          end
        end
        S_W_REQ:  if (obi_rsp_i.gnt) state_q <= S_W_WAIT;
        S_W_WAIT: begin
          if (obi_rsp_i.rvalid) begin
            if (obi_rsp_i.err) berr_q <= 1'b1;
            if (beats_q == '0) begin
              state_q <= S_B;
            end else begin
              beats_q   <= beats_q - 1'b1;
              ax_q.addr <= next_addr;
              state_q   <= S_W_DATA;
            end
          end
        end
        S_B: if (axi_req_i.b_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // the manager must mark the last write beat where the burst ends
  a_wlast: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_W_DATA && axi_req_i.w_valid) |-> (axi_req_i.w.last == (beats_q == '0)));

endmodule
