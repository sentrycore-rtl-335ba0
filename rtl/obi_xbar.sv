// obi_xbar: the OBI system-bus crossbar of SentryCore.
//
// Every manager (voted core instruction and data ports, the AXI4 subordinate
// port, the DMA engine, the debug module) can reach every subordinate (debug
// module memory, peripheral bus, instruction memory, data memory, the AXI4
// manager port). Each request is routed by sc_pkg::decode_addr; addresses
// outside the local regions go to the external AXI4 port.
//
// How it works: per subordinate a round-robin arbiter picks one of the
// managers that address it. A request offered to a subordinate but not yet
// granted stays locked to that subordinate, so the subordinate sees a stable
// request as OBI requires. On each grant the manager's index is pushed into a
// queue of that subordinate (depth MAX_OUT); since subordinates answer in
// order, the head of the queue says where the next rvalid goes. A manager may
// have several transactions in flight as long as they all go to the same
// subordinate, which keeps its responses in order; a request to another
// subordinate waits until the earlier ones have been answered. A manager
// streaming to a one-cycle memory thus gets one transfer per cycle, and no
// combinational path runs from a response back to a grant.
//
// Timing: combinational from manager request to subordinate request and from
// subordinate response to manager response; no added latency.
//
// The paper gives the crossbar and its connections (Fig. 1); the arbitration
// policy, the ordering rule and the address map are choices of this design.
module obi_xbar
  import sc_pkg::*;
#(
  parameter int unsigned NUM_MGR = 5,
  parameter int unsigned NUM_SUB = 5,
  parameter int unsigned MAX_OUT = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t mgr_req_i [NUM_MGR],
  output obi_rsp_t mgr_rsp_o [NUM_MGR],
  output obi_req_t sub_req_o [NUM_SUB],
  input  obi_rsp_t sub_rsp_i [NUM_SUB]
);

  localparam int unsigned MW = (NUM_MGR > 1) ? $clog2(NUM_MGR) : 1;
  localparam int unsigned SW = (NUM_SUB > 1) ? $clog2(NUM_SUB) : 1;
  localparam int unsigned QW = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  // manager side
  logic [CW-1:0]      pend_cnt_q [NUM_MGR];
  logic [SW-1:0]      pend_sub_q [NUM_MGR];
  logic [NUM_MGR-1:0] rsp_arrive;
  logic [NUM_MGR-1:0] req_ok;
  logic [SW-1:0]      target [NUM_MGR];

  // subordinate side
  logic [MW-1:0] queue_q [NUM_SUB][MAX_OUT];
  logic [QW-1:0] wptr_q [NUM_SUB], rptr_q [NUM_SUB];
  logic [CW-1:0] cnt_q [NUM_SUB];
  logic [MW-1:0] rr_q [NUM_SUB];
  logic [NUM_SUB-1:0] lock_q;
  logic [MW-1:0] lock_idx_q [NUM_SUB];

  logic [NUM_SUB-1:0] sel_valid;
  logic [MW-1:0]      sel_idx [NUM_SUB];
  logic [NUM_SUB-1:0] granted;
  logic [NUM_SUB-1:0] popped;
  obi_rsp_t           mrsp [NUM_MGR];
  logic [NUM_MGR-1:0] mgnt;

  // ---------------------------------------------------------------- routing
  always_comb begin
    for (int m = 0; m < NUM_MGR; m++) begin
      target[m] = SW'(decode_addr(mgr_req_i[m].addr));
    end
  end

  // responses: the head of each subordinate's queue owns its rvalid
  always_comb begin
    rsp_arrive = '0;
    popped     = '0;
    for (int m = 0; m < NUM_MGR; m++) mrsp[m] = '0;
    for (int s = 0; s < NUM_SUB; s++) begin
      if (sub_rsp_i[s].rvalid && cnt_q[s] != '0) begin
        popped[s] = 1'b1;
        for (int m = 0; m < NUM_MGR; m++) begin
          if (queue_q[s][rptr_q[s]] == MW'(m)) begin
            rsp_arrive[m]       = 1'b1;
            mrsp[m].rvalid = 1'b1;
            mrsp[m].rdata  = sub_rsp_i[s].rdata;
            mrsp[m].err    = sub_rsp_i[s].err;
          end
        end
      end
    end
  end

  // a manager may only add to the queue of the subordinate it already waits on
  always_comb begin
    for (int m = 0; m < NUM_MGR; m++) begin
      req_ok[m] = mgr_req_i[m].req && (pend_cnt_q[m] == '0 || pend_sub_q[m] == target[m]);
    end
  end

  // arbitration
  always_comb begin
    logic [MW-1:0] m;
    m = '0;
    for (int s = 0; s < NUM_SUB; s++) begin
      sel_valid[s] = 1'b0;
      sel_idx[s]   = '0;
      if (lock_q[s]) begin
        sel_valid[s] = 1'b1;
        sel_idx[s]   = lock_idx_q[s];
      end else if (cnt_q[s] < CW'(MAX_OUT)) begin
        for (int k = NUM_MGR - 1; k >= 0; k--) begin
          // scan from rr_q upwards, wrapping; the last hit in this
          // descending loop is the first in round-robin order
          m = MW'((int'(rr_q[s]) + k) % NUM_MGR);
          if (req_ok[m] && target[m] == SW'(s)) begin
            sel_valid[s] = 1'b1;
            sel_idx[s]   = m;
          end
        end
      end
      sub_req_o[s]     = mgr_req_i[sel_idx[s]];
      sub_req_o[s].req = sel_valid[s];
    end
  end

  always_comb begin
    granted = '0;
    mgnt    = '0;
    for (int s = 0; s < NUM_SUB; s++) begin
      if (sel_valid[s] && sub_rsp_i[s].gnt) granted[s] = 1'b1;
    end
    for (int s = 0; s < NUM_SUB; s++) begin
      if (granted[s]) mgnt[sel_idx[s]] = 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_MGR; i++) begin
      mgr_rsp_o[i]     = mrsp[i];
      mgr_rsp_o[i].gnt = mgnt[i];
    end
  end

  // ------------------------------------------------------------------ state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lock_q <= '0;
      for (int m = 0; m < NUM_MGR; m++) begin
        pend_cnt_q[m] <= '0;
        pend_sub_q[m] <= '0;
      end
      for (int s = 0; s < NUM_SUB; s++) begin
        wptr_q[s]     <= '0;
        rptr_q[s]     <= '0;
        cnt_q[s]      <= '0;
        rr_q[s]       <= '0;
        lock_idx_q[s] <= '0;
        for (int q = 0; q < MAX_OUT; q++) queue_q[s][q] <= '0;
      end
    end else begin
      for (int m = 0; m < NUM_MGR; m++) begin
        if (mgnt[m]) pend_sub_q[m] <= target[m];
        pend_cnt_q[m] <= pend_cnt_q[m] + CW'(mgnt[m]) - CW'(rsp_arrive[m]);
      end
      for (int s = 0; s < NUM_SUB; s++) begin
        lock_q[s]     <= sel_valid[s] && !granted[s];
        lock_idx_q[s] <= sel_idx[s];
        if (granted[s]) begin
          queue_q[s][wptr_q[s]] <= sel_idx[s];
          wptr_q[s] <= (wptr_q[s] == QW'(MAX_OUT - 1)) ? '0 : wptr_q[s] + 1'b1;
          rr_q[s]   <= (sel_idx[s] == MW'(NUM_MGR - 1)) ? '0 : sel_idx[s] + 1'b1;
        end
        if (popped[s]) begin
          rptr_q[s] <= (rptr_q[s] == QW'(MAX_OUT - 1)) ? '0 : rptr_q[s] + 1'b1;
        end
        cnt_q[s] <= cnt_q[s] + CW'(granted[s]) - CW'(popped[s]);
      end
    end
  end

  // OBI manager rule: a request waiting for gnt stays unchanged
  for (genvar m = 0; m < NUM_MGR; m++) begin : g_mchk
    a_mgr_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (mgr_req_i[m].req && !mgr_rsp_o[m].gnt) |=> (mgr_req_i[m].req && $stable(mgr_req_i[m])));
  end

  // a subordinate must not answer more often than it was granted
  for (genvar s = 0; s < NUM_SUB; s++) begin : g_chk
    a_no_spurious_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni)
      sub_rsp_i[s].rvalid |-> cnt_q[s] != '0);
  end

endmodule
