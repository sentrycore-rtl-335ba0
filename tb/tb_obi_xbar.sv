// tb_obi_xbar: self-checking test of the system-bus crossbar.
//
// Five manager threads issue random reads and writes (random byte enables)
// into all five address regions at once; five subordinate models grant at
// random and answer in order after random delays. Each subordinate checks
// that it only sees addresses of its own region and that a waiting request
// stays stable; each manager checks its read data against its own reference
// copy. A final phase measures that a manager alone gets one transfer per
// cycle from a subordinate that always grants and answers next cycle.
module tb_obi_xbar;
  import sc_pkg::*;

  localparam int unsigned NM = 5, NS = 5;
  localparam int unsigned N_TXN = 300;

  logic clk = 0, rst_n = 0;
  obi_req_t mreq [NM];
  obi_rsp_t mrsp [NM];
  obi_req_t sreq [NS];
  obi_rsp_t srsp [NS];
  int checks = 0, failures = 0;
  logic fast = 0;   // subordinates always grant and answer next cycle
  logic slow_rsp = 0;   // subordinates always grant but answer rarely

  always #5 clk = ~clk;

  obi_xbar #(.NUM_MGR(NM), .NUM_SUB(NS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mgr_req_i(mreq), .mgr_rsp_o(mrsp),
    .sub_req_o(sreq), .sub_rsp_i(srsp));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------ subordinate models
  logic [31:0] smem [logic [31:0]];
  logic [NS-1:0] gnt_rnd;
  logic [31:0] q_data [NS][$];

  for (genvar s = 0; s < NS; s++) begin : g_sub
    obi_req_t prev;
    logic     prev_wait;
    assign srsp[s].gnt = sreq[s].req && (fast || slow_rsp || gnt_rnd[s]);
    always @(negedge clk) begin
      gnt_rnd[s] <= 1'($urandom);
      srsp[s].rvalid <= 1'b0;
      if (q_data[s].size() > 0 && (fast || (slow_rsp ? $urandom_range(3) == 0 : $urandom_range(2) == 0))) begin
        srsp[s].rvalid <= 1'b1;
        srsp[s].rdata  <= q_data[s][0];
        srsp[s].err    <= 1'b0;
      end
    end
    always @(posedge clk) begin
      if (rst_n) begin
        if (srsp[s].rvalid) void'(q_data[s].pop_front());
        if (prev_wait) begin
          checks++;
          if (sreq[s] != prev) begin
            failures++;
            $display("FAIL: request to subordinate %0d changed before gnt", s);
          end
        end
        prev_wait = sreq[s].req && !srsp[s].gnt;
        prev      = sreq[s];
        if (sreq[s].req && srsp[s].gnt) begin
          logic [31:0] a, old;
          a = {sreq[s].addr[31:2], 2'b00};
          checks++;
          if (decode_addr(a) != sub_idx_e'(s)) begin
            failures++;
            $display("FAIL: address %h reached subordinate %0d", a, s);
          end
          old = smem.exists(a) ? smem[a] : 32'h0;
          if (sreq[s].we) begin
            for (int b = 0; b < 4; b++) if (sreq[s].be[b]) old[8*b +: 8] = sreq[s].wdata[8*b +: 8];
            smem[a] = old;
            q_data[s].push_back(32'h0);
          end else begin
            q_data[s].push_back(old);
          end
        end
      end else begin
        prev_wait = 1'b0;
        srsp[s].rvalid = 1'b0;
      end
    end
  end

  // ---------------------------------------------------------- manager threads
  localparam logic [31:0] BASES [NS] = '{32'h0000_0000, 32'h0000_8000, 32'h0001_0000,
                                        32'h0002_0000, 32'h4000_0000};
  int done_cnt = 0;

  task automatic mgr_access(input int m, input obi_req_t r, output logic [31:0] rdata, output int gl);
    @(negedge clk);
    mreq[m] = r;
    gl = 0;
    forever begin
      #4;
      if (mrsp[m].gnt) break;
      @(negedge clk);
      gl++;
    end
    @(negedge clk);
    mreq[m] = '0;
    forever begin
      #4;
      if (mrsp[m].rvalid) begin
        rdata = mrsp[m].rdata;
        break;
      end
      @(negedge clk);
    end
  endtask

  task automatic mgr_thread(input int m);
    logic [31:0] refm [logic [31:0]];
    for (int i = 0; i < N_TXN; i++) begin
      obi_req_t r;
      logic [31:0] a, rd, expv;
      int gl;
      a = BASES[$urandom_range(NS - 1)] + 32'(m * 32'h400) + 32'(4 * $urandom_range(15));
      r = '{req: 1'b1, we: 1'($urandom), be: 4'($urandom), addr: a, wdata: $urandom};
      expv = refm.exists(a) ? refm[a] : 32'h0;
      if (r.we) begin
        for (int b = 0; b < 4; b++) if (r.be[b]) expv[8*b +: 8] = r.wdata[8*b +: 8];
        refm[a] = expv;
      end
      mgr_access(m, r, rd, gl);
      if (!r.we) check(rd == expv, $sformatf("mgr %0d read %h: %h exp %h", m, a, rd, expv));
    end
    done_cnt++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) mreq[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      mgr_thread(0);
      mgr_thread(1);
      mgr_thread(2);
      mgr_thread(3);
      mgr_thread(4);
    join
    check(done_cnt == NM, "not all managers finished");

    // back-to-back: manager 1 streams 16 reads from data memory, new
    // request issued in the cycle the previous response arrives
    fast = 1;
    repeat (3) @(posedge clk);
    begin
      int n, cyc;
      @(negedge clk);
      mreq[1] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h0002_0000, wdata: '0};
      n = 0;
      cyc = 0;
      while (n < 16) begin
        #4;
        if (mrsp[1].gnt) n++;
        @(negedge clk);
        cyc++;
      end
      mreq[1] = '0;
      check(cyc == 16, $sformatf("16 back-to-back grants took %0d cycles", cyc));
    end
    repeat (3) @(posedge clk);

    // pipelined: manager 3 keeps issuing reads to instruction memory while
    // responses lag; up to MAX_OUT requests are in flight and the data must
    // come back in order
    fast = 0;
    slow_rsp = 1;
    begin
      logic [31:0] expv [$];
      int max_out;
      max_out = 0;
      for (int i = 0; i < 24; i++) expv.push_back(smem.exists(32'h0001_0C00 + 32'(4 * i)) ?
                                                   smem[32'h0001_0C00 + 32'(4 * i)] : 32'h0);
      fork
        begin
          for (int i = 0; i < 24; i++) begin
            @(negedge clk);
            mreq[3] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h0001_0C00 + 32'(4 * i), wdata: '0};
            forever begin #4; if (mrsp[3].gnt) break; @(negedge clk); end
          end
          @(negedge clk);
          mreq[3] = '0;
        end
        begin
          for (int i = 0; i < 24; i++) begin
            forever begin
              @(posedge clk);
              if (g_sub[SUB_IMEM].prev_wait == 1'b0 && q_data[SUB_IMEM].size() > max_out)
                max_out = q_data[SUB_IMEM].size();
              if (mrsp[3].rvalid) break;
            end
            check(mrsp[3].rdata == expv[i], $sformatf("pipelined read %0d: %h exp %h", i, mrsp[3].rdata, expv[i]));
          end
        end
      join
      check(max_out == 4, $sformatf("at most %0d requests were in flight", max_out));
    end
    slow_rsp = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
