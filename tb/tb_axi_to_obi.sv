// tb_axi_to_obi: self-checking test of the AXI4 subordinate port.
//
// An OBI memory model with random grants and response delays sits behind the
// bridge. The test issues INCR write bursts of random length with random
// strobes and FIXED bursts, reads everything back with bursts, and checks
// data, RLAST, the echoed IDs and SLVERR for a burst that touches the model's
// error address.
module tb_axi_to_obi;
  import sc_pkg::*;

  logic clk = 0, rst_n = 0;
  axi_req_t areq;
  axi_rsp_t arsp;
  obi_req_t oreq;
  obi_rsp_t orsp;
  int checks = 0, failures = 0;
  localparam logic [31:0] ERR_ADDR = 32'h0002_0F00;

  always #5 clk = ~clk;

  axi_to_obi dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(areq), .axi_rsp_o(arsp),
                  .obi_req_o(oreq), .obi_rsp_i(orsp));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------- OBI memory model
  logic [31:0] mem [logic [31:0]];
  logic gnt_rnd, pend = 0, pend_err;
  logic [31:0] pend_data;
  assign orsp.gnt = oreq.req && gnt_rnd && !pend;
  always @(negedge clk) begin
    gnt_rnd <= 1'($urandom);
    orsp.rvalid <= pend && 1'($urandom);
    orsp.rdata  <= pend_data;
    orsp.err    <= pend_err;
  end
  always @(posedge clk) begin
    if (!rst_n) orsp.rvalid = 0;
    else begin
      if (orsp.rvalid) pend = 0;
      if (oreq.req && orsp.gnt) begin
        logic [31:0] old;
        old = mem.exists(oreq.addr) ? mem[oreq.addr] : 32'h0;
        pend_err  = (oreq.addr == ERR_ADDR);
        pend_data = old;
        if (oreq.we) mem[oreq.addr] = apply_strb(old, oreq.wdata, oreq.be);
        pend = 1;
      end
    end
  end

  // ------------------------------------------------------------ AXI manager
  task automatic wr_burst(input logic [3:0] id, input logic [31:0] addr, input int len,
                          input logic [1:0] burst, input logic [31:0] data [$],
                          input logic [3:0] strb [$], output logic [1:0] resp);
    @(negedge clk);
    areq.aw = '{id: id, addr: addr, len: 8'(len - 1), size: 3'd2, burst: burst};
    areq.aw_valid = 1;
    forever begin #4; if (arsp.aw_ready) break; @(negedge clk); end
    @(negedge clk);
    areq.aw_valid = 0;
    for (int i = 0; i < len; i++) begin
      areq.w = '{data: data[i], strb: strb[i], last: (i == len - 1)};
      areq.w_valid = 1;
      forever begin #4; if (arsp.w_ready) break; @(negedge clk); end
      @(negedge clk);
      areq.w_valid = 0;
    end
    areq.b_ready = 1;
    forever begin #4; if (arsp.b_valid) break; @(negedge clk); end
    resp = arsp.b.resp;
    check(arsp.b.id == id, "B id");
    @(negedge clk);
    areq.b_ready = 0;
  endtask

  task automatic rd_burst(input logic [3:0] id, input logic [31:0] addr, input int len,
                          input logic [1:0] burst, output logic [31:0] data [$], output logic [1:0] resp);
    @(negedge clk);
    areq.ar = '{id: id, addr: addr, len: 8'(len - 1), size: 3'd2, burst: burst};
    areq.ar_valid = 1;
    forever begin #4; if (arsp.ar_ready) break; @(negedge clk); end
    @(negedge clk);
    areq.ar_valid = 0;
    data.delete();
    resp = 2'b00;
    for (int i = 0; i < len; i++) begin
      areq.r_ready = 1;
      forever begin #4; if (arsp.r_valid) break; @(negedge clk); end
      data.push_back(arsp.r.data);
      resp |= arsp.r.resp;
      check(arsp.r.last == (i == len - 1) && arsp.r.id == id, $sformatf("RLAST/RID beat %0d", i));
      @(negedge clk);
      areq.r_ready = 0;
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] refm [logic [31:0]];
    logic [31:0] d [$], got [$];
    logic [3:0]  s [$];
    logic [1:0]  resp;
    areq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len;
      logic [31:0] base;
      logic [3:0] id;
      len  = $urandom_range(1, 8);
      base = 32'h0001_0000 + 32'(4 * $urandom_range(60));
      id   = 4'($urandom);
      d.delete(); s.delete();
      for (int i = 0; i < len; i++) begin
        logic [31:0] a, old;
        d.push_back($urandom);
        s.push_back((t < 5) ? 4'hF : 4'($urandom));
        a = base + 32'(4 * i);
        old = refm.exists(a) ? refm[a] : 32'h0;
        refm[a] = apply_strb(old, d[i], s[i]);
      end
      wr_burst(id, base, len, 2'b01, d, s, resp);
      check(resp == 2'b00, "write burst response");
      rd_burst(~id, base, len, 2'b01, got, resp);
      check(resp == 2'b00, "read burst response");
      for (int i = 0; i < len; i++) begin
        logic [31:0] a;
        a = base + 32'(4 * i);
        check(got[i] == refm[a], $sformatf("burst %0d beat %0d: %h exp %h", t, i, got[i], refm[a]));
      end
    end
    // FIXED burst: all beats hit one word, the last one stays
    d = '{32'h1111_1111, 32'h2222_2222, 32'h3333_3333};
    s = '{4'hF, 4'hF, 4'hF};
    wr_burst(4'h3, 32'h0001_0800, 3, 2'b00, d, s, resp);
    rd_burst(4'h3, 32'h0001_0800, 2, 2'b00, got, resp);
    check(got[0] == 32'h3333_3333 && got[1] == 32'h3333_3333, "FIXED burst");
    rd_burst(4'h3, 32'h0001_0804, 1, 2'b01, got, resp);
    check(!mem.exists(32'h0001_0804), "FIXED burst advanced the address");
    // error inside a burst
    d = '{32'h0, 32'h0};
    s = '{4'hF, 4'hF};
    wr_burst(4'h5, ERR_ADDR - 4, 2, 2'b01, d, s, resp);
    check(resp == AXI_RESP_SLVERR, "write SLVERR");
    rd_burst(4'h6, ERR_ADDR, 1, 2'b01, got, resp);
    check(resp == AXI_RESP_SLVERR, "read SLVERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
