// tb_obi_to_axi: self-checking test of the AXI4 manager port.
//
// An AXI4 memory model with random ready signals and random response delays
// answers the bridge. Random OBI reads and writes with random byte enables
// are checked against a reference copy; every AXI transaction must be a
// single beat; an access to the model's error address must come back with
// err.
module tb_obi_to_axi;
  import sc_pkg::*;

  logic clk = 0, rst_n = 0;
  obi_req_t oreq;
  obi_rsp_t orsp;
  axi_req_t areq;
  axi_rsp_t arsp;
  int checks = 0, failures = 0;
  localparam logic [31:0] ERR_ADDR = 32'h8000_0F00;

  always #5 clk = ~clk;

  obi_to_axi dut (.clk_i(clk), .rst_ni(rst_n), .obi_req_i(oreq), .obi_rsp_o(orsp),
                  .axi_req_o(areq), .axi_rsp_i(arsp));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------- AXI memory model
  logic [31:0] mem [logic [31:0]];
  logic aw_got = 0, w_got = 0;
  logic [31:0] aw_addr;
  logic [31:0] w_data;
  logic [3:0]  w_strb;
  logic b_pend = 0, r_pend = 0;
  logic [1:0] pend_resp;
  logic [31:0] r_data;

  always @(negedge clk) begin
    arsp.aw_ready <= 1'($urandom) && !aw_got && !b_pend;
    arsp.w_ready  <= 1'($urandom) && !w_got && !b_pend;
    arsp.ar_ready <= 1'($urandom) && !r_pend;
    arsp.b_valid  <= b_pend && 1'($urandom);
    arsp.b        <= '{id: '0, resp: pend_resp};
    arsp.r_valid  <= r_pend && 1'($urandom);
    arsp.r        <= '{id: '0, data: r_data, resp: pend_resp, last: 1'b1};
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (areq.aw_valid && arsp.aw_ready) begin
        aw_got = 1; aw_addr = areq.aw.addr;
        checks++;
        if (areq.aw.len != 0) begin failures++; $display("FAIL: AW burst"); end
      end
      if (areq.w_valid && arsp.w_ready) begin
        w_got = 1; w_data = areq.w.data; w_strb = areq.w.strb;
        checks++;
        if (!areq.w.last) begin failures++; $display("FAIL: WLAST"); end
      end
      if (areq.b_ready && arsp.b_valid) b_pend = 0;
      if (areq.r_ready && arsp.r_valid) r_pend = 0;
      if (aw_got && w_got) begin
        logic [31:0] old;
        old = mem.exists(aw_addr) ? mem[aw_addr] : 32'h0;
        mem[aw_addr] = apply_strb(old, w_data, w_strb);
        pend_resp = (aw_addr == ERR_ADDR) ? 2'b10 : 2'b00;
        aw_got = 0; w_got = 0; b_pend = 1;
      end
      if (areq.ar_valid && arsp.ar_ready) begin
        r_data = mem.exists(areq.ar.addr) ? mem[areq.ar.addr] : 32'h0;
        pend_resp = (areq.ar.addr == ERR_ADDR) ? 2'b10 : 2'b00;
        r_pend = 1;
      end
    end
  end

  task automatic access(input obi_req_t r, output logic [31:0] rdata, output logic err);
    @(negedge clk);
    oreq = r;
    forever begin
      #4;
      if (orsp.gnt) break;
      @(negedge clk);
    end
    @(negedge clk);
    oreq = '0;
    forever begin
      #4;
      if (orsp.rvalid) begin
        rdata = orsp.rdata;
        err = orsp.err;
        break;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] refm [logic [31:0]];
    logic [31:0] rd, expv, a;
    logic err;
    oreq = '0;
    arsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      obi_req_t r;
      a = 32'h8000_0000 + 32'(4 * $urandom_range(31));
      r = '{req: 1'b1, we: 1'($urandom), be: 4'($urandom), addr: a, wdata: $urandom};
      expv = refm.exists(a) ? refm[a] : 32'h0;
      if (r.we) begin
        expv = apply_strb(expv, r.wdata, r.be);
        refm[a] = expv;
      end
      access(r, rd, err);
      check(!err, "unexpected error");
      if (!r.we) check(rd == expv, $sformatf("read %h: %h exp %h", a, rd, expv));
    end
    access('{req: 1'b1, we: 1'b0, be: 4'hF, addr: ERR_ADDR, wdata: '0}, rd, err);
    check(err, "read error not reported");
    access('{req: 1'b1, we: 1'b1, be: 4'hF, addr: ERR_ADDR, wdata: '0}, rd, err);
    check(err, "write error not reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
