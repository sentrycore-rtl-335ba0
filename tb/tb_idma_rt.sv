// tb_idma_rt: self-checking test of the DMA engine and its timed launches.
//
// A memory model on the OBI port grants at random and answers after a random
// delay. The test programs a three-dimensional transfer, computes the
// expected sequence of (address, data) writes in the testbench from the
// stride formula and compares every write. It then enables the real-time
// launch and checks that transfers start exactly PERIOD cycles apart, that a
// too short period leads to counted missed launches at multiples of the
// period, and that a bus error aborts the transfer and shows in STATUS.
module tb_idma_rt;
  import sc_pkg::*;

  logic clk = 0, rst_n = 0;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  obi_req_t oreq;
  obi_rsp_t orsp;
  logic done_irq;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic fast = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  idma_rt dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq), .reg_rsp_o(rrsp),
               .obi_req_o(oreq), .obi_rsp_i(orsp), .done_irq_o(done_irq));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------- memory model
  logic [31:0] wr_addr [$], wr_data [$];
  int launches [$];
  int n_done = 0;
  logic gnt_rnd;
  int   delay;
  logic pend;
  logic [31:0] pend_data;
  logic pend_err;
  logic idle_tb = 1;
  logic [31:0] err_addr = 32'hFFFF_FFFF;

  function automatic logic [31:0] pattern(logic [31:0] a);
    return {a[15:0], ~a[15:0]};
  endfunction

  assign orsp.gnt = oreq.req && (fast || gnt_rnd) && !pend;
  always @(negedge clk) begin
    gnt_rnd <= 1'($urandom);
    orsp.rvalid <= 1'b0;
    if (pend && delay == 0) begin
      orsp.rvalid <= 1'b1;
      orsp.rdata  <= pend_data;
      orsp.err    <= pend_err;
    end
  end
  always @(posedge clk) begin
    if (!rst_n) begin
      pend = 0;
      orsp.rvalid = 0;
    end else begin
      if (orsp.rvalid) pend = 0;
      else if (pend && delay > 0) delay--;
      if (oreq.req && idle_tb) begin
        launches.push_back(cyc);
        idle_tb = 0;
      end
      if (done_irq) begin
        n_done++;
        idle_tb = 1;
      end
      if (oreq.req && orsp.gnt) begin
        pend      = 1;
        delay     = fast ? 0 : $urandom_range(2);
        pend_err  = (oreq.addr == err_addr);
        pend_data = oreq.we ? 32'h0 : pattern(oreq.addr);
        if (oreq.we) begin
          wr_addr.push_back(oreq.addr);
          wr_data.push_back(oreq.wdata);
        end
      end
    end
  end

  task automatic reg_rd(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    rreq = '{valid: 1'b1, write: 1'b0, addr: addr, wdata: '0, wstrb: '0};
    #4;
    data = rrsp.rdata;
    @(negedge clk);
    rreq = '0;
  endtask

  task automatic reg_wr(input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    rreq = '{valid: 1'b1, write: 1'b1, addr: addr, wdata: data, wstrb: 4'hF};
    @(negedge clk);
    rreq = '0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    int k;
    int src = 32'h1000, dst = 32'h8000, len = 3, s2 = 32'h40, d2 = 12, r2 = 4;
    int s3 = 32'h400, d3 = 48, r3 = 2;
    rreq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_wr(32'h00, 32'(src)); reg_wr(32'h04, 32'(dst)); reg_wr(32'h08, 32'(len));
    reg_wr(32'h0C, 32'(s2));  reg_wr(32'h10, 32'(d2));  reg_wr(32'h14, 32'(r2));
    reg_wr(32'h18, 32'(s3));  reg_wr(32'h1C, 32'(d3));  reg_wr(32'h20, 32'(r3));
    reg_rd(32'h0C, v);
    check(v == 32'(s2), "register read-back");
    reg_wr(32'h28, 32'h1);
    wait (n_done == 1);
    repeat (2) @(negedge clk);
    check(wr_addr.size() == len * r2 * r3, $sformatf("%0d writes, exp %0d", wr_addr.size(), len * r2 * r3));
    k = 0;
    for (int p = 0; p < r3; p++)
      for (int r = 0; r < r2; r++)
        for (int j = 0; j < len; j++) begin
          logic [31:0] ea, ed;
          ea = 32'(dst + p * d3 + r * d2 + 4 * j);
          ed = pattern(32'(src + p * s3 + r * s2 + 4 * j));
          if (k < wr_addr.size())
            check(wr_addr[k] == ea && wr_data[k] == ed,
                  $sformatf("write %0d: %h<=%h exp %h<=%h", k, wr_addr[k], wr_data[k], ea, ed));
          k++;
        end
    reg_rd(32'h30, v);
    check(v == 1, "DONE count");

    // timed launches, 300-cycle period: each transfer is short enough
    fast = 1;
    reg_wr(32'h08, 32'd2); reg_wr(32'h14, 32'd2); reg_wr(32'h20, 32'd1);
    reg_wr(32'h24, 32'd300);
    launches.delete();
    reg_wr(32'h28, 32'h2);
    repeat (300 * 5 + 10) @(posedge clk);
    reg_wr(32'h28, 32'h0);
    check(launches.size() == 5, $sformatf("%0d timed launches in 5 periods", launches.size()));
    for (int i = 1; i < launches.size(); i++)
      check(launches[i] - launches[i-1] == 300, $sformatf("launch interval %0d", launches[i] - launches[i-1]));
    reg_rd(32'h34, v);
    check(v == 0, "missed launches with a long period");

    // period shorter than the transfer: launches skipped and counted
    repeat (50) @(posedge clk);
    reg_wr(32'h08, 32'd16);
    reg_wr(32'h24, 32'd40);
    launches.delete();
    reg_wr(32'h28, 32'h2);
    repeat (40 * 20) @(posedge clk);
    reg_wr(32'h28, 32'h0);
    repeat (100) @(posedge clk);
    reg_rd(32'h34, v);
    check(v > 0, "no missed launch with a short period");
    for (int i = 1; i < launches.size(); i++)
      check((launches[i] - launches[i-1]) % 40 == 0, $sformatf("launch off the period grid: %0d", launches[i] - launches[i-1]));

    // bus error aborts
    err_addr = 32'(src + 4);
    reg_wr(32'h28, 32'h1);
    repeat (50) @(posedge clk);
    reg_rd(32'h2C, v);
    check(v == 32'h2, $sformatf("STATUS after bus error %h", v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
