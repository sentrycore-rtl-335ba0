// tb_periph_bus: self-checking test of the OBI to register-bus bridge.
//
// Six register-bus device models with random ready hold their own register
// arrays. Random OBI reads and writes to random devices and offsets are
// checked against a reference copy, rvalid must follow gnt by one cycle, and
// accesses beyond the last device must come back with err.
module tb_periph_bus;
  import sc_pkg::*;

  localparam int unsigned ND = 6;

  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  reg_req_t dreq [ND];
  reg_rsp_t drsp [ND];
  logic [ND-1:0] rdy;
  logic [31:0] regs [ND][1024];
  logic [31:0] refr [ND][1024];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  periph_bus #(.NUM_DEV(ND)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
                                  .dev_req_o(dreq), .dev_rsp_i(drsp));

  for (genvar d = 0; d < ND; d++) begin : g_dev
    always_comb begin
      drsp[d].ready = rdy[d];
      drsp[d].rdata = regs[d][dreq[d].addr[11:2]];
      drsp[d].error = 1'b0;
    end
    always @(posedge clk) begin
      if (dreq[d].valid && rdy[d] && dreq[d].write) begin
        for (int b = 0; b < 4; b++)
          if (dreq[d].wstrb[b]) regs[d][dreq[d].addr[11:2]][8*b +: 8] <= dreq[d].wdata[8*b +: 8];
      end
    end
  end
  always @(negedge clk) rdy <= ND'($urandom);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic access(input obi_req_t r, output logic [31:0] rdata, output logic err, output int rl);
    @(negedge clk);
    req = r;
    forever begin
      #4;
      if (rsp.gnt) break;
      @(negedge clk);
    end
    @(negedge clk);
    req = '0;
    rl = 1;
    forever begin
      #4;
      if (rsp.rvalid) begin
        rdata = rsp.rdata;
        err = rsp.err;
        break;
      end
      @(negedge clk);
      rl++;
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic err;
    int rl;
    req = '0;
    for (int d = 0; d < ND; d++)
      for (int i = 0; i < 1024; i++) begin
        regs[d][i] = 32'(d * 4096 + i);
        refr[d][i] = 32'(d * 4096 + i);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int d, w;
      obi_req_t r;
      d = $urandom_range(ND - 1);
      w = $urandom_range(15) * 64 + $urandom_range(3);
      r = '{req: 1'b1, we: 1'($urandom), be: 4'($urandom), addr: PERIPH_BASE + 32'(d * 4096 + w * 4), wdata: $urandom};
      if (r.we) for (int b = 0; b < 4; b++) if (r.be[b]) refr[d][w][8*b +: 8] = r.wdata[8*b +: 8];
      access(r, rd, err, rl);
      check(rl == 1 && !err, $sformatf("response latency %0d err %0b", rl, err));
      if (!r.we) check(rd == refr[d][w], $sformatf("dev %0d word %0d: %h exp %h", d, w, rd, refr[d][w]));
    end
    for (int i = 0; i < 4; i++) begin
      access('{req: 1'b1, we: 1'($urandom), be: 4'hF, addr: PERIPH_BASE + 32'((ND + i) * 4096), wdata: '0}, rd, err, rl);
      check(err, "unmapped access without error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
