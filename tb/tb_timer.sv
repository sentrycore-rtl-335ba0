// tb_timer: self-checking test of the general-purpose timer.
//
// Programs several compare and prescaler values and measures the distance
// between interrupt pulses, which must be (CMP+1)*(PRESC+1) cycles; checks
// register read-back with byte strobes, that a disabled timer stands still
// and that COUNT can be written.
module tb_timer;
  import sc_pkg::*;

  logic clk = 0, rst_n = 0;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  logic irq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  timer dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq), .reg_rsp_o(rrsp), .irq_o(irq));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic reg_rd(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    rreq = '{valid: 1'b1, write: 1'b0, addr: addr, wdata: '0, wstrb: '0};
    #4;
    data = rrsp.rdata;
    @(negedge clk);
    rreq = '0;
  endtask

  task automatic reg_wr(input logic [31:0] addr, input logic [31:0] data, input logic [3:0] strb);
    @(negedge clk);
    rreq = '{valid: 1'b1, write: 1'b1, addr: addr, wdata: data, wstrb: strb};
    @(negedge clk);
    rreq = '0;
  endtask

  // cycle numbers of interrupt pulses
  int cyc = 0;
  int irq_times [$];
  always @(posedge clk) begin
    cyc++;
    if (irq) irq_times.push_back(cyc);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    int cmps [4] = '{0, 5, 17, 40};
    int prs  [4] = '{3, 0, 2, 1};
    rreq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_wr(32'h8, 32'h1234_5678, 4'hF);
    reg_wr(32'h8, 32'h0000_AB00, 4'b0010);
    reg_rd(32'h8, v);
    check(v == 32'h1234_AB78, $sformatf("CMP strobe write %h", v));
    reg_rd(32'h4, v);
    check(v == 0, "counter ran while disabled");
    for (int t = 0; t < 4; t++) begin
      reg_wr(32'h0, 32'h0, 4'hF);
      reg_wr(32'h4, 32'h0, 4'hF);
      reg_wr(32'h8, 32'(cmps[t]), 4'hF);
      irq_times.delete();
      reg_wr(32'h0, 32'(prs[t] << 8) | 32'h1, 4'hF);
      repeat ((cmps[t] + 1) * (prs[t] + 1) * 5 + 5) @(posedge clk);
      check(irq_times.size() >= 4, $sformatf("only %0d interrupts", irq_times.size()));
      for (int i = 1; i < irq_times.size(); i++) begin
        check(irq_times[i] - irq_times[i-1] == (cmps[t] + 1) * (prs[t] + 1),
              $sformatf("period %0d exp %0d", irq_times[i] - irq_times[i-1], (cmps[t] + 1) * (prs[t] + 1)));
      end
    end
    reg_wr(32'h0, 32'h0, 4'hF);
    reg_wr(32'h4, 32'd33, 4'hF);
    repeat (5) @(posedge clk);
    reg_rd(32'h4, v);
    check(v == 33, $sformatf("COUNT write/hold %0d", v));
    reg_rd(32'h0, v);
    check(v == 0, "CTRL read-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
