// tb_clic: self-checking test of the interrupt controller.
//
// Programs random enables and levels into all interrupt lines, applies random
// input patterns and compares the offered interrupt with a reference choice
// (highest level, ties to the higher id, above the threshold) worked out in
// the testbench. Checks the one-cycle latency from input to request, that
// edge-triggered lines stay pending after a short pulse until acknowledged,
// and register read-back.
module tb_clic;
  import sc_pkg::*;

  localparam int unsigned N = 64;

  logic clk = 0, rst_n = 0;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  logic [N-1:0] irq;
  logic vld, ack;
  logic [5:0] id, ack_id;
  logic [7:0] lvl;
  logic [7:0] ctl [N];
  logic [N-1:0] ie, edg;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  clic #(.NUM_IRQ(N)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rreq), .reg_rsp_o(rrsp),
    .irq_i(irq), .irq_valid_o(vld), .irq_id_o(id), .irq_level_o(lvl),
    .irq_ack_i(ack), .irq_ack_id_i(ack_id));

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

  // reference arbitration
  task automatic expect_choice(input logic [N-1:0] pend, input logic [7:0] th, input string tag);
    logic ev;
    int eid;
    logic [7:0] el;
    ev = 0; eid = 0; el = 0;
    for (int i = 0; i < N; i++) begin
      if (pend[i] && ie[i] && (!ev || ctl[i] >= el)) begin
        ev = 1; eid = i; el = ctl[i];
      end
    end
    ev = ev && (el > th);
    check(vld == ev && (!ev || (id == 6'(eid) && lvl == el)),
          $sformatf("%s: got v=%0b id=%0d l=%0d exp v=%0b id=%0d l=%0d", tag, vld, id, lvl, ev, eid, el));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    logic [7:0] th;
    rreq = '0; irq = '0; ack = 0; ack_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random levels, a few collisions on purpose
    for (int i = 0; i < N; i++) begin
      ctl[i] = 8'($urandom_range(0, 15) * 16);
      ie[i]  = ($urandom_range(3) != 0);
      edg[i] = 1'b0;
      reg_wr(32'h800 + 32'(4 * i), {ctl[i], 8'h00, 7'd0, ie[i], 8'h00}, 4'b1110);
    end
    for (int i = 0; i < N; i += 7) begin
      reg_rd(32'h800 + 32'(4 * i), v);
      check(v[31:24] == ctl[i] && v[8] == ie[i] && v[16] == 1'b0, $sformatf("clicint %0d read-back %h", i, v));
    end
    // level-triggered arbitration, various thresholds
    for (int t = 0; t < 200; t++) begin
      th = (t % 4 == 0) ? 8'($urandom_range(255)) : 8'h00;
      reg_wr(32'h8, 32'(th), 4'h1);
      @(negedge clk);
      irq = {$urandom, $urandom} & {$urandom, $urandom};
      @(negedge clk);   // one cycle after the inputs change
      expect_choice(irq, th, "level");
    end
    reg_rd(32'h8, v);
    check(v == 32'(th), "threshold read-back");
    reg_wr(32'h8, 32'h0, 4'h1);
    // edge-triggered lines: a one-cycle pulse stays pending until acknowledged
    irq = '0;
    for (int k = 0; k < 10; k++) begin
      int i;
      i = $urandom_range(N - 1);
      ie[i] = 1; edg[i] = 1; ctl[i] = 8'hF0 + 8'(k);
      reg_wr(32'h800 + 32'(4 * i), {ctl[i], 7'd0, 1'b1, 7'd0, 1'b1, 8'h00}, 4'b1110);
      @(negedge clk);
      irq[i] = 1'b1;
      @(negedge clk);
      irq[i] = 1'b0;
      repeat (3) @(negedge clk);
      check(vld && id == 6'(i) && lvl == ctl[i], $sformatf("edge line %0d not held (v=%0b id=%0d)", i, vld, id));
      ack = 1; ack_id = 6'(i);
      @(negedge clk);
      ack = 0;
      @(negedge clk);
      check(!vld, $sformatf("edge line %0d still pending after ack", i));
      ie[i] = 0;
      reg_wr(32'h800 + 32'(4 * i), 32'h0, 4'b0010);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
