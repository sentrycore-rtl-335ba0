// tb_tcls_unit: self-checking test of the TCLS voter and its recovery control.
//
// Feeds identical random requests to the three core ports, then corrupts one
// core's request in one random bit at a time and checks that the voted
// request is the majority's, that the outvoted core is named and counted, and
// that the interrupt rises. Then triggers a resynchronisation and checks that
// the cores are held in reset for exactly RESET_CYCLES cycles.
module tb_tcls_unit;
  import sc_pkg::*;

  localparam int unsigned RST_CYC = 8;

  logic clk = 0, rst_n = 0;
  obi_req_t ci_req [3], cd_req [3];
  obi_rsp_t ci_rsp [3], cd_rsp [3];
  obi_req_t bi_req, bd_req;
  obi_rsp_t bi_rsp, bd_rsp;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  logic core_rst_n, irq;
  logic ack [3];
  logic [5:0] ack_id [3];
  logic ack_o;
  logic [5:0] ack_id_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tcls_unit #(.RESET_CYCLES(RST_CYC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_instr_req_i(ci_req), .core_instr_rsp_o(ci_rsp),
    .core_data_req_i(cd_req), .core_data_rsp_o(cd_rsp),
    .core_rst_no(core_rst_n),
    .core_irq_ack_i(ack), .core_irq_ack_id_i(ack_id), .irq_ack_o(ack_o), .irq_ack_id_o(ack_id_o),
    .bus_instr_req_o(bi_req), .bus_instr_rsp_i(bi_rsp),
    .bus_data_req_o(bd_req), .bus_data_rsp_i(bd_rsp),
    .reg_req_i(rreq), .reg_rsp_o(rrsp), .resynch_irq_o(irq));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic obi_req_t rand_req();
    return '{req: 1'($urandom), we: 1'($urandom), be: 4'($urandom), addr: $urandom, wdata: $urandom};
  endfunction

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
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    obi_req_t good_i, good_d;
    logic [31:0] st, cnt;
    int bad, bit_i, rst_len;
    rreq = '0;
    for (int c = 0; c < 3; c++) begin ci_req[c] = '0; cd_req[c] = '0; ack[c] = 0; ack_id[c] = '0; end
    bi_rsp = '0; bd_rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // agreement: voted output equals the common input, responses fan out
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      good_i = rand_req(); good_d = rand_req();
      for (int c = 0; c < 3; c++) begin ci_req[c] = good_i; cd_req[c] = good_d; end
      bi_rsp = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom, err: 1'($urandom)};
      bd_rsp = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom, err: 1'($urandom)};
      #1;
      check(bi_req == good_i && bd_req == good_d, "voted request differs with all cores equal");
      for (int c = 0; c < 3; c++) check(ci_rsp[c] == bi_rsp && cd_rsp[c] == bd_rsp, "response fan-out");
    end
    @(negedge clk);
    check(!irq, "interrupt without mismatch");
    reg_rd(32'h8, cnt);
    check(cnt == 0, "mismatch count not zero");

    // single-core faults are outvoted and reported
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      good_i = rand_req(); good_d = rand_req();
      bad   = $urandom_range(2);
      bit_i = $urandom_range($bits(obi_req_t) - 1);
      for (int c = 0; c < 3; c++) begin ci_req[c] = good_i; cd_req[c] = good_d; end
      if (i % 2 == 0) ci_req[bad] = ci_req[bad] ^ (obi_req_t'(1) << bit_i);
      else            cd_req[bad] = cd_req[bad] ^ (obi_req_t'(1) << bit_i);
      #1;
      check(bi_req == good_i && bd_req == good_d, $sformatf("fault in core %0d bit %0d reached the bus", bad, bit_i));
      @(negedge clk);
      for (int c = 0; c < 3; c++) begin ci_req[c] = good_i; cd_req[c] = good_d; end
      check(irq, "no interrupt after mismatch");
      reg_rd(32'h0, st);
      check(st[0] && st[6:4] == 3'(1 << bad), $sformatf("status %h for core %0d", st, bad));
    end
    // a wrong acknowledge from one core is outvoted
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      bad = i % 3;
      for (int c = 0; c < 3; c++) begin ack[c] = 1'b1; ack_id[c] = 6'(10 + i); end
      ack_id[bad] = 6'(40 + i);
      #1;
      check(ack_o && ack_id_o == 6'(10 + i), "acknowledge vote");
      @(negedge clk);
      for (int c = 0; c < 3; c++) begin ack[c] = 1'b0; ack_id[c] = '0; end
      reg_rd(32'h0, st);
      check(st[6:4] == 3'(1 << bad), "acknowledge mismatch not reported");
    end
    reg_rd(32'h8, cnt);
    check(cnt == 36, $sformatf("mismatch count %0d", cnt));

    // resynchronisation: cores held in reset for RESET_CYCLES cycles
    reg_wr(32'h4, 32'h1);
    rst_len = 0;
    while (!core_rst_n && rst_len < 100) begin
      check(bi_req == '0 && bd_req == '0, "bus request during core reset");
      @(negedge clk);
      rst_len++;
    end
    check(rst_len == RST_CYC, $sformatf("core reset lasted %0d cycles", rst_len));
    reg_rd(32'h0, st);
    check(st[1] && !st[0] && !irq, $sformatf("status after resynch %h", st));
    reg_wr(32'h0, 32'h2);
    reg_rd(32'h0, st);
    check(!st[1], "resynched flag not cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
