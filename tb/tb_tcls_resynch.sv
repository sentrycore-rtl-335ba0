// tb_tcls_resynch: the lockstep recovery sequence run on the full SentryCore
// system, with the three cores' software played by the testbench.
//
// Each core model holds an architectural state of 31 general-purpose
// registers and 8 CSRs. A fault flips one bit of one register in core 1; the
// next store of that register makes the cores disagree. The test then runs
// the recovery as the cores' software would:
//   interrupt (CLIC line 2) -> each core stores its 39 state words to the
//   stack in data memory, through the voter -> write TCLS CTRL -> cores held
//   in reset -> boot code sees the resynchronised flag, loads the 39 words
//   back into every core and clears the flag.
// It checks that all three cores end with the fault-free state, that the
// stack holds the majority's values, and measures the cycles from the
// interrupt to the end of the restore against the 600-cycle figure of the
// source design (core-internal cycles such as interrupt entry and the boot
// code's instructions are not modelled, only the bus traffic and the reset).
module tb_tcls_resynch;
  import sc_pkg::*;

  localparam int unsigned NSTATE = 39;
  localparam logic [31:0] TCLS = 32'h0000_D000, CLIC = 32'h0000_B000;
  localparam logic [31:0] STACK = DMEM_BASE + 32'hF000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  obi_req_t   ci_req [3], cd_req [3];
  obi_rsp_t   ci_rsp [3], cd_rsp [3];
  logic       core_rst_n, irq_valid;
  logic [5:0] irq_id;
  logic [7:0] irq_level;
  logic       ack [3];
  logic [5:0] ack_id [3];
  axi_req_t   hreq;
  axi_rsp_t   hrsp;
  axi_req_t   xreq;
  axi_rsp_t   xrsp;
  obi_req_t   dbg_mreq, dbg_sreq;
  obi_rsp_t   dbg_mrsp, dbg_srsp;
  reg_req_t   brom_req, pcr_req;
  reg_rsp_t   brom_rsp, pcr_rsp;
  logic [55:0] ext_irq;

  int checks = 0, failures = 0;

  sentrycore dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_instr_req_i(ci_req), .core_instr_rsp_o(ci_rsp),
    .core_data_req_i(cd_req), .core_data_rsp_o(cd_rsp),
    .core_rst_no(core_rst_n),
    .core_irq_valid_o(irq_valid), .core_irq_id_o(irq_id), .core_irq_level_o(irq_level),
    .core_irq_ack_i(ack), .core_irq_ack_id_i(ack_id),
    .axi_sub_req_i(hreq), .axi_sub_rsp_o(hrsp),
    .axi_mgr_req_o(xreq), .axi_mgr_rsp_i(xrsp),
    .dbg_mgr_req_i(dbg_mreq), .dbg_mgr_rsp_o(dbg_mrsp),
    .dbg_sub_req_o(dbg_sreq), .dbg_sub_rsp_i(dbg_srsp),
    .bootrom_req_o(brom_req), .bootrom_rsp_i(brom_rsp),
    .pcr_req_o(pcr_req), .pcr_rsp_i(pcr_rsp),
    .ext_irq_i(ext_irq));

  // nothing outside is addressed in this test: idle responders
  assign brom_rsp = '{ready: brom_req.valid, rdata: '0, error: 1'b0};
  assign pcr_rsp  = '{ready: pcr_req.valid, rdata: '0, error: 1'b0};
  assign dbg_srsp = '{gnt: 1'b0, rvalid: 1'b0, rdata: '0, err: 1'b0};
  assign xrsp     = '0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // architectural state of each core
  logic [31:0] state [3][NSTATE];

  // each core drives its own request; they differ only where state differs
  task automatic cores_access(input logic we, input logic [31:0] addr, input logic [31:0] wd [3],
                              output logic [31:0] rd, output logic err);
    @(negedge clk);
    for (int c = 0; c < 3; c++) cd_req[c] = '{req: 1'b1, we: we, be: 4'hF, addr: addr, wdata: wd[c]};
    forever begin #4; if (cd_rsp[0].gnt) break; @(negedge clk); end
    @(negedge clk);
    for (int c = 0; c < 3; c++) cd_req[c] = '0;
    forever begin #4; if (cd_rsp[0].rvalid) break; @(negedge clk); end
    rd  = cd_rsp[0].rdata;
    err = cd_rsp[0].err;
  endtask

  task automatic cores_wr(input logic [31:0] addr, input logic [31:0] v);
    logic [31:0] wd [3], rd;
    logic err;
    wd = '{v, v, v};
    cores_access(1'b1, addr, wd, rd, err);
    check(!err, "store error");
  endtask

  task automatic cores_rd(input logic [31:0] addr, output logic [31:0] v);
    logic [31:0] wd [3];
    logic err;
    wd = '{32'h0, 32'h0, 32'h0};
    cores_access(1'b0, addr, wd, v, err);
    check(!err, "load error");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] golden [NSTATE];
    logic [31:0] wd [3], v;
    logic err;
    int t_irq, t_done, t_rst, waited;
    for (int c = 0; c < 3; c++) begin
      ci_req[c] = '0; cd_req[c] = '0; ack[c] = 0; ack_id[c] = '0;
    end
    hreq = '0; dbg_mreq = '0; ext_irq = '0;
    for (int i = 0; i < NSTATE; i++) begin
      golden[i] = $urandom;
      for (int c = 0; c < 3; c++) state[c][i] = golden[i];
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    cores_wr(CLIC + 32'h808, 32'hC000_0100);     // line 2: level, enabled

    // a single-event upset in core 1, register 5
    state[1][5] = state[1][5] ^ 32'h0000_0400;
    // the program stores register 5: the cores disagree
    for (int c = 0; c < 3; c++) wd[c] = state[c][5];
    cores_access(1'b1, DMEM_BASE + 32'h100, wd, v, err);
    cores_rd(DMEM_BASE + 32'h100, v);
    check(v == golden[5], "the faulty store reached memory");

    // interrupt
    waited = 0;
    while (!(irq_valid && irq_id == 6'd2) && waited < 100) begin @(negedge clk); waited++; end
    check(irq_valid && irq_id == 6'd2, "no resynchronisation interrupt");
    t_irq = cyc;
    for (int c = 0; c < 3; c++) begin ack[c] = 1; ack_id[c] = irq_id; end
    @(negedge clk);
    for (int c = 0; c < 3; c++) begin ack[c] = 0; ack_id[c] = '0; end

    // save the state through the voter
    for (int i = 0; i < NSTATE; i++) begin
      for (int c = 0; c < 3; c++) wd[c] = state[c][i];
      cores_access(1'b1, STACK + 32'(4 * i), wd, v, err);
    end
    // request the reset; the cores lose their state
    cores_wr(TCLS + 32'h4, 32'h1);
    t_rst = cyc;
    while (core_rst_n) @(negedge clk);
    for (int c = 0; c < 3; c++) for (int i = 0; i < NSTATE; i++) state[c][i] = 32'h0;
    while (!core_rst_n) @(negedge clk);
    check(cyc - t_rst <= 12, $sformatf("reset phase took %0d cycles", cyc - t_rst));

    // boot code: resynchronised? then restore
    cores_rd(TCLS + 32'h0, v);
    check(v[1] && !v[0], $sformatf("TCLS status after reset %h", v));
    for (int i = 0; i < NSTATE; i++) begin
      cores_rd(STACK + 32'(4 * i), v);
      for (int c = 0; c < 3; c++) state[c][i] = v;
    end
    cores_wr(TCLS + 32'h0, 32'h2);
    t_done = cyc;

    for (int c = 0; c < 3; c++)
      for (int i = 0; i < NSTATE; i++)
        check(state[c][i] == golden[i], $sformatf("core %0d state word %0d %h exp %h", c, i, state[c][i], golden[i]));
    cores_rd(TCLS + 32'h8, v);
    check(v >= 2, $sformatf("mismatch count %0d", v));
    check(!irq_valid, "interrupt still pending after recovery");
    $display("resynchronisation bus traffic and reset: %0d cycles (budget 600)", t_done - t_irq);
    check(t_done - t_irq < 600, "recovery exceeded 600 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
