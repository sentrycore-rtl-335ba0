// tb_sentrycore: end-to-end test of the SentryCore system at its default size
// (two 64 KiB ECC banks, 64 interrupt lines).
//
// The testbench plays the parts outside the RTL: the three lockstep cores
// (issuing the same OBI requests on all three core ports, optionally with a
// fault in one), the host on the AXI4 subordinate port, a host memory with
// "sensor" data behind the AXI4 manager port, the boot ROM, the platform
// control registers and the debug module's memory window. It walks through:
//   host burst writes and reads of instruction memory, instruction fetches,
//   core loads/stores incl. partial stores (read-modify-write), accesses to
//   every peripheral window and to host memory, ECC correction, an
//   uncorrectable error, the scrubber repairing a latent error, a core fault
//   outvoted by the TCLS voter followed by the resynchronisation reset,
//   timed DMA transfers of sensor data into data memory while the cores
//   compete for the same memory, and timer and DMA interrupts through the
//   CLIC.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_sentrycore;
  import sc_pkg::*;

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

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // -------------------------------------------------------- mechanism counts
  int n_vote_masked = 0, n_resynch = 0, n_ecc_corr = 0, n_ecc_uncorr = 0, n_scrub = 0;
  int n_rmw = 0, n_stall = 0, n_axi_sub = 0, n_axi_mgr = 0, n_dma_launch = 0;
  int n_dma_missed = 0, n_timer_irq = 0, n_dma_irq = 0, n_tcls_irq = 0, n_periph = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      n_ecc_corr   += int'(dut.imem_corr || dut.dmem_corr);
      n_ecc_uncorr += int'(dut.imem_uncorr || dut.dmem_uncorr);
      n_scrub      += int'(dut.imem_fix || dut.dmem_fix);
      n_stall      += int'(cd_req[0].req && !cd_rsp[0].gnt);
    end
  end

  // ------------------------------------------------ models outside the RTL
  // boot ROM and platform control registers: fixed read values
  always_comb begin
    brom_rsp = '{ready: brom_req.valid, rdata: 32'hB007_0000 | brom_req.addr, error: 1'b0};
    pcr_rsp  = '{ready: pcr_req.valid, rdata: 32'h0C0F_0000 | pcr_req.addr, error: 1'b0};
  end
  // debug memory window: answers next cycle with a fixed word
  always_comb dbg_srsp.gnt = dbg_sreq.req;
  always @(posedge clk) begin
    dbg_srsp.rvalid <= dbg_sreq.req && rst_n;
    dbg_srsp.rdata  <= 32'hDB60_0000 | dbg_sreq.addr;
    dbg_srsp.err    <= 1'b0;
  end

  // host memory behind the AXI4 manager port (single-beat transactions)
  logic [31:0] hostmem [logic [31:0]];
  logic x_aw = 0, x_w = 0, x_b = 0, x_r = 0;
  logic [31:0] x_awaddr, x_wdata, x_rdata;
  logic [3:0]  x_wstrb;
  always @(negedge clk) begin
    xrsp.aw_ready <= !x_aw && !x_b;
    xrsp.w_ready  <= !x_w && !x_b && 1'($urandom);
    xrsp.ar_ready <= !x_r && 1'($urandom);
    xrsp.b_valid  <= x_b;
    xrsp.b        <= '0;
    xrsp.r_valid  <= x_r;
    xrsp.r        <= '{id: '0, data: x_rdata, resp: 2'b00, last: 1'b1};
  end
  always @(posedge clk) begin
    if (!rst_n) begin
      xrsp.b_valid = 0;
      xrsp.r_valid = 0;
    end else begin
      if (xreq.b_ready && xrsp.b_valid) x_b = 0;
      if (xreq.r_ready && xrsp.r_valid) x_r = 0;
      if (xreq.aw_valid && xrsp.aw_ready) begin x_aw = 1; x_awaddr = xreq.aw.addr; end
      if (xreq.w_valid && xrsp.w_ready) begin x_w = 1; x_wdata = xreq.w.data; x_wstrb = xreq.w.strb; end
      if (x_aw && x_w) begin
        hostmem[x_awaddr] = apply_strb(hostmem.exists(x_awaddr) ? hostmem[x_awaddr] : 32'h0, x_wdata, x_wstrb);
        x_aw = 0; x_w = 0; x_b = 1;
        n_axi_mgr++;
      end
      if (xreq.ar_valid && xrsp.ar_ready) begin
        x_rdata = hostmem.exists(xreq.ar.addr) ? hostmem[xreq.ar.addr] : 32'hDEAD_BEEF;
        x_r = 1;
        n_axi_mgr++;
      end
    end
  end

  // ------------------------------------------------------------ core model
  // One data access issued identically by all three cores; if fault_core is
  // 0..2 that core's write data has bit fault_bit flipped.
  task automatic core_data(input logic we, input logic [3:0] be, input logic [31:0] addr,
                           input logic [31:0] wdata, output logic [31:0] rdata, output logic err,
                           input int fault_core = -1, input int fault_bit = 0);
    @(negedge clk);
    for (int c = 0; c < 3; c++) cd_req[c] = '{req: 1'b1, we: we, be: be, addr: addr, wdata: wdata};
    if (fault_core >= 0) cd_req[fault_core].wdata[fault_bit] = ~wdata[fault_bit];
    forever begin
      #4;
      if (cd_rsp[0].gnt) break;
      @(negedge clk);
    end
    @(negedge clk);
    for (int c = 0; c < 3; c++) cd_req[c] = '0;
    forever begin
      #4;
      if (cd_rsp[0].rvalid) break;
      @(negedge clk);
    end
    rdata = cd_rsp[0].rdata;
    err   = cd_rsp[0].err;
    check(cd_rsp[1] == cd_rsp[0] && cd_rsp[2] == cd_rsp[0], "cores see different responses");
  endtask

  task automatic core_wr(input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] rd;
    logic err;
    core_data(1'b1, 4'hF, addr, data, rd, err);
    check(!err, $sformatf("store to %h failed", addr));
  endtask

  task automatic core_rd(input logic [31:0] addr, output logic [31:0] data);
    logic err;
    core_data(1'b0, 4'hF, addr, 32'h0, data, err);
    check(!err, $sformatf("load from %h failed", addr));
  endtask

  task automatic core_fetch(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    for (int c = 0; c < 3; c++) ci_req[c] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: addr, wdata: '0};
    forever begin #4; if (ci_rsp[0].gnt) break; @(negedge clk); end
    @(negedge clk);
    for (int c = 0; c < 3; c++) ci_req[c] = '0;
    forever begin #4; if (ci_rsp[0].rvalid) break; @(negedge clk); end
    data = ci_rsp[0].rdata;
  endtask

  // the cores take the offered interrupt and acknowledge it
  task automatic take_irq(output int id);
    int waited = 0;
    while (!irq_valid && waited < 5000) begin
      @(negedge clk);
      waited++;
    end
    id = irq_valid ? int'(irq_id) : -1;
    for (int c = 0; c < 3; c++) begin ack[c] = 1'b1; ack_id[c] = irq_id; end
    @(negedge clk);
    for (int c = 0; c < 3; c++) begin ack[c] = 1'b0; ack_id[c] = '0; end
    if (id == 0) n_timer_irq++;
    if (id == 1) n_dma_irq++;
    if (id == 2) n_tcls_irq++;
  endtask

  // ------------------------------------------------------------ host model
  task automatic host_write(input logic [31:0] addr, input logic [31:0] data [$]);
    @(negedge clk);
    hreq.aw = '{id: 4'h1, addr: addr, len: 8'(data.size() - 1), size: 3'd2, burst: 2'b01};
    hreq.aw_valid = 1;
    forever begin #4; if (hrsp.aw_ready) break; @(negedge clk); end
    @(negedge clk);
    hreq.aw_valid = 0;
    for (int i = 0; i < data.size(); i++) begin
      hreq.w = '{data: data[i], strb: 4'hF, last: (i == data.size() - 1)};
      hreq.w_valid = 1;
      forever begin #4; if (hrsp.w_ready) break; @(negedge clk); end
      @(negedge clk);
      hreq.w_valid = 0;
    end
    hreq.b_ready = 1;
    forever begin #4; if (hrsp.b_valid) break; @(negedge clk); end
    check(hrsp.b.resp == 2'b00, "host write response");
    @(negedge clk);
    hreq.b_ready = 0;
    n_axi_sub++;
  endtask

  task automatic host_read(input logic [31:0] addr, input int len, output logic [31:0] data [$]);
    @(negedge clk);
    hreq.ar = '{id: 4'h2, addr: addr, len: 8'(len - 1), size: 3'd2, burst: 2'b01};
    hreq.ar_valid = 1;
    forever begin #4; if (hrsp.ar_ready) break; @(negedge clk); end
    @(negedge clk);
    hreq.ar_valid = 0;
    data.delete();
    hreq.r_ready = 1;
    for (int i = 0; i < len; i++) begin
      forever begin #4; if (hrsp.r_valid) break; @(negedge clk); end
      data.push_back(hrsp.r.data);
      check(hrsp.r.last == (i == len - 1), "host read RLAST");
      @(negedge clk);
    end
    hreq.r_ready = 0;
    n_axi_sub++;
  endtask

  // ----------------------------------------------------------------- test
  localparam logic [31:0] TIMER = 32'h0000_A000, CLIC = 32'h0000_B000;
  localparam logic [31:0] DMA = 32'h0000_C000, TCLS = 32'h0000_D000;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] prog [$], got [$];
    logic [31:0] v, w;
    logic err;
    int id;
    for (int c = 0; c < 3; c++) begin
      ci_req[c] = '0; cd_req[c] = '0; ack[c] = 0; ack_id[c] = '0;
    end
    hreq = '0; dbg_mreq = '0; ext_irq = '0;
    for (int i = 0; i < 64; i++) hostmem[32'h8000_0000 + 32'(4 * i)] = 32'h5000_0000 + 32'(i);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // host loads a "program" into instruction memory and reads it back
    for (int i = 0; i < 16; i++) prog.push_back($urandom);
    host_write(IMEM_BASE + 32'h100, prog);
    host_read(IMEM_BASE + 32'h100, 16, got);
    for (int i = 0; i < 16; i++) check(got[i] == prog[i], $sformatf("host read-back word %0d", i));
    for (int i = 0; i < 16; i++) begin
      core_fetch(IMEM_BASE + 32'h100 + 32'(4 * i), v);
      check(v == prog[i], $sformatf("instruction fetch %0d: %h exp %h", i, v, prog[i]));
    end

    // core loads and stores, including a partial store
    core_wr(DMEM_BASE + 32'h10, 32'h1122_3344);
    core_data(1'b1, 4'b0100, DMEM_BASE + 32'h10, 32'h00AA_0000, v, err);
    n_rmw++;
    core_rd(DMEM_BASE + 32'h10, v);
    check(v == 32'h11AA_3344, $sformatf("partial store %h", v));
    host_read(DMEM_BASE + 32'h10, 1, got);
    check(got[0] == 32'h11AA_3344, "host sees the core's store");

    // peripheral windows and debug window and the host memory
    core_rd(PERIPH_BASE + 32'h0010, v);
    check(v == 32'hB007_0010, $sformatf("boot ROM read %h", v));
    n_periph++;
    core_rd(PERIPH_BASE + 32'h1004, v);
    check(v == 32'h0C0F_0004, $sformatf("PCR read %h", v));
    n_periph++;
    core_rd(32'h0000_0100, v);
    check(v == 32'hDB60_0100, $sformatf("debug window read %h", v));
    core_rd(32'h8000_0008, v);
    check(v == 32'h5000_0002, $sformatf("host memory read %h", v));
    core_wr(32'h8000_0200, 32'hCAFE_0001);
    check(hostmem[32'h8000_0200] == 32'hCAFE_0001, "core store reached host memory");

    // ECC: single error corrected, double error reported
    core_wr(DMEM_BASE + 32'h40, 32'hA5A5_0F0F);
    dut.u_dmem.mem[16] = dut.u_dmem.mem[16] ^ 39'h100;
    core_rd(DMEM_BASE + 32'h40, v);
    check(v == 32'hA5A5_0F0F, "single-bit error not corrected");
    dut.u_dmem.mem[16] = ecc_encode(32'hA5A5_0F0F) ^ 39'h3;
    core_data(1'b0, 4'hF, DMEM_BASE + 32'h40, 32'h0, v, err);
    check(err, "double-bit error not reported");
    core_wr(DMEM_BASE + 32'h40, 32'h0);
    // scrubber: plant a latent error just ahead of the scrub pointer
    begin
      int idx;
      idx = int'(dut.u_imem.scrub_addr_q) + 2;
      dut.u_imem.mem[idx] = ecc_encode(32'h1357_9BDF) ^ 39'h10;
      repeat (400) @(posedge clk);
      check(dut.u_imem.mem[idx] == ecc_encode(32'h1357_9BDF), "scrubber left the latent error");
    end

    // CLIC setup: timer (0) edge, DMA done (1) edge, TCLS (2) level
    core_wr(CLIC + 32'h800, 32'h8001_0100);
    core_wr(CLIC + 32'h804, 32'h4001_0100);
    core_wr(CLIC + 32'h808, 32'hC000_0100);

    // TCLS: core 2 stores a wrong value; the majority wins
    core_data(1'b1, 4'hF, DMEM_BASE + 32'h80, 32'h0BAD_F00D, v, err, 2, 7);
    core_rd(DMEM_BASE + 32'h80, v);
    check(v == 32'h0BAD_F00D, $sformatf("outvoted store %h", v));
    n_vote_masked++;
    core_rd(TCLS + 32'h0, v);
    check(v[0] && v[6:4] == 3'b100, $sformatf("TCLS status %h", v));
    take_irq(id);
    check(id == 2, $sformatf("resynch interrupt id %0d", id));
    // software has saved its state through the voter; request the reset
    core_wr(TCLS + 32'h4, 32'h1);
    begin
      int len = 0;
      while (!core_rst_n) begin @(negedge clk); len++; end
      @(negedge clk);
      while (!core_rst_n) begin @(negedge clk); len++; end
      check(len == 8, $sformatf("core reset lasted %0d cycles", len));
      n_resynch++;
    end
    core_rd(TCLS + 32'h0, v);
    check(v[1] && !v[0], $sformatf("TCLS status after resynch %h", v));
    core_wr(TCLS + 32'h0, 32'h2);

    // timer: period 100 cycles, interrupt through the CLIC
    core_wr(TIMER + 32'h8, 32'd99);
    core_wr(TIMER + 32'h0, 32'h1);
    for (int i = 0; i < 3; i++) begin
      take_irq(id);
      check(id == 0, $sformatf("timer interrupt id %0d", id));
    end
    core_wr(TIMER + 32'h0, 32'h0);

    // real-time DMA: every 600 cycles copy a 2x4-word sensor block from host
    // memory into data memory, while the cores keep reading data memory
    core_wr(DMA + 32'h00, 32'h8000_0000);
    core_wr(DMA + 32'h04, DMEM_BASE + 32'h400);
    core_wr(DMA + 32'h08, 32'd4);
    core_wr(DMA + 32'h0C, 32'h20);
    core_wr(DMA + 32'h10, 32'h10);
    core_wr(DMA + 32'h14, 32'd2);
    core_wr(DMA + 32'h20, 32'd1);
    core_wr(DMA + 32'h24, 32'd600);
    core_wr(DMA + 32'h28, 32'h2);
    for (int round = 0; round < 3; round++) begin
      // load data memory while the engine works
      for (int i = 0; i < 40; i++) core_rd(DMEM_BASE + 32'h400 + 32'(4 * (i % 8)), v);
      take_irq(id);
      check(id == 1, $sformatf("DMA interrupt id %0d", id));
      for (int r = 0; r < 2; r++)
        for (int j = 0; j < 4; j++) begin
          core_rd(DMEM_BASE + 32'h400 + 32'(16 * r + 4 * j), v);
          check(v == hostmem[32'h8000_0000 + 32'(32 * r + 4 * j)],
                $sformatf("sensor word r%0d j%0d: %h exp %h", r, j, v, hostmem[32'h8000_0000 + 32'(32 * r + 4 * j)]));
        end
      // new sensor readings for the next period
      for (int i = 0; i < 64; i++) hostmem[32'h8000_0000 + 32'(4 * i)] += 32'h100;
    end
    core_wr(DMA + 32'h28, 32'h0);
    core_rd(DMA + 32'h30, v);
    n_dma_launch = int'(v);
    check(v >= 3, $sformatf("DMA transfers %0d", v));
    core_rd(DMA + 32'h34, v);
    n_dma_missed = int'(v);
    check(v == 0, "missed DMA launches with a 600-cycle period");

    // mechanisms seen
    check(n_vote_masked > 0, "no outvoted fault");
    check(n_resynch > 0, "no resynchronisation");
    check(n_ecc_corr > 0, "no corrected ECC error");
    check(n_ecc_uncorr > 0, "no uncorrectable ECC error");
    check(n_scrub > 0, "no scrubber repair");
    check(n_rmw > 0, "no partial store");
    check(n_stall > 0, "no bus contention stall");
    check(n_axi_sub > 0, "no host AXI access");
    check(n_axi_mgr > 0, "no AXI access out of the system");
    check(n_dma_launch > 0, "no timed DMA launch");
    check(n_timer_irq > 0, "no timer interrupt");
    check(n_dma_irq > 0, "no DMA interrupt");
    check(n_tcls_irq > 0, "no TCLS interrupt");
    check(n_periph > 0, "no peripheral access");
    $display("mechanisms: vote-masked=%0d resynch=%0d ecc-corr=%0d ecc-uncorr=%0d scrub=%0d rmw=%0d stall=%0d axi-sub=%0d axi-mgr=%0d dma=%0d timer-irq=%0d dma-irq=%0d tcls-irq=%0d",
             n_vote_masked, n_resynch, n_ecc_corr, n_ecc_uncorr, n_scrub, n_rmw, n_stall, n_axi_sub,
             n_axi_mgr, n_dma_launch, n_timer_irq, n_dma_irq, n_tcls_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
