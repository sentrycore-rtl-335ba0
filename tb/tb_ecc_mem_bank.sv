// tb_ecc_mem_bank: self-checking test of the ECC memory bank and its scrubber.
//
// Drives OBI reads and writes (full and partial) against a reference array,
// checks that rvalid follows gnt by one cycle, flips single and double bits in
// the stored codewords through a hierarchical reference, and checks correction,
// error reporting and that the scrubber repairs every single-bit error left in
// the bank.
module tb_ecc_mem_bank;
  import sc_pkg::*;

  localparam int unsigned WORDS = 64;
  localparam int unsigned INTERVAL = 4;

  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  logic corr, uncorr, fix;
  int checks = 0, failures = 0;
  int n_corr = 0, n_uncorr = 0, n_fix = 0;
  logic [31:0] ref_mem [WORDS];

  always #5 clk = ~clk;

  ecc_mem_bank #(.NUM_WORDS(WORDS), .SCRUB_INTERVAL(INTERVAL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .corr_o(corr), .uncorr_o(uncorr), .scrub_fix_o(fix));

  always @(negedge clk) begin
    n_corr   += int'(corr);
    n_uncorr += int'(uncorr);
    n_fix    += int'(fix);
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One OBI access; returns read data, error flag, cycles from request to gnt
  // and from gnt to rvalid.
  task automatic access(input logic we, input logic [3:0] be, input logic [31:0] addr,
                        input logic [31:0] wdata, output logic [31:0] rdata,
                        output logic err, output int gnt_lat, output int rsp_lat);
    @(negedge clk);
    req = '{req: 1'b1, we: we, be: be, addr: addr, wdata: wdata};
    gnt_lat = 0;
    forever begin
      #4;
      if (rsp.gnt) break;
      @(negedge clk);
      gnt_lat++;
    end
    @(negedge clk);
    req = '0;
    rsp_lat = 1;
    forever begin
      #4;
      if (rsp.rvalid) begin
        rdata = rsp.rdata;
        err   = rsp.err;
        break;
      end
      @(negedge clk);
      rsp_lat++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, wd, exp;
    logic        err;
    int          gl, rl;
    logic [3:0]  be;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // fill with full-word writes
    for (int i = 0; i < WORDS; i++) begin
      wd = $urandom;
      ref_mem[i] = wd;
      access(1'b1, 4'hF, 32'(i * 4), wd, rd, err, gl, rl);
      check(gl == 0 && rl == 1 && !err, $sformatf("full write %0d timing gnt=%0d rsp=%0d", i, gl, rl));
    end
    // read back
    for (int i = 0; i < WORDS; i++) begin
      access(1'b0, 4'hF, 32'(i * 4), 32'h0, rd, err, gl, rl);
      check(rd == ref_mem[i] && !err && rl == 1, $sformatf("read %0d: %h exp %h", i, rd, ref_mem[i]));
    end
    // partial writes take one extra cycle
    for (int i = 0; i < 40; i++) begin
      int a;
      a  = $urandom_range(WORDS - 1);
      be = 4'($urandom_range(1, 14));
      wd = $urandom;
      for (int b = 0; b < 4; b++) if (be[b]) ref_mem[a][8*b +: 8] = wd[8*b +: 8];
      access(1'b1, be, 32'(a * 4), wd, rd, err, gl, rl);
      check(gl == 1 && rl == 1 && !err, $sformatf("partial write timing gnt=%0d", gl));
      access(1'b0, 4'hF, 32'(a * 4), 32'h0, rd, err, gl, rl);
      check(rd == ref_mem[a], $sformatf("partial write word %0d: %h exp %h", a, rd, ref_mem[a]));
    end
    // single-bit error in every bit position of word 5 is corrected
    for (int k = 0; k < ECC_W; k++) begin
      dut.mem[5] = dut.mem[5] ^ (39'(1) << k);
      access(1'b0, 4'hF, 32'd20, 32'h0, rd, err, gl, rl);
      check(rd == ref_mem[5] && !err, $sformatf("single error bit %0d not corrected", k));
      @(posedge clk);
      dut.mem[5] = ecc_encode(ref_mem[5]);
    end
    check(n_corr == ECC_W, $sformatf("corrected-error pulses %0d", n_corr));
    // double errors are flagged
    for (int k = 0; k < 10; k++) begin
      int b1, b2;
      b1 = $urandom_range(ECC_W - 1);
      b2 = (b1 + 1 + $urandom_range(ECC_W - 2)) % ECC_W;
      dut.mem[7] = ecc_encode(ref_mem[7]) ^ (39'(1) << b1) ^ (39'(1) << b2);
      access(1'b0, 4'hF, 32'd28, 32'h0, rd, err, gl, rl);
      check(err, $sformatf("double error bits %0d,%0d not flagged", b1, b2));
      @(posedge clk);
    end
    check(n_uncorr == 10, $sformatf("uncorrectable pulses %0d", n_uncorr));
    dut.mem[7] = ecc_encode(ref_mem[7]);
    // plant single errors, stay idle, and let the scrubber repair them
    for (int i = 0; i < WORDS; i += 3) dut.mem[i] = dut.mem[i] ^ (39'(1) << (i % ECC_W));
    repeat (WORDS * (INTERVAL + 2) + 10) @(posedge clk);
    check(n_fix == (WORDS + 2) / 3, $sformatf("scrub fixes %0d exp %0d", n_fix, (WORDS + 2) / 3));
    for (int i = 0; i < WORDS; i++) begin
      check(dut.mem[i] == ecc_encode(ref_mem[i]), $sformatf("word %0d not scrubbed", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
