// ecc_mem_bank: one ECC-protected SRAM bank of SentryCore (instruction or data
// memory) with its scrubber.
//
// Every 32-bit word is stored as a 39-bit extended Hamming codeword
// (sc_pkg::ecc_encode). A read returns the corrected word; a single flipped
// bit is corrected on the fly (corr_o pulses), two flipped bits make the
// response carry err and uncorr_o pulse. A write of all four bytes encodes
// and stores the word in the cycle it is granted; a write of fewer bytes
// needs the old word and takes one extra cycle (read-modify-write: the
// request waits one cycle for gnt).
//
// The scrubber keeps single errors from piling up into double errors: after
// SCRUB_INTERVAL cycles without an access it reads the next word in turn and,
// if it holds a single error, writes the corrected codeword back (scrub_fix_o
// pulses). A scrub step occupies the bank for one cycle; a bus request
// arriving then waits one cycle.
//
// Interface: OBI subordinate, byte address, word granular. Timing: gnt in
// the request cycle (one cycle later for partial writes), rvalid one cycle
// after gnt. The paper gives ECC protection, scrubbing and the 128 KiB total
// (two 64 KiB banks); the code, the read-modify-write scheme and the
// scrubbing schedule are choices of this design.
module ecc_mem_bank
  import sc_pkg::*;
#(
  parameter int unsigned NUM_WORDS      = 16384,
  parameter int unsigned SCRUB_INTERVAL = 64
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output logic     corr_o,
  output logic     uncorr_o,
  output logic     scrub_fix_o
);

  localparam int unsigned IW = $clog2(NUM_WORDS);
  localparam int unsigned CW = $clog2(SCRUB_INTERVAL + 1);

  typedef enum logic [1:0] {S_IDLE, S_RMW, S_SCRUB} state_e;

  logic [ECC_W-1:0] mem [NUM_WORDS];

  state_e           state_q, state_d;
  logic [IW-1:0]    rd_addr_q, rd_addr_d;   // word whose codeword is decoded this cycle
  logic             rvalid_q, rvalid_d;
  logic             rread_q, rread_d;       // the pending response is a read
  logic             rerr_q, rerr_d;         // error for a pending write response
  logic [IW-1:0]    scrub_addr_q;
  logic [CW-1:0]    idle_cnt_q;

  logic [IW-1:0]    req_idx;
  ecc_dec_t         dec;
  logic             mem_we;
  logic [IW-1:0]    mem_waddr;
  logic [ECC_W-1:0] mem_wdata;
  logic [DW-1:0]    merged;

  assign req_idx = req_i.addr[IW+1:2];
  assign dec     = ecc_decode(mem[rd_addr_q]);

  always_comb begin
    for (int b = 0; b < 4; b++) begin
      merged[8*b +: 8] = req_i.be[b] ? req_i.wdata[8*b +: 8] : dec.data[8*b +: 8];
    end
  end

  always_comb begin
    state_d     = state_q;
    rd_addr_d   = rd_addr_q;
    rvalid_d    = 1'b0;
    rread_d     = 1'b0;
    rerr_d      = 1'b0;
    mem_we      = 1'b0;
    mem_waddr   = req_idx;
    mem_wdata   = ecc_encode(req_i.wdata);
    rsp_o       = '0;
    scrub_fix_o = 1'b0;

    unique case (state_q)
      S_IDLE: begin
        if (req_i.req) begin
          if (req_i.we && req_i.be != 4'hF) begin
            // partial write: fetch the old word first
            rd_addr_d = req_idx;
            state_d   = S_RMW;
          end else begin
            rsp_o.gnt = 1'b1;
            rvalid_d  = 1'b1;
            if (req_i.we) begin
              mem_we = 1'b1;
            end else begin
              rd_addr_d = req_idx;
              rread_d   = 1'b1;
            end
          end
        end else if (idle_cnt_q >= CW'(SCRUB_INTERVAL)) begin
          rd_addr_d = scrub_addr_q;
          state_d   = S_SCRUB;
        end
      end
      S_RMW: begin
        rsp_o.gnt = 1'b1;
        rvalid_d  = 1'b1;
        rerr_d    = dec.double_err;
        mem_we    = 1'b1;
        mem_wdata = ecc_encode(merged);
        state_d   = S_IDLE;
      end
      S_SCRUB: begin
        if (dec.single_err) begin
          mem_we      = 1'b1;
          mem_waddr   = rd_addr_q;
          mem_wdata   = ecc_encode(dec.data);
          scrub_fix_o = 1'b1;
        end
        state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase

    rsp_o.rvalid = rvalid_q;
    rsp_o.rdata  = rread_q ? dec.data : '0;
    rsp_o.err    = rread_q ? dec.double_err : rerr_q;
  end

  assign corr_o   = rvalid_q && rread_q && dec.single_err;
  assign uncorr_o = rvalid_q && rread_q && dec.double_err;

  always_ff @(posedge clk_i) begin
    if (mem_we) mem[mem_waddr] <= mem_wdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      rd_addr_q    <= '0;
      rvalid_q     <= 1'b0;
      rread_q      <= 1'b0;
      rerr_q       <= 1'b0;
      scrub_addr_q <= '0;
      idle_cnt_q   <= '0;
    end else begin
      state_q   <= state_d;
      rd_addr_q <= rd_addr_d;
      rvalid_q  <= rvalid_d;
      rread_q   <= rread_d;
      rerr_q    <= rerr_d;
      if (state_q == S_SCRUB) begin
        scrub_addr_q <= (scrub_addr_q == IW'(NUM_WORDS - 1)) ? '0 : scrub_addr_q + 1'b1;
        idle_cnt_q   <= '0;
      end else if (req_i.req) begin
        idle_cnt_q <= '0;
      end else if (idle_cnt_q < CW'(SCRUB_INTERVAL)) begin
        idle_cnt_q <= idle_cnt_q + 1'b1;
      end
    end
  end

  // OBI rule: a request waiting for gnt must not change.
  property p_req_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (req_i.req && !rsp_o.gnt) |=> (req_i.req && $stable(req_i.addr) && $stable(req_i.we));
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
