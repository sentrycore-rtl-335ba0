// tcls_unit: triple-core lockstep (TCLS) voter and resynchronisation control.
//
// The three cores run the same program on the same inputs. Their instruction
// and data OBI requests (and their interrupt acknowledges) are combined by bitwise majority voting, so one
// core's wrong output never reaches the system bus; the bus responses are
// fanned out unchanged to all three cores. Any bit on which the cores
// disagree marks a mismatch: the unit records which core was outvoted, counts
// the event and raises resynch_irq_o. The cores' software then saves its state
// (through the voter, so the saved copy is the majority's), and writes the
// CTRL register; the unit holds the cores in reset (core_rst_no low) for
// RESET_CYCLES cycles, clears the mismatch, and sets the RESYNCHED status bit
// so the boot code knows to restore the saved state. Mismatches are not
// checked while the cores are held in reset.
//
// Registers (register bus, byte offsets):
//   0x0 STATUS  bit0 mismatch pending, bit1 resynched (write 1 to clear),
//               bits 4..6 the core(s) outvoted in the last mismatch
//   0x4 CTRL    write bit0 = 1 to reset the cores
//   0x8 COUNT   number of mismatches seen
// Timing: the voter is combinational; the mismatch flag and interrupt are
// registered (one cycle after the disagreement).
//
// The voting and the software-driven recovery with a core reset follow the
// paper; the register map, the reset length and the interrupt wiring are
// choices of this design.
module tcls_unit
  import sc_pkg::*;
#(
  parameter int unsigned NUM_CORES    = 3,
  parameter int unsigned RESET_CYCLES = 8
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // cores
  input  obi_req_t core_instr_req_i [NUM_CORES],
  output obi_rsp_t core_instr_rsp_o [NUM_CORES],
  input  obi_req_t core_data_req_i  [NUM_CORES],
  output obi_rsp_t core_data_rsp_o  [NUM_CORES],
  output logic     core_rst_no,
  input  logic       core_irq_ack_i    [NUM_CORES],
  input  logic [5:0] core_irq_ack_id_i [NUM_CORES],
  output logic       irq_ack_o,
  output logic [5:0] irq_ack_id_o,
  // system bus
  output obi_req_t bus_instr_req_o,
  input  obi_rsp_t bus_instr_rsp_i,
  output obi_req_t bus_data_req_o,
  input  obi_rsp_t bus_data_rsp_i,
  // control
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     resynch_irq_o
);

  localparam int unsigned RW = $clog2(RESET_CYCLES + 1);

  // majority of three, bit by bit
  function automatic obi_req_t vote(obi_req_t a, obi_req_t b, obi_req_t c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  obi_req_t instr_voted, data_voted;
  logic     in_reset;
  logic [NUM_CORES-1:0] outvoted;
  logic mismatch;

  assign instr_voted = vote(core_instr_req_i[0], core_instr_req_i[1], core_instr_req_i[2]);
  assign data_voted  = vote(core_data_req_i[0],  core_data_req_i[1],  core_data_req_i[2]);

  // interrupt acknowledge towards the CLIC, voted the same way
  logic [6:0] ack_v [NUM_CORES];
  logic [6:0] ack_voted;
  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) ack_v[c] = {core_irq_ack_i[c], core_irq_ack_id_i[c]};
  end
  assign ack_voted    = (ack_v[0] & ack_v[1]) | (ack_v[0] & ack_v[2]) | (ack_v[1] & ack_v[2]);
  assign irq_ack_o    = ack_voted[6] && !in_reset;
  assign irq_ack_id_o = ack_voted[5:0];

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      outvoted[c] = (core_instr_req_i[c] != instr_voted) || (core_data_req_i[c] != data_voted) ||
                    (ack_v[c] != ack_voted);
    end
  end

  assign mismatch = |outvoted && !in_reset;

  assign bus_instr_req_o = in_reset ? '0 : instr_voted;
  assign bus_data_req_o  = in_reset ? '0 : data_voted;

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      core_instr_rsp_o[c] = bus_instr_rsp_i;
      core_data_rsp_o[c]  = bus_data_rsp_i;
    end
  end

  // ------------------------------------------------------------ control
  logic                 pending_q, resynched_q;
  logic [NUM_CORES-1:0] who_q;
  logic [31:0]          count_q;
  logic [RW-1:0]        rst_cnt_q;
  logic                 wr;

  assign in_reset    = rst_cnt_q != '0;
  assign core_rst_no = !in_reset;
  assign resynch_irq_o = pending_q;

  assign wr = reg_req_i.valid && reg_req_i.write;

  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[3:2])
      2'd0: reg_rsp_o.rdata = {25'd0, who_q, 2'd0, resynched_q, pending_q};
      2'd1: reg_rsp_o.rdata = '0;
      2'd2: reg_rsp_o.rdata = count_q;
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q   <= 1'b0;
      resynched_q <= 1'b0;
      who_q       <= '0;
      count_q     <= '0;
      rst_cnt_q   <= '0;
    end else begin
      if (mismatch) begin
        pending_q <= 1'b1;
        who_q     <= outvoted;
        count_q   <= count_q + 1;
      end
      if (in_reset) begin
        rst_cnt_q <= rst_cnt_q - 1'b1;
        if (rst_cnt_q == RW'(1)) begin
          resynched_q <= 1'b1;
          pending_q   <= 1'b0;
        end
      end
      if (wr && reg_req_i.addr[3:2] == 2'd1 && reg_req_i.wdata[0] && !in_reset) begin
        rst_cnt_q <= RW'(RESET_CYCLES);
      end
      if (wr && reg_req_i.addr[3:2] == 2'd0 && reg_req_i.wdata[1]) begin
        resynched_q <= 1'b0;
      end
    end
  end

  initial begin
    assert (NUM_CORES == 3) else $error("tcls_unit votes over exactly three cores");
  end

  // suppress "unused" for the register-bus fields this unit does not decode
  logic unused;
  assign unused = ^{reg_req_i.addr[31:4], reg_req_i.addr[1:0], reg_req_i.wstrb};

endmodule
