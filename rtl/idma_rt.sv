// idma_rt: SentryCore's DMA engine with its real-time (timed launch) extension.
//
// A transfer copies a three-dimensional block of 32-bit words: LEN words at
// consecutive addresses form a row; REPS2 rows, each SRC_STRIDE2 /
// DST_STRIDE2 bytes after the previous, form a plane; REPS3 planes, each
// SRC_STRIDE3 / DST_STRIDE3 bytes after the previous, form the transfer.
// Word j of row r of plane p is read from
//   SRC + p*SRC_STRIDE3 + r*SRC_STRIDE2 + 4*j
// and written to the same expression on the destination side. The engine
// reads one word over its OBI manager port, writes it, and moves to the
// next (one word in flight). A repeat count of 0 counts as 1.
//
// Software starts a transfer by writing CTRL bit 0. With CTRL bit 1 set, the
// real-time extension also launches it every PERIOD cycles on its own, so a
// control loop finds fresh sensor data in memory without spending core time.
// A timed launch that finds the previous transfer still running is skipped
// and counted in MISSED. done_irq_o pulses after the last write of every
// transfer; a bus error aborts the transfer and sets STATUS bit 1.
//
// Registers (register bus, byte offsets):
//   0x00 SRC          0x04 DST          0x08 LEN (words)
//   0x0C SRC_STRIDE2  0x10 DST_STRIDE2  0x14 REPS2
//   0x18 SRC_STRIDE3  0x1C DST_STRIDE3  0x20 REPS3
//   0x24 PERIOD       0x28 CTRL (bit0 start, write-only; bit1 real-time enable)
//   0x2C STATUS (bit0 busy, bit1 error)  0x30 DONE count  0x34 MISSED count
// Timing: a word costs at least 4 cycles (read gnt, read data, write gnt,
// write ack); the period counter runs every cycle while enabled.
//
// The three-dimensional transfers and their timed launch follow the paper;
// the register map, the word-by-word data path and the skip-on-busy rule are
// choices of this design.
module idma_rt
  import sc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output obi_req_t obi_req_o,
  input  obi_rsp_t obi_rsp_i,
  output logic     done_irq_o
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_RD_WAIT, S_WR, S_WR_WAIT} state_e;

  typedef struct packed {
    logic [31:0] src, dst, len, src_s2, dst_s2, reps2, src_s3, dst_s3, reps3, period;
    logic        rt_en;
  } cfg_t;

  cfg_t        cfg_q;
  state_e      state_q;
  logic [31:0] c1_q, c2_q, c3_q;
  logic [31:0] src_row_q, dst_row_q, src_pl_q, dst_pl_q, src_cur_q, dst_cur_q;
  logic [31:0] data_q;
  logic [31:0] period_cnt_q, done_cnt_q, missed_cnt_q;
  logic        err_q;

  logic wr, start_sw, tick, launch, busy;
  logic [31:0] len, reps2, reps3;

  assign len   = (cfg_q.len   == 0) ? 32'd1 : cfg_q.len;
  assign reps2 = (cfg_q.reps2 == 0) ? 32'd1 : cfg_q.reps2;
  assign reps3 = (cfg_q.reps3 == 0) ? 32'd1 : cfg_q.reps3;

  assign wr       = reg_req_i.valid && reg_req_i.write;
  assign start_sw = wr && reg_req_i.addr[11:2] == 10'd10 && reg_req_i.wstrb[0] && reg_req_i.wdata[0];
  assign tick     = cfg_q.rt_en && (period_cnt_q + 1 >= cfg_q.period);
  assign busy     = state_q != S_IDLE;
  assign launch   = !busy && (start_sw || tick);

  // ------------------------------------------------------------ registers
  always_comb begin
    reg_rsp_o       = '0;
    reg_rsp_o.ready = reg_req_i.valid;
    unique case (reg_req_i.addr[11:2])
      10'd0:  reg_rsp_o.rdata = cfg_q.src;
      10'd1:  reg_rsp_o.rdata = cfg_q.dst;
      10'd2:  reg_rsp_o.rdata = cfg_q.len;
      10'd3:  reg_rsp_o.rdata = cfg_q.src_s2;
      10'd4:  reg_rsp_o.rdata = cfg_q.dst_s2;
      10'd5:  reg_rsp_o.rdata = cfg_q.reps2;
      10'd6:  reg_rsp_o.rdata = cfg_q.src_s3;
      10'd7:  reg_rsp_o.rdata = cfg_q.dst_s3;
      10'd8:  reg_rsp_o.rdata = cfg_q.reps3;
      10'd9:  reg_rsp_o.rdata = cfg_q.period;
      10'd10: reg_rsp_o.rdata = {30'd0, cfg_q.rt_en, 1'b0};
      10'd11: reg_rsp_o.rdata = {30'd0, err_q, busy};
      10'd12: reg_rsp_o.rdata = done_cnt_q;
      10'd13: reg_rsp_o.rdata = missed_cnt_q;
      default: reg_rsp_o.error = 1'b1;
    endcase
  end

  // ------------------------------------------------------------ bus port
  always_comb begin
    obi_req_o       = '0;
    obi_req_o.req   = (state_q == S_RD) || (state_q == S_WR);
    obi_req_o.we    = (state_q == S_WR);
    obi_req_o.be    = 4'hF;
    obi_req_o.addr  = (state_q == S_WR) ? dst_cur_q : src_cur_q;
    obi_req_o.wdata = data_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q        <= '0;
      state_q      <= S_IDLE;
      c1_q         <= '0;
      c2_q         <= '0;
      c3_q         <= '0;
      src_row_q    <= '0;
      dst_row_q    <= '0;
      src_pl_q     <= '0;
      dst_pl_q     <= '0;
      src_cur_q    <= '0;
      dst_cur_q    <= '0;
      data_q       <= '0;
      period_cnt_q <= '0;
      done_cnt_q   <= '0;
      missed_cnt_q <= '0;
      err_q        <= 1'b0;
      done_irq_o   <= 1'b0;
    end else begin
      done_irq_o <= 1'b0;

      // configuration writes
      if (wr) begin
        unique case (reg_req_i.addr[11:2])
          10'd0:  cfg_q.src    <= apply_strb(cfg_q.src,    reg_req_i.wdata, reg_req_i.wstrb);
          10'd1:  cfg_q.dst    <= apply_strb(cfg_q.dst,    reg_req_i.wdata, reg_req_i.wstrb);
          10'd2:  cfg_q.len    <= apply_strb(cfg_q.len,    reg_req_i.wdata, reg_req_i.wstrb);
          10'd3:  cfg_q.src_s2 <= apply_strb(cfg_q.src_s2, reg_req_i.wdata, reg_req_i.wstrb);
          10'd4:  cfg_q.dst_s2 <= apply_strb(cfg_q.dst_s2, reg_req_i.wdata, reg_req_i.wstrb);
          10'd5:  cfg_q.reps2  <= apply_strb(cfg_q.reps2,  reg_req_i.wdata, reg_req_i.wstrb);
          10'd6:  cfg_q.src_s3 <= apply_strb(cfg_q.src_s3, reg_req_i.wdata, reg_req_i.wstrb);
          10'd7:  cfg_q.dst_s3 <= apply_strb(cfg_q.dst_s3, reg_req_i.wdata, reg_req_i.wstrb);
          10'd8:  cfg_q.reps3  <= apply_strb(cfg_q.reps3,  reg_req_i.wdata, reg_req_i.wstrb);
          10'd9:  cfg_q.period <= apply_strb(cfg_q.period, reg_req_i.wdata, reg_req_i.wstrb);
          10'd10: if (reg_req_i.wstrb[0]) cfg_q.rt_en <= reg_req_i.wdata[1];
          default: ;
        endcase
      end

      // real-time launch schedule
      if (!cfg_q.rt_en || tick) period_cnt_q <= '0;
      else                      period_cnt_q <= period_cnt_q + 1;
      if (tick && busy) missed_cnt_q <= missed_cnt_q + 1;

      // transfer engine
      unique case (state_q)
        S_IDLE: begin
          if (launch) begin
            c1_q      <= '0;
            c2_q      <= '0;
            c3_q      <= '0;
            src_row_q <= cfg_q.src;
            dst_row_q <= cfg_q.dst;
            src_pl_q  <= cfg_q.src;
            dst_pl_q  <= cfg_q.dst;
            src_cur_q <= cfg_q.src;
            dst_cur_q <= cfg_q.dst;
            err_q     <= 1'b0;
            state_q   <= S_RD;
          end
        end
        S_RD: if (obi_rsp_i.gnt) state_q <= S_RD_WAIT;
        S_RD_WAIT: begin
          if (obi_rsp_i.rvalid) begin
            data_q <= obi_rsp_i.rdata;
            if (obi_rsp_i.err) begin
              err_q   <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              state_q <= S_WR;
            end
          end
        end
        S_WR: if (obi_rsp_i.gnt) state_q <= S_WR_WAIT;
        S_WR_WAIT: begin
          if (obi_rsp_i.rvalid) begin
            if (obi_rsp_i.err) begin
              err_q   <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              state_q <= S_RD;
              if (c1_q + 1 < len) begin
                c1_q      <= c1_q + 1;
                src_cur_q <= src_cur_q + 4;
                dst_cur_q <= dst_cur_q + 4;
              end else begin
                c1_q <= '0;
                if (c2_q + 1 < reps2) begin
                  c2_q      <= c2_q + 1;
                  src_row_q <= src_row_q + cfg_q.src_s2;
                  dst_row_q <= dst_row_q + cfg_q.dst_s2;
                  src_cur_q <= src_row_q + cfg_q.src_s2;
                  dst_cur_q <= dst_row_q + cfg_q.dst_s2;
                end else begin
                  c2_q <= '0;
                  if (c3_q + 1 < reps3) begin
                    c3_q      <= c3_q + 1;
                    src_pl_q  <= src_pl_q + cfg_q.src_s3;
                    dst_pl_q  <= dst_pl_q + cfg_q.dst_s3;
                    src_row_q <= src_pl_q + cfg_q.src_s3;
                    dst_row_q <= dst_pl_q + cfg_q.dst_s3;
                    src_cur_q <= src_pl_q + cfg_q.src_s3;
                    dst_cur_q <= dst_pl_q + cfg_q.dst_s3;
                  end else begin
                    state_q    <= S_IDLE;
                    done_irq_o <= 1'b1;
                    done_cnt_q <= done_cnt_q + 1;
                  end
                end
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
