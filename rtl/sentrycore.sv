// sentrycore: top level of the SentryCore safety co-processor system.
//
// Three lockstepped cores (outside this RTL; their ports are the core_*
// signals) reach the system through the TCLS voter, which sends one voted
// instruction and one voted data request into the OBI system crossbar. The
// crossbar also takes requests from the AXI4 subordinate port (the host), the
// real-time DMA engine and the debug module (outside this RTL, dbg_mgr_*),
// and serves five regions:
//   0x0000_0000 - 0x0000_7FFF  debug module memory   (outside, dbg_sub_*)
//   0x0000_8000 - 0x0000_FFFF  peripheral bus, 4 KiB per device:
//        +0x0000 boot ROM (outside, bootrom_*)   +0x1000 platform control
//        registers (outside, pcr_*)   +0x2000 timer   +0x3000 CLIC
//        +0x4000 DMA engine           +0x5000 TCLS control
//   0x0001_0000 - 0x0001_FFFF  instruction memory, 64 KiB, ECC
//   0x0002_0000 - 0x0002_FFFF  data memory, 64 KiB, ECC
//   everything else            AXI4 manager port to the host system
// The CLIC gathers the interrupts: line 0 timer, 1 DMA done, 2 TCLS
// mismatch (resynchronisation request), 3 uncorrectable memory error,
// 4 corrected memory error, 8 and up the external lines ext_irq_i; lines 5-7
// are unused. Its choice goes to all three cores; their acknowledges are
// voted.
//
// The set of blocks and how they connect follow the paper's architecture
// figure and text; the address map, the interrupt numbering and the bus
// protocols' details are choices of this design.
module sentrycore
  import sc_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 16384,
  parameter int unsigned NUM_IRQ   = 64
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // the three lockstep cores
  input  obi_req_t          core_instr_req_i  [3],
  output obi_rsp_t          core_instr_rsp_o  [3],
  input  obi_req_t          core_data_req_i   [3],
  output obi_rsp_t          core_data_rsp_o   [3],
  output logic              core_rst_no,
  output logic              core_irq_valid_o,
  output logic [5:0]        core_irq_id_o,
  output logic [7:0]        core_irq_level_o,
  input  logic              core_irq_ack_i    [3],
  input  logic [5:0]        core_irq_ack_id_i [3],
  // AXI4 subordinate port (host into SentryCore)
  input  axi_req_t          axi_sub_req_i,
  output axi_rsp_t          axi_sub_rsp_o,
  // AXI4 manager port (SentryCore out to the host system)
  output axi_req_t          axi_mgr_req_o,
  input  axi_rsp_t          axi_mgr_rsp_i,
  // debug module: its system-bus manager and its memory window
  input  obi_req_t          dbg_mgr_req_i,
  output obi_rsp_t          dbg_mgr_rsp_o,
  output obi_req_t          dbg_sub_req_o,
  input  obi_rsp_t          dbg_sub_rsp_i,
  // boot ROM and platform control registers on the peripheral bus
  output reg_req_t          bootrom_req_o,
  input  reg_rsp_t          bootrom_rsp_i,
  output reg_req_t          pcr_req_o,
  input  reg_rsp_t          pcr_rsp_i,
  // external interrupts
  input  logic [NUM_IRQ-9:0] ext_irq_i
);

  obi_req_t mgr_req [SYS_NUM_MGR];
  obi_rsp_t mgr_rsp [SYS_NUM_MGR];
  obi_req_t sub_req [SYS_NUM_SUB];
  obi_rsp_t sub_rsp [SYS_NUM_SUB];
  reg_req_t dev_req [SYS_NUM_DEV];
  reg_rsp_t dev_rsp [SYS_NUM_DEV];

  logic irq_ack;
  logic [5:0] irq_ack_id;
  logic tcls_irq, timer_irq, dma_irq;
  logic imem_corr, imem_uncorr, imem_fix, dmem_corr, dmem_uncorr, dmem_fix;
  logic [NUM_IRQ-1:0] irqs;

  // -------------------------------------------------------- lockstep cores
  tcls_unit u_tcls (
    .clk_i, .rst_ni,
    .core_instr_req_i, .core_instr_rsp_o,
    .core_data_req_i,  .core_data_rsp_o,
    .core_rst_no,
    .core_irq_ack_i, .core_irq_ack_id_i,
    .irq_ack_o       (irq_ack),
    .irq_ack_id_o    (irq_ack_id),
    .bus_instr_req_o (mgr_req[MGR_CORE_INSTR]),
    .bus_instr_rsp_i (mgr_rsp[MGR_CORE_INSTR]),
    .bus_data_req_o  (mgr_req[MGR_CORE_DATA]),
    .bus_data_rsp_i  (mgr_rsp[MGR_CORE_DATA]),
    .reg_req_i       (dev_req[DEV_TCLS]),
    .reg_rsp_o       (dev_rsp[DEV_TCLS]),
    .resynch_irq_o   (tcls_irq)
  );

  // ----------------------------------------------------------- system bus
  assign mgr_req[MGR_DBG] = dbg_mgr_req_i;
  assign dbg_mgr_rsp_o    = mgr_rsp[MGR_DBG];

  obi_xbar #(.NUM_MGR(SYS_NUM_MGR), .NUM_SUB(SYS_NUM_SUB)) u_xbar (
    .clk_i, .rst_ni,
    .mgr_req_i (mgr_req), .mgr_rsp_o (mgr_rsp),
    .sub_req_o (sub_req), .sub_rsp_i (sub_rsp)
  );

  assign dbg_sub_req_o    = sub_req[SUB_DBG];
  assign sub_rsp[SUB_DBG] = dbg_sub_rsp_i;

  // ------------------------------------------------------------- memories
  ecc_mem_bank #(.NUM_WORDS(MEM_WORDS)) u_imem (
    .clk_i, .rst_ni,
    .req_i (sub_req[SUB_IMEM]), .rsp_o (sub_rsp[SUB_IMEM]),
    .corr_o (imem_corr), .uncorr_o (imem_uncorr), .scrub_fix_o (imem_fix)
  );

  ecc_mem_bank #(.NUM_WORDS(MEM_WORDS)) u_dmem (
    .clk_i, .rst_ni,
    .req_i (sub_req[SUB_DMEM]), .rsp_o (sub_rsp[SUB_DMEM]),
    .corr_o (dmem_corr), .uncorr_o (dmem_uncorr), .scrub_fix_o (dmem_fix)
  );

  // ------------------------------------------------------------ AXI4 ports
  axi_to_obi u_axi_sub (
    .clk_i, .rst_ni,
    .axi_req_i (axi_sub_req_i), .axi_rsp_o (axi_sub_rsp_o),
    .obi_req_o (mgr_req[MGR_AXI]), .obi_rsp_i (mgr_rsp[MGR_AXI])
  );

  obi_to_axi u_axi_mgr (
    .clk_i, .rst_ni,
    .obi_req_i (sub_req[SUB_EXT]), .obi_rsp_o (sub_rsp[SUB_EXT]),
    .axi_req_o (axi_mgr_req_o), .axi_rsp_i (axi_mgr_rsp_i)
  );

  // ------------------------------------------------------- peripheral bus
  periph_bus #(.NUM_DEV(SYS_NUM_DEV)) u_periph (
    .clk_i, .rst_ni,
    .req_i (sub_req[SUB_PERIPH]), .rsp_o (sub_rsp[SUB_PERIPH]),
    .dev_req_o (dev_req), .dev_rsp_i (dev_rsp)
  );

  assign bootrom_req_o        = dev_req[DEV_BOOTROM];
  assign dev_rsp[DEV_BOOTROM] = bootrom_rsp_i;
  assign pcr_req_o            = dev_req[DEV_PCR];
  assign dev_rsp[DEV_PCR]     = pcr_rsp_i;

  timer u_timer (
    .clk_i, .rst_ni,
    .reg_req_i (dev_req[DEV_TIMER]), .reg_rsp_o (dev_rsp[DEV_TIMER]),
    .irq_o (timer_irq)
  );

  idma_rt u_dma (
    .clk_i, .rst_ni,
    .reg_req_i (dev_req[DEV_DMA]), .reg_rsp_o (dev_rsp[DEV_DMA]),
    .obi_req_o (mgr_req[MGR_DMA]), .obi_rsp_i (mgr_rsp[MGR_DMA]),
    .done_irq_o (dma_irq)
  );

  assign irqs = {ext_irq_i, 3'b000,
                 imem_corr | dmem_corr | imem_fix | dmem_fix,
                 imem_uncorr | dmem_uncorr,
                 tcls_irq, dma_irq, timer_irq};

  clic #(.NUM_IRQ(NUM_IRQ)) u_clic (
    .clk_i, .rst_ni,
    .reg_req_i (dev_req[DEV_CLIC]), .reg_rsp_o (dev_rsp[DEV_CLIC]),
    .irq_i (irqs),
    .irq_valid_o (core_irq_valid_o), .irq_id_o (core_irq_id_o), .irq_level_o (core_irq_level_o),
    .irq_ack_i (irq_ack), .irq_ack_id_i (irq_ack_id)
  );

endmodule
