// sc_pkg: types, address map and ECC functions shared by the SentryCore RTL.
//
// The system bus carries OBI (Open Bus Interface) transactions: a manager raises
// req with address, write enable, byte enables and write data and holds them
// until gnt; the read data (or write acknowledge) comes back later with rvalid,
// at most one response per granted request and in order. The peripheral bus is
// a register bus: valid/write/addr/wdata/wstrb, answered with ready/rdata/error
// in the same cycle as ready. The two AXI4 ports use the usual five channels
// with 32-bit data.
//
// The memories protect each 32-bit word with a (39,32) extended Hamming code
// (single error correct, double error detect). The code itself and the address
// map below are choices of this design; the paper only says that the memories
// are ECC-protected and that the blocks share one OBI crossbar.
package sc_pkg;

  localparam int unsigned AW = 32;
  localparam int unsigned DW = 32;
  localparam int unsigned ECC_W = 39;

  // ---------------------------------------------------------------- OBI
  typedef struct packed {
    logic          req;
    logic          we;
    logic [3:0]    be;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic          gnt;
    logic          rvalid;
    logic [DW-1:0] rdata;
    logic          err;
  } obi_rsp_t;

  // ----------------------------------------------------------- register bus
  typedef struct packed {
    logic          valid;
    logic          write;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
    logic [3:0]    wstrb;
  } reg_req_t;

  typedef struct packed {
    logic          ready;
    logic [DW-1:0] rdata;
    logic          error;
  } reg_rsp_t;

  // register write with byte strobes
  function automatic logic [DW-1:0] apply_strb(logic [DW-1:0] old, logic [DW-1:0] wdata,
                                               logic [3:0] strb);
    logic [DW-1:0] res;
    for (int b = 0; b < 4; b++) res[8*b +: 8] = strb[b] ? wdata[8*b +: 8] : old[8*b +: 8];
    return res;
  endfunction

  // ------------------------------------------------------------------- AXI4
  localparam int unsigned AXI_ID_W = 4;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [AW-1:0]       addr;
    logic [7:0]          len;
    logic [2:0]          size;
    logic [1:0]          burst;
  } axi_ax_t;

  typedef struct packed {
    logic [DW-1:0] data;
    logic [3:0]    strb;
    logic          last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [DW-1:0]       data;
    logic [1:0]          resp;
    logic                last;
  } axi_r_t;

  typedef struct packed {
    logic    aw_valid;
    axi_ax_t aw;
    logic    w_valid;
    axi_w_t  w;
    logic    b_ready;
    logic    ar_valid;
    axi_ax_t ar;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    logic   b_valid;
    axi_b_t b;
    logic   ar_ready;
    logic   r_valid;
    axi_r_t r;
  } axi_rsp_t;

  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;
  localparam logic [1:0] AXI_BURST_FIXED = 2'b00;

  // ------------------------------------------------------------ address map
  // System bus subordinates, in crossbar port order.
  typedef enum logic [2:0] {
    SUB_DBG   = 3'd0,
    SUB_PERIPH = 3'd1,
    SUB_IMEM  = 3'd2,
    SUB_DMEM  = 3'd3,
    SUB_EXT   = 3'd4
  } sub_idx_e;
  localparam int unsigned SYS_NUM_SUB = 5;

  // System bus managers, in crossbar port order.
  typedef enum logic [2:0] {
    MGR_CORE_INSTR = 3'd0,
    MGR_CORE_DATA  = 3'd1,
    MGR_AXI        = 3'd2,
    MGR_DMA        = 3'd3,
    MGR_DBG        = 3'd4
  } mgr_idx_e;
  localparam int unsigned SYS_NUM_MGR = 5;

  localparam logic [AW-1:0] DBG_BASE    = 32'h0000_0000;
  localparam logic [AW-1:0] PERIPH_BASE = 32'h0000_8000;
  localparam logic [AW-1:0] IMEM_BASE   = 32'h0001_0000;
  localparam logic [AW-1:0] DMEM_BASE   = 32'h0002_0000;
  localparam logic [AW-1:0] REGION_END  = 32'h0003_0000;

  // Peripheral bus devices, 4 KiB each from PERIPH_BASE.
  typedef enum logic [2:0] {
    DEV_BOOTROM = 3'd0,
    DEV_PCR     = 3'd1,
    DEV_TIMER   = 3'd2,
    DEV_CLIC    = 3'd3,
    DEV_DMA     = 3'd4,
    DEV_TCLS    = 3'd5
  } dev_idx_e;
  localparam int unsigned SYS_NUM_DEV = 6;

  // Subordinate that serves an address; everything outside the local
  // regions leaves through the AXI4 manager port.
  function automatic sub_idx_e decode_addr(logic [AW-1:0] addr);
    if (addr < PERIPH_BASE)     return SUB_DBG;
    else if (addr < IMEM_BASE)  return SUB_PERIPH;
    else if (addr < DMEM_BASE)  return SUB_IMEM;
    else if (addr < REGION_END) return SUB_DMEM;
    else                        return SUB_EXT;
  endfunction

  // ------------------------------------------------------------------- ECC
  // Extended Hamming (39,32). Codeword bit p (1..38) is Hamming position p;
  // positions 1,2,4,8,16,32 hold check bits, the others hold data bits in
  // ascending order. Bit 0 is the overall parity of bits 1..38.
  function automatic logic [ECC_W-1:0] ecc_encode(logic [DW-1:0] data);
    logic [ECC_W-1:0] cw;
    int unsigned d;
    cw = '0;
    d  = 0;
    for (int unsigned p = 1; p < ECC_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        cw[p] = data[d];
        d++;
      end
    end
    for (int unsigned k = 0; k < 6; k++) begin
      for (int unsigned p = 1; p < ECC_W; p++) begin
        if ((p & (1 << k)) != 0 && p != (1 << k)) cw[1 << k] ^= cw[p];
      end
    end
    cw[0] = ^cw[ECC_W-1:1];
    return cw;
  endfunction

  typedef struct packed {
    logic [DW-1:0] data;       // corrected data
    logic          single_err; // one bit was wrong and has been corrected
    logic          double_err; // two bits wrong: data unusable
  } ecc_dec_t;

  function automatic ecc_dec_t ecc_decode(logic [ECC_W-1:0] cw_in);
    logic [ECC_W-1:0] cw;
    logic [5:0]       syn;
    logic             par;
    ecc_dec_t         res;
    int unsigned      d;
    cw  = cw_in;
    syn = '0;
    for (int unsigned k = 0; k < 6; k++) begin
      for (int unsigned p = 1; p < ECC_W; p++) begin
        if ((p & (1 << k)) != 0) syn[k] ^= cw[p];
      end
    end
    par = ^cw;
    res.single_err = 1'b0;
    res.double_err = 1'b0;
    if (par) begin
      // odd number of flips: a single error at position syn (0 = parity bit)
      if (syn < 6'(ECC_W)) begin
        cw[syn] = ~cw[syn];
        res.single_err = 1'b1;
      end else begin
        res.double_err = 1'b1;
      end
    end else if (syn != '0) begin
      res.double_err = 1'b1;
    end
    d = 0;
    res.data = '0;
    for (int unsigned p = 1; p < ECC_W; p++) begin
      if ((p & (p - 1)) != 0) begin
        res.data[d] = cw[p];
        d++;
      end
    end
    return res;
  endfunction

endpackage
