// mcu_pkg: types and constants shared by the real-time MCU.
//
// The MCU is built around a 64-bit RISC-V core, so the AXI4 interconnect carries
// 64-bit addresses and 64-bit data. AXI4 channels are bundled in two structs per
// port, a request (master to slave: AW, W, AR payloads, their valids, and the
// B/R readies) and a response (slave to master), so a whole port is two signals.
// The register interface used by the memory-mapped control registers of the
// interrupt controllers, the DMA engine and the IOMMU is a plain 32-bit bus with
// a single-cycle combinational read.
//
// Widths of AXI IDs and user fields, and the memory map, are this design's own
// choices: the paper names the AXI4 interconnect but gives no widths or addresses.
package mcu_pkg;

  localparam int unsigned AXI_ADDR_W = 64;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;

  typedef logic [AXI_ADDR_W-1:0] addr_t;
  typedef logic [AXI_DATA_W-1:0] data_t;
  typedef logic [AXI_STRB_W-1:0] strb_t;
  typedef logic [AXI_ID_W-1:0]   id_t;

  // AXI4 response codes
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // AXI4 burst types
  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
  } axi_ax_t;   // AW and AR payload

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } axi_w_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } axi_b_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // 32-bit register bus (one access per cycle, combinational read data)
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [31:0] addr;   // byte offset inside the target
    logic [31:0] wdata;
    logic [3:0]  wstrb;
  } reg_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        error;
  } reg_rsp_t;

  // Memory map of the MCU (slave index, base, size)
  localparam int unsigned NUM_SLAVES = 8;
  localparam int unsigned S_SPM   = 0;
  localparam int unsigned S_CLINT = 1;
  localparam int unsigned S_PLIC  = 2;
  localparam int unsigned S_CLIC  = 3;
  localparam int unsigned S_DMA   = 4;
  localparam int unsigned S_IOMMU = 5;
  localparam int unsigned S_PERIPH = 6;
  localparam int unsigned S_HOST  = 7;

  localparam addr_t SPM_BASE    = 64'h0000_0000_7000_0000;
  localparam addr_t CLINT_BASE  = 64'h0000_0000_0204_0000;
  localparam addr_t PLIC_BASE   = 64'h0000_0000_0400_0000;
  localparam addr_t CLIC_BASE   = 64'h0000_0000_0800_0000;
  localparam addr_t DMA_BASE    = 64'h0000_0000_0100_0000;
  localparam addr_t IOMMU_BASE  = 64'h0000_0000_0300_0000;
  localparam addr_t PERIPH_BASE = 64'h0000_0000_1000_0000;
  localparam addr_t HOST_BASE   = 64'h0000_0000_8000_0000;

  localparam addr_t CLINT_SIZE  = 64'h0001_0000;
  localparam addr_t PLIC_SIZE   = 64'h0400_0000;
  localparam addr_t CLIC_SIZE   = 64'h0001_0000;
  localparam addr_t DMA_SIZE    = 64'h0000_1000;
  localparam addr_t IOMMU_SIZE  = 64'h0000_1000;
  localparam addr_t PERIPH_SIZE = 64'h1000_0000;
  localparam addr_t HOST_SIZE   = 64'h8000_0000;

  // Standard interrupt identifiers of the first 12 lines (RISC-V privileged spec)
  localparam int unsigned IRQ_MSI = 3;
  localparam int unsigned IRQ_MTI = 7;
  localparam int unsigned IRQ_SEI = 9;
  localparam int unsigned IRQ_MEI = 11;

endpackage
