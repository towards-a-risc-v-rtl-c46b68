// rt_mcu_top: the real-time RISC-V microcontroller of the mixed-criticality ECU,
// without its core.
//
// The MCU runs the safety-critical RTOS next to a multi-core application
// processor (the host) that runs Linux. It contains a 128 KiB scratchpad (spm),
// a DMA engine (dma), an AXI4 interconnect (axi_xbar), a software-managed IOMMU
// through which the host reaches the MCU (iommu), and the interrupt system of the
// improved design: the legacy CLINT as timer source, the PLIC for shared external
// interrupts, and the CLIC in front of the core with its core-side handshake
// logic (cva6_clic_irq_ctrl).
//
// Interconnect masters: 0 the core (core_req_i), 1 the DMA engine, 2 the host
// through the IOMMU. Slaves, at the addresses of mcu_pkg: the SPM, the register
// blocks of CLINT, PLIC, CLIC, DMA and IOMMU (each behind an axi_to_reg bridge),
// the I/O peripherals (periph_req_o) and the host's shared memory (host_mem_req_o).
//
// Interrupt routing (the paper's Fig. 6b): the PLIC arbitrates external sources
// (1: DMA done, 2: IOMMU fault, 3 and up: ext_irq_i) and drives meip and seip;
// the CLINT drives mtip and msip. These enter the CLIC on their standard lines
// (msip 3, mtip 7, seip 9, meip 11); local_irq_i feeds lines 16..NUM_INTR-1. The
// CLIC hands the winning interrupt to the core-side logic by valid/ready with
// its id and level, which turns it into a trap request (trap_o, trap_pc_o) for the
// core pipeline and implements the vectoring and mnxti CSRs.
//
// The core itself (CVA6 with its caches and MMU), the peripherals and the host are
// outside: their connections are the ports of this module.
module rt_mcu_top
  import mcu_pkg::*;
#(
  parameter int unsigned NUM_INTR    = 256,
  parameter int unsigned SPM_BYTES   = 131072,
  parameter int unsigned PLIC_SRC    = 32,
  parameter int unsigned IOTLB_SIZE  = 16,
  parameter int unsigned DMA_BEATS   = 16
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  rtc_tick_i,
  // core data/instruction AXI4 master port
  input  axi_req_t              core_req_i,
  output axi_rsp_t              core_rsp_o,
  // core pipeline side of the interrupt interface
  input  logic                  csr_valid_i,
  input  logic [1:0]            csr_op_i,
  input  logic [11:0]           csr_addr_i,
  input  logic [63:0]           csr_wdata_i,
  output logic [63:0]           csr_rdata_o,
  input  logic [63:0]           pc_i,
  output logic                  trap_o,
  output logic [63:0]           trap_pc_o,
  output logic                  trap_table_o,
  output logic [63:0]           trap_cause_o,
  input  logic                  mret_i,
  output logic [63:0]           mepc_o,
  // host (multi-core domain) into the MCU, virtual addresses
  input  axi_req_t              host_req_i,
  output axi_rsp_t              host_rsp_o,
  // MCU out to the host's shared memory
  output axi_req_t              host_mem_req_o,
  input  axi_rsp_t              host_mem_rsp_i,
  // I/O peripherals (SPI, I2C, UART)
  output axi_req_t              periph_req_o,
  input  axi_rsp_t              periph_rsp_i,
  // interrupts
  input  logic [PLIC_SRC-4:0]   ext_irq_i,
  input  logic [NUM_INTR-17:0]  local_irq_i
);

  localparam int unsigned IDW = $clog2(NUM_INTR);

  axi_req_t mreq [3];
  axi_rsp_t mrsp [3];
  axi_req_t sreq [NUM_SLAVES];
  axi_rsp_t srsp [NUM_SLAVES];

  reg_req_t clint_rq, plic_rq, clic_rq, dma_rq, iommu_rq;
  reg_rsp_t clint_rs, plic_rs, clic_rs, dma_rs, iommu_rs;

  logic mtip, msip, meip, seip, dma_irq, iommu_irq;

  // ---------------- interconnect ----------------
  assign mreq[0]    = core_req_i;
  assign core_rsp_o = mrsp[0];

  axi_xbar #(
    .NM   (3),
    .NS   (NUM_SLAVES),
    .BASE ({HOST_BASE, PERIPH_BASE, IOMMU_BASE, DMA_BASE, CLIC_BASE, PLIC_BASE, CLINT_BASE, SPM_BASE}),
    .SIZE ({HOST_SIZE, PERIPH_SIZE, IOMMU_SIZE, DMA_SIZE, CLIC_SIZE, PLIC_SIZE, CLINT_SIZE, 64'(SPM_BYTES)})
  ) i_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (mreq),
    .mst_rsp_o (mrsp),
    .slv_req_o (sreq),
    .slv_rsp_i (srsp)
  );

  spm #(.SIZE_BYTES(SPM_BYTES)) i_spm (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_SPM]), .axi_rsp_o(srsp[S_SPM])
  );

  assign periph_req_o     = sreq[S_PERIPH];
  assign srsp[S_PERIPH]   = periph_rsp_i;
  assign host_mem_req_o   = sreq[S_HOST];
  assign srsp[S_HOST]     = host_mem_rsp_i;

  // ---------------- register bridges ----------------
  axi_to_reg #(.BASE(CLINT_BASE)) i_br_clint (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_CLINT]), .axi_rsp_o(srsp[S_CLINT]),
    .reg_req_o(clint_rq), .reg_rsp_i(clint_rs));
  axi_to_reg #(.BASE(PLIC_BASE)) i_br_plic (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_PLIC]), .axi_rsp_o(srsp[S_PLIC]),
    .reg_req_o(plic_rq), .reg_rsp_i(plic_rs));
  axi_to_reg #(.BASE(CLIC_BASE)) i_br_clic (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_CLIC]), .axi_rsp_o(srsp[S_CLIC]),
    .reg_req_o(clic_rq), .reg_rsp_i(clic_rs));
  axi_to_reg #(.BASE(DMA_BASE)) i_br_dma (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_DMA]), .axi_rsp_o(srsp[S_DMA]),
    .reg_req_o(dma_rq), .reg_rsp_i(dma_rs));
  axi_to_reg #(.BASE(IOMMU_BASE)) i_br_iommu (
    .clk_i, .rst_ni, .axi_req_i(sreq[S_IOMMU]), .axi_rsp_o(srsp[S_IOMMU]),
    .reg_req_o(iommu_rq), .reg_rsp_i(iommu_rs));

  // ---------------- DMA and IOMMU ----------------
  dma #(.MAX_BEATS(DMA_BEATS)) i_dma (
    .clk_i, .rst_ni, .reg_req_i(dma_rq), .reg_rsp_o(dma_rs),
    .axi_req_o(mreq[1]), .axi_rsp_i(mrsp[1]), .irq_o(dma_irq));

  iommu #(.NUM_ENTRIES(IOTLB_SIZE)) i_iommu (
    .clk_i, .rst_ni,
    .host_req_i, .host_rsp_o,
    .mcu_req_o(mreq[2]), .mcu_rsp_i(mrsp[2]),
    .reg_req_i(iommu_rq), .reg_rsp_o(iommu_rs),
    .irq_o(iommu_irq));

  // ---------------- interrupt system ----------------
  clint i_clint (
    .clk_i, .rst_ni, .rtc_tick_i,
    .reg_req_i(clint_rq), .reg_rsp_o(clint_rs),
    .mtip_o(mtip), .msip_o(msip));

  plic #(.NUM_SRC(PLIC_SRC)) i_plic (
    .clk_i, .rst_ni,
    .src_i({ext_irq_i, iommu_irq, dma_irq, 1'b0}),
    .reg_req_i(plic_rq), .reg_rsp_o(plic_rs),
    .meip_o(meip), .seip_o(seip));

  logic [NUM_INTR-1:0] clic_src;
  always_comb begin
    clic_src          = '0;
    clic_src[IRQ_MSI] = msip;
    clic_src[IRQ_MTI] = mtip;
    clic_src[IRQ_SEI] = seip;
    clic_src[IRQ_MEI] = meip;
    clic_src[NUM_INTR-1:16] = local_irq_i;
  end

  logic           irq_valid, irq_ready, irq_shv;
  logic [IDW-1:0] irq_id;
  logic [7:0]     irq_level;

  clic #(.NUM_INTR(NUM_INTR)) i_clic (
    .clk_i, .rst_ni,
    .intr_src_i(clic_src),
    .reg_req_i(clic_rq), .reg_rsp_o(clic_rs),
    .irq_valid_o(irq_valid), .irq_ready_i(irq_ready),
    .irq_id_o(irq_id), .irq_level_o(irq_level), .irq_shv_o(irq_shv));

  cva6_clic_irq_ctrl #(.IDW(IDW)) i_irq_ctrl (
    .clk_i, .rst_ni,
    .irq_valid_i(irq_valid), .irq_ready_o(irq_ready),
    .irq_id_i(irq_id), .irq_level_i(irq_level), .irq_shv_i(irq_shv),
    .csr_valid_i, .csr_op_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o,
    .pc_i, .trap_o, .trap_pc_o, .trap_table_o, .trap_cause_o,
    .mret_i, .mepc_o);

endmodule
