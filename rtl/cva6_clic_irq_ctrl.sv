// cva6_clic_irq_ctrl: the interrupt slice of the core's CSR file, as changed to
// talk to the CLIC.
//
// The core no longer samples level-sensitive mip bits; it receives a request
// (irq_valid, irq_id, irq_level, irq_shv) and acknowledges it with irq_ready in
// the same cycle it decides to take it. It takes an interrupt when mstatus.MIE is
// set and irq_level exceeds both the current interrupt level mintstatus.mil and
// the threshold mintthresh. Taking it saves pc_i in mepc, saves MIE and mil in
// mcause.mpie/mpil, sets mcause to {interrupt, id}, raises mil to irq_level and
// clears MIE, so only a higher level can pre-empt the handler once it re-enables
// interrupts (nesting). The trap target is:
//   shv = 1 (vectored):    mtvt + 8*id, the address of the vector-table entry
//                          (trap_table_o = 1: the fetch unit loads the handler
//                          address from there; RV64, 8-byte entries)
//   shv = 0 (direct mode): the common handler, mtvec with the low 6 bits cleared
// mret_i restores MIE from mcause.mpie and mil from mcause.mpil and returns mepc.
//
// mnxti (CSR 0x345) implements tail-chaining: a csrrsi/csrrci on it applies the
// write to mstatus and reads back mtvt + 8*id of a pending non-vectored interrupt
// whose level exceeds mcause.mpil and mintthresh, acknowledging it and updating
// mil and mcause.exccode; otherwise it reads 0. A handler thus services
// back-to-back interrupts without restoring and saving context in between.
// In a cycle with a CSR access the pending interrupt is not taken (the instruction
// completes first). All state changes happen at the clock edge; trap_o and the
// target are combinational in the acceptance cycle.
//
// CSR numbers and field positions follow the RISC-V CLIC draft; the paper says
// only that these CSRs and the id-decoding logic were added to CVA6. The rest of
// CVA6 (pipeline, other CSRs) is not part of this module.
module cva6_clic_irq_ctrl
  import mcu_pkg::*;
#(
  parameter int unsigned IDW = 8
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  // CLIC handshake
  input  logic           irq_valid_i,
  output logic           irq_ready_o,
  input  logic [IDW-1:0] irq_id_i,
  input  logic [7:0]     irq_level_i,
  input  logic           irq_shv_i,
  // CSR access from the pipeline
  input  logic           csr_valid_i,
  input  logic [1:0]     csr_op_i,     // 0 read, 1 write, 2 set, 3 clear
  input  logic [11:0]    csr_addr_i,
  input  logic [63:0]    csr_wdata_i,
  output logic [63:0]    csr_rdata_o,
  // trap / return
  input  logic [63:0]    pc_i,
  output logic           trap_o,
  output logic [63:0]    trap_pc_o,
  output logic           trap_table_o,
  output logic [63:0]    trap_cause_o,
  input  logic           mret_i,
  output logic [63:0]    mepc_o
);

  localparam logic [11:0] CSR_MSTATUS    = 12'h300;
  localparam logic [11:0] CSR_MTVEC      = 12'h305;
  localparam logic [11:0] CSR_MTVT       = 12'h307;
  localparam logic [11:0] CSR_MEPC       = 12'h341;
  localparam logic [11:0] CSR_MCAUSE     = 12'h342;
  localparam logic [11:0] CSR_MNXTI      = 12'h345;
  localparam logic [11:0] CSR_MINTTHRESH = 12'h347;
  localparam logic [11:0] CSR_MINTSTATUS = 12'hFB1;

  logic        mie_q, mpie_q;
  logic [63:0] mtvec_q, mtvt_q, mepc_q;
  logic        mc_int_q, mc_minhv_q;
  logic [7:0]  mc_mpil_q, mil_q, thresh_q;
  logic [11:0] mc_code_q;

  wire [63:0] mstatus = {56'h0, mpie_q, 3'b0, mie_q, 3'b0} | (64'h3 << 11);
  wire [63:0] mcause  = {mc_int_q, 32'h0, mc_minhv_q, 2'b11, mpie_q, 3'b0, mc_mpil_q, 4'h0, mc_code_q};

  wire [7:0] eff_thr  = (mil_q > thresh_q) ? mil_q : thresh_q;
  wire       take     = irq_valid_i && mie_q && irq_level_i > eff_thr && !csr_valid_i && !mret_i;
  wire       is_nxti  = csr_valid_i && csr_addr_i == CSR_MNXTI;
  wire       nxti_hit = is_nxti && irq_valid_i && !irq_shv_i &&
                        irq_level_i > mc_mpil_q && irq_level_i > thresh_q;
  wire [63:0] tbl_addr = {mtvt_q[63:6], 6'b0} + (64'(irq_id_i) << 3);

  assign trap_o       = take;
  assign trap_table_o = take && irq_shv_i;
  assign trap_pc_o    = irq_shv_i ? tbl_addr : {mtvec_q[63:6], 6'b0};
  assign trap_cause_o = {1'b1, 51'h0, 12'(irq_id_i)};
  assign irq_ready_o  = take || nxti_hit;
  assign mepc_o       = mepc_q;

  function automatic logic [63:0] csr_new(logic [63:0] old, logic [1:0] op, logic [63:0] wd);
    unique case (op)
      2'd1:    return wd;
      2'd2:    return old | wd;
      2'd3:    return old & ~wd;
      default: return old;
    endcase
  endfunction

  logic [63:0] mstatus_nx, mcause_nx;
  assign mstatus_nx = csr_new(mstatus, csr_op_i, csr_wdata_i);
  assign mcause_nx  = csr_new(mcause, csr_op_i, csr_wdata_i);

  always_comb begin
    unique case (csr_addr_i)
      CSR_MSTATUS:    csr_rdata_o = mstatus;
      CSR_MTVEC:      csr_rdata_o = mtvec_q;
      CSR_MTVT:       csr_rdata_o = mtvt_q;
      CSR_MEPC:       csr_rdata_o = mepc_q;
      CSR_MCAUSE:     csr_rdata_o = mcause;
      CSR_MNXTI:      csr_rdata_o = nxti_hit ? tbl_addr : 64'h0;
      CSR_MINTTHRESH: csr_rdata_o = {56'h0, thresh_q};
      CSR_MINTSTATUS: csr_rdata_o = {32'h0, mil_q, 24'h0};
      default:        csr_rdata_o = 64'h0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mie_q      <= 1'b0;
      mpie_q     <= 1'b0;
      mtvec_q    <= 64'h3;     // CLIC mode
      mtvt_q     <= '0;
      mepc_q     <= '0;
      mc_int_q   <= 1'b0;
      mc_minhv_q <= 1'b0;
      mc_mpil_q  <= '0;
      mc_code_q  <= '0;
      mil_q      <= '0;
      thresh_q   <= '0;
    end else if (take) begin
      mepc_q     <= pc_i;
      mpie_q     <= mie_q;
      mie_q      <= 1'b0;
      mc_int_q   <= 1'b1;
      mc_minhv_q <= irq_shv_i;
      mc_mpil_q  <= mil_q;
      mc_code_q  <= 12'(irq_id_i);
      mil_q      <= irq_level_i;
    end else if (mret_i) begin
      mie_q  <= mpie_q;
      mpie_q <= 1'b1;
      mil_q  <= mc_mpil_q;
    end else if (csr_valid_i && csr_op_i != 2'd0) begin
      unique case (csr_addr_i)
        CSR_MSTATUS, CSR_MNXTI: begin
          mie_q  <= mstatus_nx[3];
          mpie_q <= mstatus_nx[7];
        end
        CSR_MTVEC:      mtvec_q  <= csr_new(mtvec_q, csr_op_i, csr_wdata_i) | 64'h3;
        CSR_MTVT:       mtvt_q   <= csr_new(mtvt_q, csr_op_i, csr_wdata_i) & ~64'h3F;
        CSR_MEPC:       mepc_q   <= csr_new(mepc_q, csr_op_i, csr_wdata_i);
        CSR_MCAUSE: begin
          mc_int_q   <= mcause_nx[63];
          mc_minhv_q <= mcause_nx[30];
          mpie_q     <= mcause_nx[27];
          mc_mpil_q  <= mcause_nx[23:16];
          mc_code_q  <= mcause_nx[11:0];
        end
        CSR_MINTTHRESH: thresh_q <= 8'(csr_new({56'h0, thresh_q}, csr_op_i, csr_wdata_i));
        default: ;
      endcase
      if (nxti_hit) begin
        mil_q     <= irq_level_i;
        mc_int_q  <= 1'b1;
        mc_code_q <= 12'(irq_id_i);
      end
    end else if (nxti_hit) begin
      mil_q     <= irq_level_i;
      mc_int_q  <= 1'b1;
      mc_code_q <= 12'(irq_id_i);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) irq_ready_o |-> irq_valid_i)
    else $error("cva6_clic_irq_ctrl: acknowledged without a request");

endmodule
