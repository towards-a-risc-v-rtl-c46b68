// axi_xbar: AXI4 interconnect of the MCU, NM masters to NS slaves.
//
// Each slave port, and each master, carries at most one write and one read
// transaction at a time. A master's AW (or AR) address is decoded against the
// slave windows [BASE[s], BASE[s]+SIZE[s]); an address outside every window goes
// to an internal error slave that answers DECERR (for writes after swallowing
// the W beats, for reads with AxLEN+1 error beats). When a slave's write (read)
// path is free, a round-robin arbiter locks it to one requesting master; the lock
// then walks through the phases AW -> W -> B (AR -> R) and is released by the B
// handshake (the R beat with RLAST). Writes and reads use separate locks, so the
// core can fetch from the scratchpad while the DMA engine writes it. W beats are
// only forwarded after the AW they belong to, which every AXI4 slave accepts.
// IDs pass through unchanged: with one transaction per lock the response always
// goes back to the lock owner.
//
// Timing: one cycle to lock, then the channels are combinational pass-throughs
// (no added latency per beat). The paper says the interconnect is AXI4, on-chip
// and non-coherent; the arbitration scheme and the one-transaction-per-path limit
// are this design's own simple choice.
module axi_xbar
  import mcu_pkg::*;
#(
  parameter int unsigned NM = 3,
  parameter int unsigned NS = NUM_SLAVES,
  parameter logic [NS-1:0][63:0] BASE = {HOST_BASE, PERIPH_BASE, IOMMU_BASE, DMA_BASE,
                                         CLIC_BASE, PLIC_BASE, CLINT_BASE, SPM_BASE},
  parameter logic [NS-1:0][63:0] SIZE = {HOST_SIZE, PERIPH_SIZE, IOMMU_SIZE, DMA_SIZE,
                                         CLIC_SIZE, PLIC_SIZE, CLINT_SIZE, 64'h0002_0000}
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t mst_req_i [NM],
  output axi_rsp_t mst_rsp_o [NM],
  output axi_req_t slv_req_o [NS],
  input  axi_rsp_t slv_rsp_i [NS]
);

  localparam int unsigned SW = $clog2(NS + 1);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  typedef enum logic [1:0] {PH_ADDR, PH_DATA, PH_RESP} phase_e;

  function automatic logic [SW-1:0] decode(addr_t a);
    logic [SW-1:0] r;
    r = SW'(NS);
    for (int s = NS - 1; s >= 0; s--)
      if (a >= BASE[s] && a - BASE[s] < SIZE[s]) r = SW'(s);
    return r;
  endfunction

  // locks, one set per slave plus the error slave at index NS
  logic   [NS:0] wl_v, rl_v;
  logic [MW-1:0] wl_m [NS+1];
  logic [MW-1:0] rl_m [NS+1];
  phase_e        wl_ph [NS+1];
  phase_e        rl_ph [NS+1];
  logic [MW-1:0] wrr [NS+1];
  logic [MW-1:0] rrr [NS+1];
  logic [NM-1:0] m_wact, m_ract;
  logic [SW-1:0] wdec [NM];
  logic [SW-1:0] rdec [NM];

  // error slave state
  id_t        e_wid, e_rid;
  logic [7:0] e_rcnt;

  axi_rsp_t srsp [NS+1];
  axi_req_t sreq [NS+1];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      wdec[m] = decode(mst_req_i[m].aw.addr);
      rdec[m] = decode(mst_req_i[m].ar.addr);
    end
  end

  // round-robin candidates: entry k-1 is the k-th master after the last winner
  logic [MW-1:0] wsel [NS+1][NM];
  logic [MW-1:0] rsel [NS+1][NM];
  logic [NM-1:0] wcand [NS+1];
  logic [NM-1:0] rcand [NS+1];
  always_comb begin
    for (int s = 0; s <= NS; s++) begin
      for (int k = 1; k <= NM; k++) begin
        wsel[s][k-1]  = MW'((int'(wrr[s]) + k) % NM);
        rsel[s][k-1]  = MW'((int'(rrr[s]) + k) % NM);
        wcand[s][k-1] = mst_req_i[wsel[s][k-1]].aw_valid && !m_wact[wsel[s][k-1]] &&
                        wdec[wsel[s][k-1]] == SW'(s);
        rcand[s][k-1] = mst_req_i[rsel[s][k-1]].ar_valid && !m_ract[rsel[s][k-1]] &&
                        rdec[rsel[s][k-1]] == SW'(s);
      end
    end
  end

  // slave-side requests
  always_comb begin
    for (int s = 0; s <= NS; s++) begin
      sreq[s] = '0;
      if (wl_v[s]) begin
        sreq[s].aw       = mst_req_i[wl_m[s]].aw;
        sreq[s].aw_valid = wl_ph[s] == PH_ADDR && mst_req_i[wl_m[s]].aw_valid;
        sreq[s].w        = mst_req_i[wl_m[s]].w;
        sreq[s].w_valid  = wl_ph[s] == PH_DATA && mst_req_i[wl_m[s]].w_valid;
        sreq[s].b_ready  = wl_ph[s] == PH_RESP && mst_req_i[wl_m[s]].b_ready;
      end
      if (rl_v[s]) begin
        sreq[s].ar       = mst_req_i[rl_m[s]].ar;
        sreq[s].ar_valid = rl_ph[s] == PH_ADDR && mst_req_i[rl_m[s]].ar_valid;
        sreq[s].r_ready  = rl_ph[s] == PH_DATA && mst_req_i[rl_m[s]].r_ready;
      end
    end
    for (int s = 0; s < NS; s++) slv_req_o[s] = sreq[s];
  end

  // slave responses, the error slave appended
  always_comb begin
    for (int s = 0; s < NS; s++) srsp[s] = slv_rsp_i[s];
    srsp[NS]          = '0;
    srsp[NS].aw_ready = 1'b1;
    srsp[NS].w_ready  = 1'b1;
    srsp[NS].b_valid  = 1'b1;
    srsp[NS].b.id     = e_wid;
    srsp[NS].b.resp   = RESP_DECERR;
    srsp[NS].ar_ready = 1'b1;
    srsp[NS].r_valid  = 1'b1;
    srsp[NS].r.id     = e_rid;
    srsp[NS].r.resp   = RESP_DECERR;
    srsp[NS].r.last   = e_rcnt == 0;
  end

  // master-side responses
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m] = '0;
      for (int s = 0; s <= NS; s++) begin
        if (wl_v[s] && wl_m[s] == MW'(m)) begin
          mst_rsp_o[m].aw_ready = wl_ph[s] == PH_ADDR && srsp[s].aw_ready;
          mst_rsp_o[m].w_ready  = wl_ph[s] == PH_DATA && srsp[s].w_ready;
          mst_rsp_o[m].b_valid  = wl_ph[s] == PH_RESP && srsp[s].b_valid;
          mst_rsp_o[m].b        = srsp[s].b;
        end
        if (rl_v[s] && rl_m[s] == MW'(m)) begin
          mst_rsp_o[m].ar_ready = rl_ph[s] == PH_ADDR && srsp[s].ar_ready;
          mst_rsp_o[m].r_valid  = rl_ph[s] == PH_DATA && srsp[s].r_valid;
          mst_rsp_o[m].r        = srsp[s].r;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wl_v   <= '0;
      rl_v   <= '0;
      m_wact <= '0;
      m_ract <= '0;
      e_wid  <= '0;
      e_rid  <= '0;
      e_rcnt <= '0;
      for (int s = 0; s <= NS; s++) begin
        wl_m[s]  <= '0;
        rl_m[s]  <= '0;
        wl_ph[s] <= PH_ADDR;
        rl_ph[s] <= PH_ADDR;
        wrr[s]   <= '0;
        rrr[s]   <= '0;
      end
    end else begin
      for (int s = 0; s <= NS; s++) begin
        // ---- write path ----
        if (!wl_v[s]) begin
          for (int k = 1; k <= NM; k++) begin
            if (wcand[s][k-1]) begin
              wl_v[s]   <= 1'b1;
              wl_m[s]   <= wsel[s][k-1];
              wl_ph[s]  <= PH_ADDR;
              wrr[s]    <= wsel[s][k-1];
              m_wact[wsel[s][k-1]] <= 1'b1;
              break;
            end
          end
        end else begin
          unique case (wl_ph[s])
            PH_ADDR: if (sreq[s].aw_valid && srsp[s].aw_ready) begin
              wl_ph[s] <= PH_DATA;
              if (s == NS) e_wid <= sreq[s].aw.id;
            end
            PH_DATA: if (sreq[s].w_valid && srsp[s].w_ready && sreq[s].w.last) wl_ph[s] <= PH_RESP;
            PH_RESP: if (sreq[s].b_ready && srsp[s].b_valid) begin
              wl_v[s]         <= 1'b0;
              m_wact[wl_m[s]] <= 1'b0;
            end
            default: wl_ph[s] <= PH_ADDR;
          endcase
        end
        // ---- read path ----
        if (!rl_v[s]) begin
          for (int k = 1; k <= NM; k++) begin
            if (rcand[s][k-1]) begin
              rl_v[s]   <= 1'b1;
              rl_m[s]   <= rsel[s][k-1];
              rl_ph[s]  <= PH_ADDR;
              rrr[s]    <= rsel[s][k-1];
              m_ract[rsel[s][k-1]] <= 1'b1;
              break;
            end
          end
        end else begin
          unique case (rl_ph[s])
            PH_ADDR: if (sreq[s].ar_valid && srsp[s].ar_ready) begin
              rl_ph[s] <= PH_DATA;
              if (s == NS) begin
                e_rid  <= sreq[s].ar.id;
                e_rcnt <= sreq[s].ar.len;
              end
            end
            PH_DATA: if (sreq[s].r_ready && srsp[s].r_valid) begin
              if (srsp[s].r.last) begin
                rl_v[s]         <= 1'b0;
                m_ract[rl_m[s]] <= 1'b0;
              end else if (s == NS) e_rcnt <= e_rcnt - 1'b1;
            end
            default: rl_ph[s] <= PH_ADDR;
          endcase
        end
      end
    end
  end

endmodule
