// iommu: software-managed I/O MMU between the multi-core (host) domain and the
// MCU interconnect.
//
// Requests from the host carry virtual addresses of its user-space applications.
// An IO translation lookaside buffer (IOTLB) of NUM_ENTRIES fully associative
// entries, each mapping one 4 KiB virtual page to a physical page with read and
// write permission bits, translates the AW and AR addresses; the page offset is
// kept. Software fills the IOTLB through the register port (it is
// software-managed: there is no page-table walker). A request that misses, or
// hits an entry without the needed permission, is not forwarded: the IOMMU
// answers it itself with SLVERR (a write after consuming its W beats, a read with
// AxLEN+1 error beats), records the faulting virtual address and raises irq_o
// until software clears the fault. With translation disabled addresses pass
// through unchanged. A burst is translated once, by its start address, so it
// must not cross a page.
//
// Registers (32-bit):
//   0x20*i + 0x00/0x04  virtual page number of entry i, low/high word
//   0x20*i + 0x08/0x0C  physical page number of entry i, low/high word
//   0x20*i + 0x10       flags of entry i: bit 0 valid, bit 1 read, bit 2 write
//   0x800               control: bit 0 enable translation
//   0x804               fault status: bit 0 read fault, bit 1 write fault (W1C)
//   0x808/0x80C         faulting virtual address, low/high word
// Timing: the lookup is combinational, so a hit adds no cycle to AW/AR; W, B and
// R pass straight through. Error responses for a miss wait until the forwarded
// transactions of the same direction have completed, keeping responses in order.
// The paper states that the IOMMU is software-managed and holds an IOTLB; the
// entry count, page size, register map and fault handling are assumed.
module iommu
  import mcu_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t host_req_i,
  output axi_rsp_t host_rsp_o,
  output axi_req_t mcu_req_o,
  input  axi_rsp_t mcu_rsp_i,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     irq_o
);

  localparam int unsigned EW = $clog2(NUM_ENTRIES);

  typedef struct packed {
    logic        v, r, w;
    logic [51:0] vpn;
    logic [51:0] ppn;
  } tlb_entry_t;

  tlb_entry_t tlb_q [NUM_ENTRIES];
  logic       en_q;
  logic [1:0] fault_q;
  addr_t      faddr_q;

  // ---------------- lookup ----------------
  function automatic logic [53:0] lookup(addr_t va, logic need_w);
    // returns {hit, ok, ppn}
    logic [53:0] r;
    r = '0;
    for (int i = 0; i < NUM_ENTRIES; i++)
      if (tlb_q[i].v && tlb_q[i].vpn == va[63:12])
        r = {1'b1, need_w ? tlb_q[i].w : tlb_q[i].r, tlb_q[i].ppn};
    return r;
  endfunction

  logic [53:0] aw_lk, ar_lk;
  logic        aw_ok, ar_ok;
  addr_t       aw_pa, ar_pa;
  always_comb begin
    aw_lk = lookup(host_req_i.aw.addr, 1'b1);
    ar_lk = lookup(host_req_i.ar.addr, 1'b0);
    aw_ok = !en_q || (aw_lk[53] && aw_lk[52]);
    ar_ok = !en_q || (ar_lk[53] && ar_lk[52]);
    aw_pa = en_q ? {aw_lk[51:0], host_req_i.aw.addr[11:0]} : host_req_i.aw.addr;
    ar_pa = en_q ? {ar_lk[51:0], host_req_i.ar.addr[11:0]} : host_req_i.ar.addr;
  end

  // ---------------- write channel ----------------
  typedef enum logic [1:0] {W_IDLE, W_FWD, W_ERR, W_ERRB} wst_e;
  wst_e       wst_q;
  id_t        ewid_q, erid_q;
  logic [7:0] ercnt_q;
  logic [7:0] bout_q, rout_q;   // forwarded transactions awaiting their response
  logic       rerr_q;

  wire aw_fwd_hs = wst_q == W_IDLE && host_req_i.aw_valid && aw_ok && mcu_rsp_i.aw_ready;
  wire aw_miss   = wst_q == W_IDLE && host_req_i.aw_valid && !aw_ok && bout_q == 0;
  wire b_fwd_hs  = mcu_rsp_i.b_valid && mcu_req_o.b_ready;
  wire ar_fwd_hs = !rerr_q && host_req_i.ar_valid && ar_ok && mcu_rsp_i.ar_ready;
  wire ar_miss   = !rerr_q && host_req_i.ar_valid && !ar_ok && rout_q == 0;
  wire r_fwd_hs  = mcu_rsp_i.r_valid && mcu_req_o.r_ready && mcu_rsp_i.r.last;

  always_comb begin
    mcu_req_o          = '0;
    host_rsp_o         = '0;
    // AW
    mcu_req_o.aw       = host_req_i.aw;
    mcu_req_o.aw.addr  = aw_pa;
    mcu_req_o.aw_valid = wst_q == W_IDLE && host_req_i.aw_valid && aw_ok;
    host_rsp_o.aw_ready = (wst_q == W_IDLE && aw_ok && mcu_rsp_i.aw_ready) || aw_miss;
    // W
    mcu_req_o.w        = host_req_i.w;
    mcu_req_o.w_valid  = wst_q == W_FWD && host_req_i.w_valid;
    host_rsp_o.w_ready = (wst_q == W_FWD && mcu_rsp_i.w_ready) || wst_q == W_ERR;
    // B
    if (wst_q == W_ERRB) begin
      host_rsp_o.b_valid = 1'b1;
      host_rsp_o.b.id    = ewid_q;
      host_rsp_o.b.resp  = RESP_SLVERR;
    end else begin
      host_rsp_o.b_valid = mcu_rsp_i.b_valid;
      host_rsp_o.b       = mcu_rsp_i.b;
      mcu_req_o.b_ready  = host_req_i.b_ready;
    end
    // AR
    mcu_req_o.ar       = host_req_i.ar;
    mcu_req_o.ar.addr  = ar_pa;
    mcu_req_o.ar_valid = !rerr_q && host_req_i.ar_valid && ar_ok;
    host_rsp_o.ar_ready = (!rerr_q && ar_ok && mcu_rsp_i.ar_ready) || ar_miss;
    // R
    if (rerr_q) begin
      host_rsp_o.r_valid = 1'b1;
      host_rsp_o.r.id    = erid_q;
      host_rsp_o.r.resp  = RESP_SLVERR;
      host_rsp_o.r.last  = ercnt_q == 0;
    end else begin
      host_rsp_o.r_valid = mcu_rsp_i.r_valid;
      host_rsp_o.r       = mcu_rsp_i.r;
      mcu_req_o.r_ready  = host_req_i.r_ready;
    end
  end

  // ---------------- registers ----------------
  wire        acc  = reg_req_i.valid;
  wire        wr   = acc & reg_req_i.write;
  wire [31:0] a    = reg_req_i.addr;
  wire        a_tlb = a[31:5] < 27'(NUM_ENTRIES) && a[4:2] <= 3'd4;
  wire [EW-1:0] a_e = a[EW+4:5];

  always_comb begin
    reg_rsp_o = '0;
    if (a_tlb) begin
      unique case (a[4:2])
        3'd0: reg_rsp_o.rdata = tlb_q[a_e].vpn[31:0];
        3'd1: reg_rsp_o.rdata = 32'(tlb_q[a_e].vpn[51:32]);
        3'd2: reg_rsp_o.rdata = tlb_q[a_e].ppn[31:0];
        3'd3: reg_rsp_o.rdata = 32'(tlb_q[a_e].ppn[51:32]);
        default: reg_rsp_o.rdata = {29'h0, tlb_q[a_e].w, tlb_q[a_e].r, tlb_q[a_e].v};
      endcase
    end else begin
      unique case (a)
        32'h800: reg_rsp_o.rdata = {31'h0, en_q};
        32'h804: reg_rsp_o.rdata = {30'h0, fault_q};
        32'h808: reg_rsp_o.rdata = faddr_q[31:0];
        32'h80C: reg_rsp_o.rdata = faddr_q[63:32];
        default: reg_rsp_o.error = acc;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_ENTRIES; i++) tlb_q[i] <= '0;
      en_q    <= 1'b0;
      fault_q <= '0;
      faddr_q <= '0;
      wst_q   <= W_IDLE;
      ewid_q  <= '0;
      erid_q  <= '0;
      ercnt_q <= '0;
      rerr_q  <= 1'b0;
      bout_q  <= '0;
      rout_q  <= '0;
    end else begin
      if (wr && a_tlb) begin
        unique case (a[4:2])
          3'd0: tlb_q[a_e].vpn[31:0]  <= reg_req_i.wdata;
          3'd1: tlb_q[a_e].vpn[51:32] <= reg_req_i.wdata[19:0];
          3'd2: tlb_q[a_e].ppn[31:0]  <= reg_req_i.wdata;
          3'd3: tlb_q[a_e].ppn[51:32] <= reg_req_i.wdata[19:0];
          default: {tlb_q[a_e].w, tlb_q[a_e].r, tlb_q[a_e].v} <= reg_req_i.wdata[2:0];
        endcase
      end
      if (wr && a == 32'h800) en_q <= reg_req_i.wdata[0];
      if (wr && a == 32'h804) fault_q <= fault_q & ~reg_req_i.wdata[1:0];
      // outstanding counters
      bout_q <= bout_q + 8'(aw_fwd_hs) - 8'(b_fwd_hs);
      rout_q <= rout_q + 8'(ar_fwd_hs) - 8'(r_fwd_hs);
      // write FSM
      unique case (wst_q)
        W_IDLE: if (aw_fwd_hs) wst_q <= W_FWD;
                else if (aw_miss) begin
                  wst_q      <= W_ERR;
                  ewid_q     <= host_req_i.aw.id;
                  fault_q[1] <= 1'b1;
                  faddr_q    <= host_req_i.aw.addr;
                end
        W_FWD:  if (host_req_i.w_valid && mcu_rsp_i.w_ready && host_req_i.w.last) wst_q <= W_IDLE;
        W_ERR:  if (host_req_i.w_valid && host_req_i.w.last) wst_q <= W_ERRB;
        W_ERRB: if (host_req_i.b_ready) wst_q <= W_IDLE;
        default: wst_q <= W_IDLE;
      endcase
      // read error responder
      if (ar_miss) begin
        rerr_q     <= 1'b1;
        erid_q     <= host_req_i.ar.id;
        ercnt_q    <= host_req_i.ar.len;
        fault_q[0] <= 1'b1;
        faddr_q    <= host_req_i.ar.addr;
      end else if (rerr_q && host_req_i.r_ready) begin
        if (ercnt_q == 0) rerr_q <= 1'b0;
        else ercnt_q <= ercnt_q - 1'b1;
      end
    end
  end

  assign irq_o = |fault_q;

endmodule
