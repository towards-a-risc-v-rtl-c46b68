// plic: platform-level interrupt controller with two targets (M and S mode of
// the single hart).
//
// Each external source i (1..NUM_SRC-1; source 0 does not exist) passes a
// level-sensitive gateway: while the line is high and the source is neither
// pending nor in service, its pending bit is set. Per target, the highest-priority
// pending and enabled source whose priority exceeds the target threshold drives
// the target's interrupt (meip for target 0, seip for target 1). Reading the
// claim register returns that source's id (0 if none), clears its pending bit and
// marks it in service; writing the id back to the same register completes it, and
// the gateway may forward the next request. Ties go to the lower id. Priority 0
// means never interrupt. As the paper notes, the PLIC has no nesting: that is the
// CLIC's job further down the line.
//
// Registers (standard PLIC layout; the paper gives the function only):
//   0x000000 + 4*i          priority of source i (PRIO_W bits)
//   0x001000 + 4*w          pending bits, word w (read only)
//   0x002000 + 0x80*t + 4*w enable bits of target t, word w
//   0x200000 + 0x1000*t     threshold of target t
//   0x200004 + 0x1000*t     claim (read) / complete (write) of target t
// meip_o/seip_o are registered, one cycle after the state that causes them.
module plic
  import mcu_pkg::*;
#(
  parameter int unsigned NUM_SRC = 32,  // including the non-existent source 0
  parameter int unsigned PRIO_W  = 3
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NUM_SRC-1:0] src_i,
  input  reg_req_t           reg_req_i,
  output reg_rsp_t           reg_rsp_o,
  output logic               meip_o,
  output logic               seip_o
);

  localparam int unsigned NT = 2;
  localparam int unsigned NW = (NUM_SRC + 31) / 32;
  localparam int unsigned IDW = $clog2(NUM_SRC);

  logic [PRIO_W-1:0]  prio_q [NUM_SRC];
  logic [NUM_SRC-1:0] pend_q, insvc_q;
  logic [NUM_SRC-1:0] en_q [NT];
  logic [PRIO_W-1:0]  thr_q [NT];

  logic [IDW-1:0]     best_id [NT];
  logic [PRIO_W-1:0]  best_pr [NT];
  logic [NT-1:0]      eip_q;

  // arbitration per target
  always_comb begin
    for (int t = 0; t < NT; t++) begin
      best_id[t] = '0;
      best_pr[t] = '0;
      for (int i = NUM_SRC - 1; i >= 1; i--) begin
        if (pend_q[i] && en_q[t][i] && prio_q[i] >= best_pr[t] && prio_q[i] != '0) begin
          best_id[t] = IDW'(i);
          best_pr[t] = prio_q[i];
        end
      end
    end
  end

  // register decode
  wire        acc   = reg_req_i.valid;
  wire        wr    = acc & reg_req_i.write;
  wire        rd    = acc & ~reg_req_i.write;
  wire [31:0] a     = reg_req_i.addr;
  wire        a_prio = (a[31:12] == 20'h0) && (a[11:2] < 10'(NUM_SRC));
  wire        a_pend = (a[31:12] == 20'h1) && (a[11:2] < 10'(NW));
  wire        a_en   = (a[31:12] == 20'h2) && (a[11:7] < 5'(NT)) && (a[6:2] < 5'(NW));
  wire        a_ctx  = (a[31:21] == 11'h1) && (a[20:12] < 9'(NT)) && (a[11:3] == 9'h0);
  wire        a_thr  = a_ctx && !a[2];
  wire        a_clm  = a_ctx &&  a[2];
  wire [9:0]  a_src  = a[11:2];
  wire        a_tgt  = a[7];     // enable block target
  wire        c_tgt  = a[12];    // context block target

  always_comb begin
    reg_rsp_o = '0;
    if (a_prio)      reg_rsp_o.rdata = 32'(prio_q[a_src[IDW-1:0]]);
    else if (a_pend) reg_rsp_o.rdata = 32'(pend_q >> (32 * a[6:2]));
    else if (a_en)   reg_rsp_o.rdata = 32'(en_q[a_tgt] >> (32 * a[6:2]));
    else if (a_thr)  reg_rsp_o.rdata = 32'(thr_q[c_tgt]);
    else if (a_clm)  reg_rsp_o.rdata = (best_pr[c_tgt] > thr_q[c_tgt]) ? 32'(best_id[c_tgt]) : 32'h0;
    else             reg_rsp_o.error = acc;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_SRC; i++) prio_q[i] <= '0;
      for (int t = 0; t < NT; t++) begin
        en_q[t]  <= '0;
        thr_q[t] <= '0;
      end
      pend_q  <= '0;
      insvc_q <= '0;
      eip_q   <= '0;
    end else begin
      // gateways
      for (int i = 1; i < NUM_SRC; i++)
        if (src_i[i] && !pend_q[i] && !insvc_q[i]) pend_q[i] <= 1'b1;
      if (wr && a_prio && a_src != 0) prio_q[a_src[IDW-1:0]] <= reg_req_i.wdata[PRIO_W-1:0];
      if (wr && a_en)
        for (int i = 0; i < NUM_SRC; i++)
          if (i / 32 == int'(a[6:2]) && reg_req_i.wstrb[(i % 32) / 8])
            en_q[a_tgt][i] <= reg_req_i.wdata[i % 32];
      if (wr && a_thr) thr_q[c_tgt] <= reg_req_i.wdata[PRIO_W-1:0];
      // claim: clear pending, mark in service
      if (rd && a_clm && best_pr[c_tgt] > thr_q[c_tgt]) begin
        pend_q[best_id[c_tgt]]  <= 1'b0;
        insvc_q[best_id[c_tgt]] <= 1'b1;
      end
      // complete
      if (wr && a_clm && reg_req_i.wdata < 32'(NUM_SRC))
        insvc_q[reg_req_i.wdata[IDW-1:0]] <= 1'b0;
      for (int t = 0; t < NT; t++) eip_q[t] <= best_pr[t] > thr_q[t];
    end
  end

  assign meip_o = eip_q[0];
  assign seip_o = eip_q[1];

endmodule
