// clic: core-local interrupt controller (RISC-V CLIC) for one hart.
//
// NUM_INTR input lines (256 in this MCU) are arbitrated centrally. Each line i
// has four byte-wide memory-mapped registers at 0x1000 + 4*i:
//   byte 0 clicintip   pending; hardware-set for edge-triggered lines, software
//                      may also set or clear it (software pending, e.g. the
//                      inter-processor interrupt on line 3); for level-triggered
//                      lines it mirrors the (polarity-corrected) input level
//   byte 1 clicintie   enable
//   byte 2 clicintattr bit 0 shv (selective hardware vectoring), bits 2:1 trig
//                      (bit 1: 1 = edge, 0 = level; bit 2: 1 = active low /
//                      falling edge), bits 7:6 mode (reads 2'b11, machine mode)
//   byte 3 clicintctl  level and priority: the top nlbits bits are the level,
//                      the rest the priority
// and 0x0000 holds mcliccfg with nlbits in bits 3:0 (values above 8 act as 8).
//
// Arbitration picks, among pending and enabled lines, the one with the largest
// clicintctl (so level first, then priority), ties to the higher id. The winner
// is registered and presented to the core as a valid/ready handshake carrying
// irq_id, irq_level (clicintctl level bits with the unused low bits filled with
// ones) and irq_shv. The core accepts it with irq_ready; on that handshake an
// edge-triggered line's pending bit is cleared, and irq_valid drops for one cycle
// so that a stale winner is never offered twice. The payload may change while
// irq_valid is high (a level line can be withdrawn); the core takes whatever is
// on the bus in the handshake cycle. Latency: an input edge shows as irq_valid two
// cycles later (edge sample, then the arbitration register).
//
// The paper fixes 256 lines, per-line level/priority, enable, software pending,
// trigger type and SHV, and the valid/ready + irq_id + irq_level interface (its
// Fig. 6b). Register layout, the 8 control bits and the one-cycle drop after an
// acknowledge follow the CLIC draft or are this design's own choices.
module clic
  import mcu_pkg::*;
#(
  parameter int unsigned NUM_INTR = 256,
  parameter int unsigned CTL_W    = 8
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [NUM_INTR-1:0]         intr_src_i,
  input  reg_req_t                    reg_req_i,
  output reg_rsp_t                    reg_rsp_o,
  output logic                        irq_valid_o,
  input  logic                        irq_ready_i,
  output logic [$clog2(NUM_INTR)-1:0] irq_id_o,
  output logic [7:0]                  irq_level_o,
  output logic                        irq_shv_o
);

  localparam int unsigned IDW = $clog2(NUM_INTR);

  logic [NUM_INTR-1:0] ip_q, ie_q, src_q;
  logic [7:0]          attr_q [NUM_INTR];
  logic [CTL_W-1:0]    ctl_q  [NUM_INTR];
  logic [3:0]          nlbits_q;

  // ---------------- register access ----------------
  wire        acc   = reg_req_i.valid;
  wire        wr    = acc & reg_req_i.write;
  wire [31:0] a     = reg_req_i.addr;
  wire        a_cfg = (a[31:2] == 30'h0);
  wire        a_int = (a[31:12] == 20'h1) && (a[11:2] < 10'(NUM_INTR));
  wire [IDW-1:0] a_id = a[IDW+1:2];

  always_comb begin
    reg_rsp_o = '0;
    if (a_cfg)      reg_rsp_o.rdata = {28'h0, nlbits_q};
    else if (a_int) reg_rsp_o.rdata = {8'(ctl_q[a_id]), attr_q[a_id], 7'h0, ie_q[a_id], 7'h0, ip_q[a_id]};
    else            reg_rsp_o.error = acc;
  end

  // ---------------- arbitration ----------------
  logic [CTL_W-1:0] best_ctl;
  logic [IDW-1:0]   best_id;
  logic             best_v;
  always_comb begin
    best_ctl = '0;
    best_id  = '0;
    best_v   = 1'b0;
    for (int i = 0; i < NUM_INTR; i++) begin
      if (ip_q[i] && ie_q[i] && (!best_v || ctl_q[i] >= best_ctl)) begin
        best_v   = 1'b1;
        best_ctl = ctl_q[i];
        best_id  = IDW'(i);
      end
    end
  end

  // level = top nlbits of clicintctl, low bits filled with ones
  function automatic logic [7:0] ctl2level(logic [CTL_W-1:0] ctl, logic [3:0] nl);
    logic [7:0] c8, mask;
    c8 = 8'(ctl) << (8 - CTL_W);
    mask = (nl >= 4'd8) ? 8'hFF : ~(8'hFF >> nl);
    return (c8 & mask) | ~mask;
  endfunction

  wire hs = irq_valid_o & irq_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ip_q        <= '0;
      ie_q        <= '0;
      src_q       <= '0;
      nlbits_q    <= '0;
      for (int i = 0; i < NUM_INTR; i++) begin
        attr_q[i] <= 8'hC0;
        ctl_q[i]  <= '0;
      end
      irq_valid_o <= 1'b0;
      irq_id_o    <= '0;
      irq_level_o <= '0;
      irq_shv_o   <= 1'b0;
    end else begin
      src_q <= intr_src_i;
      for (int i = 0; i < NUM_INTR; i++) begin
        if (!attr_q[i][1]) begin
          ip_q[i] <= intr_src_i[i] ^ attr_q[i][2];          // level triggered
        end else if (intr_src_i[i] != src_q[i] && (intr_src_i[i] ^ attr_q[i][2])) begin
          ip_q[i] <= 1'b1;                                  // active edge
        end else if (hs && irq_id_o == IDW'(i)) begin
          ip_q[i] <= 1'b0;                                  // acknowledged
        end else if (wr && a_int && a_id == IDW'(i) && reg_req_i.wstrb[0]) begin
          ip_q[i] <= reg_req_i.wdata[0];                    // software pending
        end
      end
      if (wr && a_cfg && reg_req_i.wstrb[0]) nlbits_q <= reg_req_i.wdata[3:0];
      if (wr && a_int) begin
        if (reg_req_i.wstrb[1]) ie_q[a_id]   <= reg_req_i.wdata[8];
        if (reg_req_i.wstrb[2]) attr_q[a_id] <= {2'b11, 3'b000, reg_req_i.wdata[18:16]};
        if (reg_req_i.wstrb[3]) ctl_q[a_id]  <= reg_req_i.wdata[31 -: CTL_W];
      end
      irq_valid_o <= best_v && !hs;
      irq_id_o    <= best_id;
      irq_level_o <= ctl2level(best_ctl, nlbits_q);
      irq_shv_o   <= attr_q[best_id][0];
    end
  end

  // handshake rule: a withdrawn request must never be acknowledged
  assert property (@(posedge clk_i) disable iff (!rst_ni) irq_ready_i |-> irq_valid_o)
    else $error("clic: irq_ready without irq_valid");

endmodule
