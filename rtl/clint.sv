// clint: core-local interruptor for one hart.
//
// Holds the 64-bit machine timer mtime, its compare register mtimecmp and the
// machine software-interrupt bit msip. mtip is raised while mtime >= mtimecmp;
// msip_o follows bit 0 of the msip register. mtime advances by one on every
// clock cycle in which rtc_tick_i is high (the caller picks the tick rate).
// In the MCU the timer interrupt is routed into the CLIC, which arbitrates it with
// the other lines; the paper keeps the legacy CLINT as the timer source.
//
// Registers (32-bit bus, byte offsets; the standard SiFive-style CLINT layout,
// which the paper does not spell out):
//   0x0000 msip          bit 0
//   0x4000 mtimecmp[31:0]   0x4004 mtimecmp[63:32]
//   0xBFF8 mtime[31:0]      0xBFFC mtime[63:32]
// Writes honour byte strobes; reads return in the same cycle; unmapped offsets
// read 0 and flag error. mtimecmp resets to all ones so no timer interrupt fires
// before software programs it. mtip/msip are registered: they change one cycle
// after the write or the tick that causes them.
module clint
  import mcu_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     rtc_tick_i,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     mtip_o,
  output logic     msip_o
);

  logic [63:0] mtime_q, mtimecmp_q;
  logic        msip_q;

  function automatic logic [31:0] apply_strb(logic [31:0] old, logic [31:0] wd, logic [3:0] st);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = st[b] ? wd[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  wire wr = reg_req_i.valid & reg_req_i.write;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      msip_q     <= 1'b0;
      mtip_o     <= 1'b0;
    end else begin
      if (wr && reg_req_i.addr[15:0] == 16'hBFF8)
        mtime_q[31:0] <= apply_strb(mtime_q[31:0], reg_req_i.wdata, reg_req_i.wstrb);
      else if (wr && reg_req_i.addr[15:0] == 16'hBFFC)
        mtime_q[63:32] <= apply_strb(mtime_q[63:32], reg_req_i.wdata, reg_req_i.wstrb);
      else if (rtc_tick_i)
        mtime_q <= mtime_q + 64'd1;
      if (wr && reg_req_i.addr[15:0] == 16'h4000)
        mtimecmp_q[31:0] <= apply_strb(mtimecmp_q[31:0], reg_req_i.wdata, reg_req_i.wstrb);
      if (wr && reg_req_i.addr[15:0] == 16'h4004)
        mtimecmp_q[63:32] <= apply_strb(mtimecmp_q[63:32], reg_req_i.wdata, reg_req_i.wstrb);
      if (wr && reg_req_i.addr[15:0] == 16'h0000 && reg_req_i.wstrb[0])
        msip_q <= reg_req_i.wdata[0];
      mtip_o <= (mtime_q >= mtimecmp_q);
    end
  end

  assign msip_o = msip_q;

  always_comb begin
    reg_rsp_o = '0;
    unique case (reg_req_i.addr[15:0])
      16'h0000: reg_rsp_o.rdata = {31'b0, msip_q};
      16'h4000: reg_rsp_o.rdata = mtimecmp_q[31:0];
      16'h4004: reg_rsp_o.rdata = mtimecmp_q[63:32];
      16'hBFF8: reg_rsp_o.rdata = mtime_q[31:0];
      16'hBFFC: reg_rsp_o.rdata = mtime_q[63:32];
      default:  reg_rsp_o.error = reg_req_i.valid;
    endcase
  end

endmodule
