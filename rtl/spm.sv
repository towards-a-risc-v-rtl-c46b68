// spm: on-chip scratchpad memory of the MCU (128 KiB) with an AXI4 slave port.
//
// The memory is an array of 64-bit words (SIZE_BYTES/8 of them) with one write
// and one registered read port, which maps onto a dual-port SRAM macro or FPGA
// block RAM. Address bits above the memory size are ignored (the interconnect
// has already decoded them). Reads and writes are served by two independent
// state machines, so one read and one write burst can be in progress at once.
// Bursts of type INCR step the address by one word per beat (AxSIZE is taken as
// 8 bytes); FIXED keeps it; WRAP is treated as INCR. Write beats honour WSTRB.
//
// Timing: AW accepted in the idle cycle, then one W beat per cycle, B one cycle
// after the last W beat. AR accepted in the idle cycle, the first R beat one
// cycle later, then one beat per cycle while RREADY is high. All responses OKAY.
// The paper gives the size (128 KiB) and that the SPM sits on the AXI4
// interconnect; the port timing and the dual-port organisation are assumed.
module spm
  import mcu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o
);

  localparam int unsigned WORDS = SIZE_BYTES / 8;
  localparam int unsigned AW    = $clog2(WORDS);

  data_t mem [WORDS];

  // ---------------- write side ----------------
  typedef enum logic [1:0] {W_IDLE, W_DATA, W_RESP} wstate_e;
  wstate_e        ws_q;
  logic [AW-1:0]  waddr_q;
  logic           wfixed_q;
  id_t            wid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ws_q     <= W_IDLE;
      waddr_q  <= '0;
      wfixed_q <= 1'b0;
      wid_q    <= '0;
    end else begin
      unique case (ws_q)
        W_IDLE: if (axi_req_i.aw_valid) begin
          ws_q     <= W_DATA;
          waddr_q  <= axi_req_i.aw.addr[AW+2:3];
          wfixed_q <= axi_req_i.aw.burst == BURST_FIXED;
          wid_q    <= axi_req_i.aw.id;
        end
        W_DATA: if (axi_req_i.w_valid) begin
          if (!wfixed_q) waddr_q <= waddr_q + 1'b1;
          if (axi_req_i.w.last) ws_q <= W_RESP;
        end
        W_RESP: if (axi_req_i.b_ready) ws_q <= W_IDLE;
        default: ws_q <= W_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (ws_q == W_DATA && axi_req_i.w_valid)
      for (int b = 0; b < AXI_STRB_W; b++)
        if (axi_req_i.w.strb[b]) mem[waddr_q][8*b +: 8] <= axi_req_i.w.data[8*b +: 8];
  end

  // ---------------- read side ----------------
  typedef enum logic [0:0] {R_IDLE, R_SEND} rstate_e;
  rstate_e       rs_q;
  logic [AW-1:0] raddr_q;
  logic          rfixed_q;
  logic [7:0]    rcnt_q;
  id_t           rid_q;
  data_t         rdata_q;

  wire           r_adv  = rs_q == R_SEND && axi_req_i.r_ready && rcnt_q != 0;
  wire [AW-1:0]  r_next = rfixed_q ? raddr_q : raddr_q + 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rs_q     <= R_IDLE;
      raddr_q  <= '0;
      rfixed_q <= 1'b0;
      rcnt_q   <= '0;
      rid_q    <= '0;
    end else begin
      unique case (rs_q)
        R_IDLE: if (axi_req_i.ar_valid) begin
          rs_q     <= R_SEND;
          raddr_q  <= axi_req_i.ar.addr[AW+2:3];
          rfixed_q <= axi_req_i.ar.burst == BURST_FIXED;
          rcnt_q   <= axi_req_i.ar.len;
          rid_q    <= axi_req_i.ar.id;
        end
        R_SEND: if (axi_req_i.r_ready) begin
          if (rcnt_q == 0) rs_q <= R_IDLE;
          else begin
            rcnt_q  <= rcnt_q - 1'b1;
            raddr_q <= r_next;
          end
        end
        default: rs_q <= R_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (rs_q == R_IDLE && axi_req_i.ar_valid) rdata_q <= mem[axi_req_i.ar.addr[AW+2:3]];
    else if (r_adv)                           rdata_q <= mem[r_next];
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = ws_q == W_IDLE;
    axi_rsp_o.w_ready  = ws_q == W_DATA;
    axi_rsp_o.b_valid  = ws_q == W_RESP;
    axi_rsp_o.b.id     = wid_q;
    axi_rsp_o.b.resp   = RESP_OKAY;
    axi_rsp_o.ar_ready = rs_q == R_IDLE;
    axi_rsp_o.r_valid  = rs_q == R_SEND;
    axi_rsp_o.r.id     = rid_q;
    axi_rsp_o.r.data   = rdata_q;
    axi_rsp_o.r.resp   = RESP_OKAY;
    axi_rsp_o.r.last   = rcnt_q == 0;
  end

endmodule
