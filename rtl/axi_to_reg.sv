// axi_to_reg: AXI4 slave port to the 32-bit register bus of the control blocks
// (CLINT, PLIC, CLIC, DMA and IOMMU configuration registers).
//
// One transaction is handled at a time, writes before reads when both arrive in
// the same idle cycle. Every 64-bit AXI beat becomes up to two 32-bit register
// accesses: a write touches the low word if WSTRB[3:0] is non-zero and the high
// word if WSTRB[7:4] is; a read of AxSIZE = 3 (8 bytes) reads both words, a
// narrower read only the word addressed by bit 2, so 32-bit loads never trigger
// the read side effect of a neighbouring register (the PLIC claim register).
// Register addresses are the AXI address minus BASE, truncated to 32 bits. Bursts
// step by 2^AxSIZE (INCR) or stay put (FIXED). Any register error turns the beat's
// response into SLVERR.
//
// Timing per beat: write 3 cycles (accept W, low word, high word), then B; read
// 2 cycles plus the R handshake. The bridge is this design's own; the paper only
// shows the W/R register blocks of the interrupt controllers on the interconnect.
module axi_to_reg
  import mcu_pkg::*;
#(
  parameter addr_t BASE = '0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output reg_req_t reg_req_o,
  input  reg_rsp_t reg_rsp_i
);

  typedef enum logic [2:0] {IDLE, W_WAIT, W_LO, W_HI, B_RESP, R_LO, R_HI, R_SEND} state_e;
  state_e     st_q;
  addr_t      addr_q;
  logic [7:0] cnt_q;
  logic [2:0] size_q;
  logic       fixed_q, err_q, last_q;
  id_t        id_q;
  data_t      data_q;
  strb_t      strb_q;

  wire [31:0] roff  = 32'(addr_q - BASE);
  wire [31:0] woff  = {roff[31:3], 3'b000};
  wire        rd_lo = size_q == 3'd3 || !roff[2];
  wire        rd_hi = size_q == 3'd3 ||  roff[2];
  wire addr_t addr_nx = fixed_q ? addr_q : addr_q + (addr_t'(1) << size_q);

  always_comb begin
    reg_req_o       = '0;
    reg_req_o.wstrb = 4'hF;
    unique case (st_q)
      W_LO: begin
        reg_req_o.valid = |strb_q[3:0];
        reg_req_o.write = 1'b1;
        reg_req_o.addr  = woff;
        reg_req_o.wdata = data_q[31:0];
        reg_req_o.wstrb = strb_q[3:0];
      end
      W_HI: begin
        reg_req_o.valid = |strb_q[7:4];
        reg_req_o.write = 1'b1;
        reg_req_o.addr  = woff + 32'd4;
        reg_req_o.wdata = data_q[63:32];
        reg_req_o.wstrb = strb_q[7:4];
      end
      R_LO: begin
        reg_req_o.valid = rd_lo;
        reg_req_o.addr  = woff;
      end
      R_HI: begin
        reg_req_o.valid = rd_hi;
        reg_req_o.addr  = woff + 32'd4;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q    <= IDLE;
      addr_q  <= '0;
      cnt_q   <= '0;
      size_q  <= '0;
      fixed_q <= 1'b0;
      err_q   <= 1'b0;
      last_q  <= 1'b0;
      id_q    <= '0;
      data_q  <= '0;
      strb_q  <= '0;
    end else begin
      unique case (st_q)
        IDLE: begin
          err_q <= 1'b0;
          if (axi_req_i.aw_valid) begin
            st_q    <= W_WAIT;
            addr_q  <= axi_req_i.aw.addr;
            size_q  <= axi_req_i.aw.size;
            fixed_q <= axi_req_i.aw.burst == BURST_FIXED;
            id_q    <= axi_req_i.aw.id;
          end else if (axi_req_i.ar_valid) begin
            st_q    <= R_LO;
            addr_q  <= axi_req_i.ar.addr;
            size_q  <= axi_req_i.ar.size;
            fixed_q <= axi_req_i.ar.burst == BURST_FIXED;
            id_q    <= axi_req_i.ar.id;
            cnt_q   <= axi_req_i.ar.len;
          end
        end
        W_WAIT: if (axi_req_i.w_valid) begin
          st_q   <= W_LO;
          data_q <= axi_req_i.w.data;
          strb_q <= axi_req_i.w.strb;
          last_q <= axi_req_i.w.last;
        end
        W_LO: begin
          st_q <= W_HI;
          if (reg_req_o.valid && reg_rsp_i.error) err_q <= 1'b1;
        end
        W_HI: begin
          if (reg_req_o.valid && reg_rsp_i.error) err_q <= 1'b1;
          if (last_q) st_q <= B_RESP;
          else begin
            st_q   <= W_WAIT;
            addr_q <= addr_nx;
          end
        end
        B_RESP: if (axi_req_i.b_ready) st_q <= IDLE;
        R_LO: begin
          st_q   <= R_HI;
          err_q  <= reg_req_o.valid && reg_rsp_i.error;
          data_q[31:0] <= rd_lo ? reg_rsp_i.rdata : 32'h0;
        end
        R_HI: begin
          st_q   <= R_SEND;
          if (reg_req_o.valid && reg_rsp_i.error) err_q <= 1'b1;
          data_q[63:32] <= rd_hi ? reg_rsp_i.rdata : 32'h0;
        end
        R_SEND: if (axi_req_i.r_ready) begin
          if (cnt_q == 0) st_q <= IDLE;
          else begin
            st_q   <= R_LO;
            cnt_q  <= cnt_q - 1'b1;
            addr_q <= addr_nx;
          end
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = st_q == IDLE;
    axi_rsp_o.ar_ready = st_q == IDLE && !axi_req_i.aw_valid;
    axi_rsp_o.w_ready  = st_q == W_WAIT;
    axi_rsp_o.b_valid  = st_q == B_RESP;
    axi_rsp_o.b.id     = id_q;
    axi_rsp_o.b.resp   = err_q ? RESP_SLVERR : RESP_OKAY;
    axi_rsp_o.r_valid  = st_q == R_SEND;
    axi_rsp_o.r.id     = id_q;
    axi_rsp_o.r.data   = data_q;
    axi_rsp_o.r.resp   = err_q ? RESP_SLVERR : RESP_OKAY;
    axi_rsp_o.r.last   = cnt_q == 0;
  end

endmodule
