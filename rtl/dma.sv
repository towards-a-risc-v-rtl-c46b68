// dma: memory-to-memory copy engine of the MCU, an AXI4 master.
//
// Software writes a source address, a destination address and a length in bytes
// (a multiple of 8, addresses 8-byte aligned; the low three bits are ignored) and
// starts the copy. The engine moves the data in chunks of up to MAX_BEATS 64-bit
// words: an INCR read burst fills an internal buffer, then an INCR write burst
// empties it. A chunk never crosses a 4 KiB boundary of the source or of the
// destination, as AXI4 requires of a burst. On completion (or on the first error
// response, which aborts the copy) the done bit is set and irq_o is raised until
// software clears it.
//
// Registers (32-bit):
//   0x00/0x04 source address low/high      0x08/0x0C destination address low/high
//   0x10      length in bytes              0x14 control: write bit 0 = 1 to start
//   0x18      status: bit 0 busy, bit 1 done (write 1 to clear), bit 2 error
// Timing per chunk of n words: AR, n R beats, AW, n W beats, B; with a slave that
// answers at once this is about 2n+4 cycles. The paper only names a DMA engine
// in the MCU; its programming model and burst scheme here are this design's own.
module dma
  import mcu_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i,
  output logic     irq_o
);

  localparam int unsigned BW = $clog2(MAX_BEATS);

  typedef enum logic [2:0] {IDLE, RD_ADDR, RD_DATA, WR_ADDR, WR_DATA, WR_RESP} state_e;

  state_e      st_q;
  addr_t       src_q, dst_q, cur_src_q, cur_dst_q;
  logic [31:0] len_q, left_q;   // bytes
  logic        done_q, err_q;
  data_t       buf_q [MAX_BEATS];
  logic [BW:0] n_q, idx_q;      // words in the chunk, current word

  // words in the next chunk
  logic [BW:0] n_next;
  always_comb begin
    logic [31:0] words, src_room, dst_room, m;
    words    = left_q >> 3;
    src_room = 32'(10'h200 - 10'(cur_src_q[11:3]));
    dst_room = 32'(10'h200 - 10'(cur_dst_q[11:3]));
    m = words;
    if (m > 32'(MAX_BEATS)) m = 32'(MAX_BEATS);
    if (m > src_room) m = src_room;
    if (m > dst_room) m = dst_room;
    n_next = (BW+1)'(m);
  end

  // registers
  wire        acc = reg_req_i.valid;
  wire        wr  = acc & reg_req_i.write;
  wire [31:0] a   = reg_req_i.addr;
  wire        busy = st_q != IDLE;

  always_comb begin
    reg_rsp_o = '0;
    unique case (a)
      32'h00: reg_rsp_o.rdata = src_q[31:0];
      32'h04: reg_rsp_o.rdata = src_q[63:32];
      32'h08: reg_rsp_o.rdata = dst_q[31:0];
      32'h0C: reg_rsp_o.rdata = dst_q[63:32];
      32'h10: reg_rsp_o.rdata = len_q;
      32'h14: reg_rsp_o.rdata = '0;
      32'h18: reg_rsp_o.rdata = {29'h0, err_q, done_q, busy};
      default: reg_rsp_o.error = acc;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q      <= IDLE;
      src_q     <= '0;
      dst_q     <= '0;
      cur_src_q <= '0;
      cur_dst_q <= '0;
      len_q     <= '0;
      left_q    <= '0;
      done_q    <= 1'b0;
      err_q     <= 1'b0;
      n_q       <= '0;
      idx_q     <= '0;
    end else begin
      if (wr && !busy) begin
        unique case (a)
          32'h00: src_q[31:0]  <= reg_req_i.wdata;
          32'h04: src_q[63:32] <= reg_req_i.wdata;
          32'h08: dst_q[31:0]  <= reg_req_i.wdata;
          32'h0C: dst_q[63:32] <= reg_req_i.wdata;
          32'h10: len_q        <= reg_req_i.wdata;
          default: ;
        endcase
      end
      if (wr && a == 32'h18 && reg_req_i.wdata[1]) done_q <= 1'b0;
      unique case (st_q)
        IDLE: if (wr && a == 32'h14 && reg_req_i.wdata[0]) begin
          cur_src_q <= {src_q[63:3], 3'b0};
          cur_dst_q <= {dst_q[63:3], 3'b0};
          left_q    <= {len_q[31:3], 3'b0};
          err_q     <= 1'b0;
          done_q    <= 1'b0;
          st_q      <= (len_q[31:3] == 0) ? IDLE : RD_ADDR;
          if (len_q[31:3] == 0) done_q <= 1'b1;
        end
        RD_ADDR: begin
          n_q <= n_next;
          if (axi_rsp_i.ar_ready) begin
            st_q  <= RD_DATA;
            idx_q <= '0;
          end
        end
        RD_DATA: if (axi_rsp_i.r_valid) begin
          buf_q[idx_q[BW-1:0]] <= axi_rsp_i.r.data;
          idx_q <= idx_q + 1'b1;
          if (axi_rsp_i.r.resp[1]) err_q <= 1'b1;
          if (axi_rsp_i.r.last) st_q <= WR_ADDR;
        end
        WR_ADDR: if (axi_rsp_i.aw_ready) begin
          st_q  <= WR_DATA;
          idx_q <= '0;
        end
        WR_DATA: if (axi_rsp_i.w_ready) begin
          idx_q <= idx_q + 1'b1;
          if (idx_q == n_q - 1'b1) st_q <= WR_RESP;
        end
        WR_RESP: if (axi_rsp_i.b_valid) begin
          cur_src_q <= cur_src_q + (addr_t'(n_q) << 3);
          cur_dst_q <= cur_dst_q + (addr_t'(n_q) << 3);
          left_q    <= left_q - (32'(n_q) << 3);
          if (axi_rsp_i.b.resp[1] || err_q || left_q == (32'(n_q) << 3)) begin
            st_q   <= IDLE;
            done_q <= 1'b1;
            if (axi_rsp_i.b.resp[1]) err_q <= 1'b1;
          end else begin
            st_q <= RD_ADDR;
          end
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar.addr  = cur_src_q;
    axi_req_o.ar.len   = 8'(n_next - 1'b1);
    axi_req_o.ar.size  = 3'd3;
    axi_req_o.ar.burst = BURST_INCR;
    axi_req_o.ar_valid = st_q == RD_ADDR;
    axi_req_o.r_ready  = st_q == RD_DATA;
    axi_req_o.aw.addr  = cur_dst_q;
    axi_req_o.aw.len   = 8'(n_q - 1'b1);
    axi_req_o.aw.size  = 3'd3;
    axi_req_o.aw.burst = BURST_INCR;
    axi_req_o.aw_valid = st_q == WR_ADDR;
    axi_req_o.w.data   = buf_q[idx_q[BW-1:0]];
    axi_req_o.w.strb   = '1;
    axi_req_o.w.last   = idx_q == n_q - 1'b1;
    axi_req_o.w_valid  = st_q == WR_DATA;
    axi_req_o.b_ready  = st_q == WR_RESP;
  end

  assign irq_o = done_q;

endmodule
