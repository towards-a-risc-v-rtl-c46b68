// tb_iommu: self-checking test of the IOMMU with a 64 KiB scratchpad behind it.
// Fills the IOTLB through the register port and checks: pass-through while
// disabled, translation of write and read bursts (page number replaced, offset
// kept, visible through a second mapping of the same physical page), no added
// latency on a hit, permission faults and misses answered with SLVERR (the read
// with AxLEN+1 beats) without touching memory, the fault address and status
// registers, the interrupt and its clearing.
module tb_iommu;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0;
  axi_req_t req, dreq;
  axi_rsp_t rsp, drsp;
  reg_req_t rq;
  reg_rsp_t rs;
  logic irq;
  int checks = 0, failures = 0;

  iommu #(.NUM_ENTRIES(4)) dut (.clk_i(clk), .rst_ni(rst_n), .host_req_i(req), .host_rsp_o(rsp),
    .mcu_req_o(dreq), .mcu_rsp_i(drsp), .reg_req_i(rq), .reg_rsp_o(rs), .irq_o(irq));
  spm #(.SIZE_BYTES(65536)) mem (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(dreq), .axi_rsp_o(drsp));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    rq = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: 4'hF};
    @(posedge clk); #1;
    rq = '0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    rq = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1 v = rs.rdata;
    rq = '0;
  endtask

  task automatic map(input int e, input logic [51:0] vpn, input logic [51:0] ppn, input logic [2:0] fl);
    wr(32'h20 * e + 32'h0, vpn[31:0]);
    wr(32'h20 * e + 32'h4, 32'(vpn[51:32]));
    wr(32'h20 * e + 32'h8, ppn[31:0]);
    wr(32'h20 * e + 32'hC, 32'(ppn[51:32]));
    wr(32'h20 * e + 32'h10, 32'(fl));
  endtask

  // ---- AXI4 master tasks (one transaction at a time) ----
  // Inputs are driven just after a rising edge and sampled at the falling edge,
  // so a handshake seen at the falling edge completes at the next rising edge.
  data_t wbuf [256];
  data_t rbuf [256];
  logic [1:0] last_resp;
  logic       proto_err;     // wrong id or RLAST position
  int         beat_cycles;   // cycles from the first to the last data beat
  int         first_lat;     // cycles from the address handshake to the first data/response

  task automatic axi_write(input addr_t a, input int n, input strb_t s = '1,
                           input logic [1:0] burst = BURST_INCR);
    int c;
    req.aw = '{id: 4'h3, addr: a, len: 8'(n - 1), size: 3'd3, burst: burst};
    req.aw_valid = 1;
    forever begin @(negedge clk); if (rsp.aw_ready) break; end
    @(posedge clk); #1 req.aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      req.w = '{data: wbuf[i], strb: s, last: i == n - 1};
      req.w_valid = 1;
      forever begin @(negedge clk); if (rsp.w_ready) break; end
      @(posedge clk); #1;
    end
    req.w_valid = 0;
    req.b_ready = 1;
    c = 0;
    forever begin @(negedge clk); if (rsp.b_valid) break; c++; end
    first_lat = c;
    last_resp = rsp.b.resp;
    proto_err = rsp.b.id != 4'h3;
    @(posedge clk); #1;
    req.b_ready = 0;
  endtask

  task automatic axi_read(input addr_t a, input int n, input logic [2:0] sz = 3'd3,
                          input logic [1:0] burst = BURST_INCR);
    int i, first;
    req.ar = '{id: 4'h5, addr: a, len: 8'(n - 1), size: sz, burst: burst};
    req.ar_valid = 1;
    forever begin @(negedge clk); if (rsp.ar_ready) break; end
    @(posedge clk); #1 req.ar_valid = 0;
    req.r_ready = 1;
    i = 0; first = -1; last_resp = RESP_OKAY; proto_err = 0;
    for (int c = 0; c < 5000 && i < n; c++) begin
      @(negedge clk);
      if (rsp.r_valid) begin
        if (first < 0) begin first = c; first_lat = c; end
        rbuf[i] = rsp.r.data;
        if (rsp.r.resp != RESP_OKAY) last_resp = rsp.r.resp;
        if (rsp.r.id != 4'h5) proto_err = 1;
        if (rsp.r.last != (i == n - 1)) proto_err = 1;
        beat_cycles = c - first;
        i++;
      end
      @(posedge clk); #1;
    end
    if (i != n) proto_err = 1;
    req.r_ready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] v;
  data_t d [8];
  initial begin
    req = '0; rq = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // disabled: pass-through
    wbuf[0] = 64'h5555;
    axi_write(64'h0000_0000_0000_0020, 1);
    axi_read(64'h0000_0000_0000_0020, 1);
    check(rbuf[0] == 64'h5555 && last_resp == RESP_OKAY, "bypass while disabled");
    // mappings: VA page 0x12_3456_789A -> PA page 3 (RW); VA page 0x777 -> PA page 3 (R)
    map(0, 52'h01_2345_6789_A00, 52'h3, 3'b111);
    map(1, 52'h777, 52'h3, 3'b011);
    map(2, 52'h888, 52'h5, 3'b110);        // write only
    wr(32'h800, 1);
    rd(32'h10, v); check(v == 7, "flags readback");
    rd(32'h4, v); check(v == 32'h1234, "vpn high readback");
    for (int i = 0; i < 8; i++) begin d[i] = {$urandom, $urandom}; wbuf[i] = d[i]; end
    axi_write(64'h0123_4567_89A0_0040, 8);
    check(last_resp == RESP_OKAY && !proto_err, "translated write OKAY");
    axi_read(64'h0000_0000_0077_7040, 8);
    check(last_resp == RESP_OKAY && !proto_err, "translated read OKAY");
    check(first_lat == 0, $sformatf("hit adds no latency (%0d)", first_lat));
    begin
      int bad = 0;
      for (int i = 0; i < 8; i++) if (rbuf[i] != d[i]) bad++;
      check(bad == 0, $sformatf("data through two mappings, %0d bad", bad));
    end
    check(!irq, "no fault yet");
    // write through the read-only mapping: fault, memory untouched
    wbuf[0] = 64'hBAD; wbuf[1] = 64'hBAD;
    axi_write(64'h0000_0000_0077_7040, 2);
    check(last_resp == RESP_SLVERR && !proto_err, "write permission fault SLVERR");
    check(irq, "irq on fault");
    rd(32'h804, v); check(v == 2, "write fault status");
    rd(32'h808, v); check(v == 32'h0077_7040, "fault address");
    axi_read(64'h0123_4567_89A0_0040, 1);
    check(rbuf[0] == d[0], "memory untouched by faulting write");
    // read miss with 4 beats; read of write-only page
    axi_read(64'h0000_0000_0099_9000, 4);
    check(last_resp == RESP_SLVERR && !proto_err, "read miss SLVERR, 4 beats");
    axi_read(64'h0000_0000_0088_8000, 1);
    check(last_resp == RESP_SLVERR, "read of write-only page faults");
    rd(32'h804, v); check(v == 3, "both fault bits");
    rd(32'h808, v); check(v == 32'h0088_8000, "latest fault address");
    wr(32'h804, 3);
    @(posedge clk); #1;
    check(!irq, "fault cleared");
    // invalidate entry 0
    wr(32'h10, 0);
    axi_read(64'h0123_4567_89A0_0040, 1);
    check(last_resp == RESP_SLVERR, "invalidated entry misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
