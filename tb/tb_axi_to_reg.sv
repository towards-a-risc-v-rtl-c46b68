// tb_axi_to_reg: self-checking test of the AXI4-to-register bridge.
// A register file model in the testbench (64 words, error above) counts every
// access. Checks: a 64-bit write becomes two 32-bit writes at the right offsets;
// strobes select the halves; 8-byte reads return both words; 4-byte reads touch
// only the addressed word (no side effect on the neighbour); INCR bursts step the
// address; a register error gives SLVERR; the base address is subtracted.
module tb_axi_to_reg;
  import mcu_pkg::*;

  localparam addr_t BASE = 64'h0800_0000;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  reg_req_t rq;
  reg_rsp_t rs;
  logic [31:0] regs [64];
  int rd_count [64];
  int checks = 0, failures = 0;

  axi_to_reg #(.BASE(BASE)) dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
                                 .reg_req_o(rq), .reg_rsp_i(rs));

  always #5 clk = ~clk;

  // register file model
  always_comb begin
    rs = '0;
    if (rq.addr < 32'd256) rs.rdata = regs[rq.addr[7:2]];
    else rs.error = rq.valid;
  end
  always @(posedge clk) begin
    if (rq.valid && rq.addr < 32'd256) begin
      if (rq.write) begin
        for (int b = 0; b < 4; b++) if (rq.wstrb[b]) regs[rq.addr[7:2]][8*b +: 8] <= rq.wdata[8*b +: 8];
      end else rd_count[rq.addr[7:2]]++;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
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

  initial begin
    req = '0;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; rd_count[i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wbuf[0] = 64'hDEAD_BEEF_0123_4567;
    axi_write(BASE + 64'h10, 1);
    check(last_resp == RESP_OKAY && !proto_err, "write OKAY");
    check(regs[4] == 32'h0123_4567 && regs[5] == 32'hDEAD_BEEF, "64-bit write split");
    wbuf[0] = 64'h1111_2222_3333_4444;
    axi_write(BASE + 64'h10, 1, 8'hF0);
    check(regs[4] == 32'h0123_4567 && regs[5] == 32'h1111_2222, "upper-half strobe only");
    axi_read(BASE + 64'h10, 1);
    check(rbuf[0] == 64'h1111_2222_0123_4567 && last_resp == RESP_OKAY && !proto_err, "64-bit read");
    check(rd_count[4] == 1 && rd_count[5] == 1, "both words read once");
    axi_read(BASE + 64'h14, 1, 3'd2);
    check(rbuf[0][63:32] == 32'h1111_2222 && rd_count[4] == 1 && rd_count[5] == 2,
          "32-bit read touches only its word");
    // burst of three words
    for (int i = 0; i < 3; i++) wbuf[i] = {32'(2 * i + 1), 32'(2 * i)};
    axi_write(BASE + 64'h40, 3);
    check(regs[16] == 0 && regs[17] == 1 && regs[20] == 4 && regs[21] == 5, "burst write");
    axi_read(BASE + 64'h40, 3);
    check(rbuf[1] == {32'd3, 32'd2} && rbuf[2] == {32'd5, 32'd4} && !proto_err, "burst read");
    // error
    wbuf[0] = 1;
    axi_write(BASE + 64'h400, 1);
    check(last_resp == RESP_SLVERR, "write error -> SLVERR");
    axi_read(BASE + 64'h400, 1);
    check(last_resp == RESP_SLVERR, "read error -> SLVERR");
    axi_read(BASE + 64'h10, 1);
    check(last_resp == RESP_OKAY, "error does not stick");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
