// tb_axi_xbar: self-checking test of the AXI4 interconnect.
// Two masters and two scratchpad slaves (4 KiB each). Checks address decoding,
// data integrity when both masters burst into the same slave at once (the lock
// serialises them), parallel use of two slaves, DECERR with the right number of
// read beats for an unmapped address, and that every transaction of both
// masters completes; it also counts how often a master had to wait for a lock.
module tb_axi_xbar;
  import mcu_pkg::*;

  localparam logic [1:0][63:0] BASE = {64'h2000, 64'h1000};
  localparam logic [1:0][63:0] SIZE = {64'h1000, 64'h1000};
  logic clk = 0, rst_n = 0;
  axi_req_t req, req2;
  axi_rsp_t rsp, rsp2;
  axi_req_t mreq [2];
  axi_rsp_t mrsp [2];
  axi_req_t sreq [2];
  axi_rsp_t srsp [2];
  int checks = 0, failures = 0, waits = 0;

  assign mreq[0] = req;
  assign mreq[1] = req2;
  assign rsp  = mrsp[0];
  assign rsp2 = mrsp[1];

  axi_xbar #(.NM(2), .NS(2), .BASE(BASE), .SIZE(SIZE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .slv_req_o(sreq), .slv_rsp_i(srsp));
  spm #(.SIZE_BYTES(4096)) s0 (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(sreq[0]), .axi_rsp_o(srsp[0]));
  spm #(.SIZE_BYTES(4096)) s1 (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(sreq[1]), .axi_rsp_o(srsp[1]));

  always #5 clk = ~clk;
  // a master waiting with AW valid while the other holds the slave
  always @(posedge clk) if (req.aw_valid && !rsp.aw_ready && req2.w_valid) waits++;

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

  // ---- the same tasks for the second master ----
  data_t wbuf2 [256];
  data_t rbuf2 [256];
  logic [1:0] last_resp2;
  logic       proto_err2;     // wrong id or RLAST position
  int         beat_cycles2;   // cycles from the first to the last data beat
  int         first_lat2;     // cycles from the address handshake to the first data/response

  task automatic axi_write2(input addr_t a, input int n, input strb_t s = '1,
                           input logic [1:0] burst = BURST_INCR);
    int c;
    req2.aw = '{id: 4'h3, addr: a, len: 8'(n - 1), size: 3'd3, burst: burst};
    req2.aw_valid = 1;
    forever begin @(negedge clk); if (rsp2.aw_ready) break; end
    @(posedge clk); #1 req2.aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      req2.w = '{data: wbuf2[i], strb: s, last: i == n - 1};
      req2.w_valid = 1;
      forever begin @(negedge clk); if (rsp2.w_ready) break; end
      @(posedge clk); #1;
    end
    req2.w_valid = 0;
    req2.b_ready = 1;
    c = 0;
    forever begin @(negedge clk); if (rsp2.b_valid) break; c++; end
    first_lat2 = c;
    last_resp2 = rsp2.b.resp;
    proto_err2 = rsp2.b.id != 4'h3;
    @(posedge clk); #1;
    req2.b_ready = 0;
  endtask

  task automatic axi_read2(input addr_t a, input int n, input logic [2:0] sz = 3'd3,
                          input logic [1:0] burst = BURST_INCR);
    int i, first;
    req2.ar = '{id: 4'h5, addr: a, len: 8'(n - 1), size: sz, burst: burst};
    req2.ar_valid = 1;
    forever begin @(negedge clk); if (rsp2.ar_ready) break; end
    @(posedge clk); #1 req2.ar_valid = 0;
    req2.r_ready = 1;
    i = 0; first = -1; last_resp2 = RESP_OKAY; proto_err2 = 0;
    for (int c = 0; c < 5000 && i < n; c++) begin
      @(negedge clk);
      if (rsp2.r_valid) begin
        if (first < 0) begin first = c; first_lat2 = c; end
        rbuf2[i] = rsp2.r.data;
        if (rsp2.r.resp != RESP_OKAY) last_resp2 = rsp2.r.resp;
        if (rsp2.r.id != 4'h5) proto_err2 = 1;
        if (rsp2.r.last != (i == n - 1)) proto_err2 = 1;
        beat_cycles2 = c - first;
        i++;
      end
      @(posedge clk); #1;
    end
    if (i != n) proto_err2 = 1;
    req2.r_ready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t a0 [32];
  data_t a1 [32];
  bit done1 = 0;
  initial begin
    req = '0; req2 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      a0[i] = {$urandom, $urandom}; a1[i] = {$urandom, $urandom};
      wbuf[i] = a0[i]; wbuf2[i] = a1[i];
    end
    // both masters write 32 beats into slave 0 at the same time
    fork
      axi_write(64'h1000, 32);
      begin
        axi_write2(64'h1100, 32);
        check(last_resp2 == RESP_OKAY && !proto_err2, "m1 write ok");
        done1 = 1;
      end
    join
    check(last_resp == RESP_OKAY && !proto_err, "m0 write ok");
    check(done1, "m1 finished");
    check(waits > 0, $sformatf("contention occurred (%0d wait cycles)", waits));
    // cross reads: m0 reads what m1 wrote, m1 reads what m0 wrote, in parallel
    fork
      axi_read(64'h1100, 32);
      axi_read2(64'h1000, 32);
    join
    begin
      int bad = 0;
      for (int i = 0; i < 32; i++) if (rbuf[i] != a1[i] || rbuf2[i] != a0[i]) bad++;
      check(bad == 0 && !proto_err && !proto_err2, $sformatf("cross read mismatches %0d", bad));
    end
    // slave 1 in parallel with slave 0
    for (int i = 0; i < 4; i++) wbuf[i] = 64'(i + 77);
    fork
      axi_write(64'h2008, 4);
      axi_read2(64'h1000, 8);
    join
    axi_read(64'h2008, 4);
    check(rbuf[0] == 77 && rbuf[3] == 80, "slave 1 data");
    axi_read2(64'h1008, 1);
    check(rbuf2[0] == a0[1], "slave 0 not aliased by slave 1");
    // unmapped address
    axi_read(64'h9000, 4);
    check(last_resp == RESP_DECERR && !proto_err, "read DECERR with 4 beats");
    wbuf[0] = 1; wbuf[1] = 2;
    axi_write(64'h0, 2);
    check(last_resp == RESP_DECERR && !proto_err, "write DECERR");
    axi_read(64'h1000, 1);
    check(last_resp == RESP_OKAY && rbuf[0] == a0[0], "slave usable after error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
