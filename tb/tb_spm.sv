// tb_spm: self-checking test of the scratchpad behind its AXI4 port.
// Writes and reads INCR bursts of random data at both ends of the 128 KiB array,
// checks byte strobes, a FIXED burst, one beat per cycle on reads and the
// response latencies (first R beat one cycle after AR, B one cycle after the
// last W beat), and that addresses wrap at the memory size.
module tb_spm;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  int checks = 0, failures = 0;

  spm dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp));

  always #5 clk = ~clk;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t exp [256];
  data_t lo [16];
  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 16-beat burst at the start
    for (int i = 0; i < 16; i++) begin wbuf[i] = {$urandom, $urandom}; lo[i] = wbuf[i]; end
    axi_write(SPM_BASE, 16);
    check(last_resp == RESP_OKAY && !proto_err, "write resp");
    check(first_lat == 0, $sformatf("B latency %0d", first_lat));
    axi_read(SPM_BASE, 16);
    check(last_resp == RESP_OKAY && !proto_err, "read resp");
    check(first_lat == 0, $sformatf("first R latency %0d", first_lat));
    check(beat_cycles == 15, $sformatf("16 beats in %0d cycles", beat_cycles + 1));
    for (int i = 0; i < 16; i++) check(rbuf[i] == lo[i], $sformatf("data %0d", i));
    // 256-beat burst at the top end of the 128 KiB array
    for (int i = 0; i < 256; i++) begin wbuf[i] = {$urandom, $urandom}; exp[i] = wbuf[i]; end
    axi_write(SPM_BASE + 64'h1F800, 256);
    axi_read(SPM_BASE + 64'h1F800, 256);
    begin
      int bad = 0;
      for (int i = 0; i < 256; i++) if (rbuf[i] != exp[i]) bad++;
      check(bad == 0, $sformatf("256-beat burst mismatches %0d", bad));
    end
    // byte strobes
    wbuf[0] = 64'h1122_3344_5566_7788;
    axi_write(SPM_BASE + 8, 1, 8'b1010_0101);
    axi_read(SPM_BASE + 8, 1);
    check(rbuf[0] == {8'h11, lo[1][55:48], 8'h33, lo[1][39:32], lo[1][31:24], 8'h66, lo[1][15:8], 8'h88},
          $sformatf("strobed write %h", rbuf[0]));
    // FIXED burst writes the same word; the last beat remains
    wbuf[0] = 64'hAAAA; wbuf[1] = 64'hBBBB;
    axi_write(SPM_BASE + 64'h100, 2);
    for (int i = 0; i < 4; i++) wbuf[i] = 64'(i + 100);
    axi_write(SPM_BASE + 64'h100, 4, '1, BURST_FIXED);
    axi_read(SPM_BASE + 64'h100, 2);
    check(rbuf[0] == 64'd103, "fixed burst keeps address");
    check(rbuf[1] == 64'hBBBB, "fixed burst leaves neighbour");
    // address wraps at the memory size (upper bits decoded by the interconnect)
    axi_read(SPM_BASE + 64'h20000, 1);
    check(rbuf[0] == lo[0], "alias read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
