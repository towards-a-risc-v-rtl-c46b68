// tb_clint: self-checking test of the CLINT.
// Checks reset values, that mtime counts only on rtc ticks, byte-strobed writes,
// that mtip rises exactly one cycle after mtime reaches mtimecmp and falls when
// mtimecmp is moved ahead, and the msip bit.
module tb_clint;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0, tick = 0;
  reg_req_t rq;
  reg_rsp_t rs;
  logic mtip, msip;
  int checks = 0, failures = 0;

  clint dut (.clk_i(clk), .rst_ni(rst_n), .rtc_tick_i(tick), .reg_req_i(rq), .reg_rsp_o(rs),
             .mtip_o(mtip), .msip_o(msip));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF);
    rq = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: s};
    @(posedge clk); #1;
    rq = '0;
  endtask

  task automatic rdchk(input logic [31:0] a, input logic [31:0] exp, input string what);
    logic [31:0] v;
    rq = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1;
    v = rs.rdata;
    rq = '0;
    check(v == exp, $sformatf("%s: got %h exp %h", what, v, exp));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rq = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    rdchk(32'h4000, 32'hFFFF_FFFF, "mtimecmp lo reset");
    rdchk(32'hBFF8, 32'h0, "mtime reset");
    check(!mtip && !msip, "no irq after reset");
    // mtime counts only with tick
    repeat (5) @(posedge clk);
    #1 rdchk(32'hBFF8, 32'h0, "mtime without tick");
    tick = 1;
    repeat (7) @(posedge clk);
    #1 tick = 0;
    rdchk(32'hBFF8, 32'd7, "mtime after 7 ticks");
    // write mtime high, then low with byte strobes
    wr(32'hBFFC, 32'h0000_0001);
    wr(32'hBFF8, 32'hAABB_CCDD, 4'b0011);
    rdchk(32'hBFF8, 32'h0000_CCDD, "mtime lo strobed write");
    rdchk(32'hBFFC, 32'h1, "mtime hi write");
    // timer compare
    wr(32'hBFFC, 32'h0);
    wr(32'hBFF8, 32'd100);
    wr(32'h4004, 32'h0);
    wr(32'h4000, 32'd105);
    @(posedge clk); #1;
    check(!mtip, "mtip low before compare");
    tick = 1;
    begin
      int n = 0;
      while (!mtip && n < 50) begin @(posedge clk); #1; n++; end
      // mtime goes 100 -> 105 in 5 ticks; mtip registered one edge later: 6 edges
      check(n == 6, $sformatf("mtip latency %0d exp 6", n));
    end
    tick = 0;
    check(mtip, "mtip high at compare");
    wr(32'h4000, 32'd1000);
    @(posedge clk); #1;
    check(!mtip, "mtip cleared by new mtimecmp");
    // msip
    wr(32'h0, 32'h1);
    check(msip, "msip set");
    rdchk(32'h0, 32'h1, "msip readback");
    wr(32'h0, 32'h0);
    check(!msip, "msip cleared");
    // unmapped
    rq = '{valid: 1'b1, write: 1'b0, addr: 32'h10, wdata: '0, wstrb: '0};
    #1 check(rs.error, "unmapped error");
    rq = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
