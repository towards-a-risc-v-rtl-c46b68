// tb_plic: self-checking test of the PLIC.
// Programs priorities, enables and thresholds, raises sources and checks meip/seip,
// the claim value (highest priority, ties to the lower id), the threshold, the
// in-service gating of the level gateway and re-pending after completion.
module tb_plic;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] src = '0;
  reg_req_t rq;
  reg_rsp_t rs;
  logic meip, seip;
  int checks = 0, failures = 0;

  plic dut (.clk_i(clk), .rst_ni(rst_n), .src_i(src), .reg_req_i(rq), .reg_rsp_o(rs),
            .meip_o(meip), .seip_o(seip));

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

  // a read is a full bus cycle (claim has a side effect at the edge)
  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    rq = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1 v = rs.rdata;
    @(posedge clk); #1;
    rq = '0;
  endtask

  task automatic settle();
    repeat (2) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] v;
  initial begin
    rq = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wr(32'h0000_0014, 3);        // prio src5 = 3
    wr(32'h0000_001C, 5);        // prio src7 = 5
    wr(32'h0000_0024, 3);        // prio src9 = 3
    wr(32'h0000_2000, (1 << 5) | (1 << 7) | (1 << 9));  // M enables
    wr(32'h0000_2080, (1 << 9)); // S enables
    rd(32'h0000_001C, v); check(v == 5, "priority readback");
    settle();
    check(!meip && !seip, "idle");
    src[5] = 1;
    settle();
    check(meip, "meip on src5");
    rd(32'h0000_1000, v); check(v == (1 << 5), $sformatf("pending word %h", v));
    rd(32'h0020_0004, v); check(v == 5, $sformatf("claim 5 got %0d", v));
    settle();
    check(!meip, "meip drops after claim");
    rd(32'h0000_1000, v); check(v == 0, "pending cleared by claim");
    // while 5 is in service its level does not re-pend it
    src[7] = 1;
    settle();
    rd(32'h0020_0004, v); check(v == 7, $sformatf("claim 7 got %0d", v));
    rd(32'h0000_1000, v); check(v == 0, "5 in service, not pending");
    wr(32'h0020_0004, 5);        // complete 5, line still high -> pending again
    settle();
    rd(32'h0000_1000, v); check(v == (1 << 5), "5 re-pends after complete");
    check(meip, "meip again");
    // threshold 3 masks priority 3
    wr(32'h0020_0000, 3);
    settle();
    check(!meip, "threshold masks prio 3");
    rd(32'h0020_0004, v); check(v == 0, "claim under threshold returns 0");
    wr(32'h0020_0000, 0);
    // tie between 5 and 9 (both prio 3) goes to 5; 9 also goes to S context
    src[9] = 1;
    settle();
    check(seip, "seip on src9");
    rd(32'h0020_1004, v); check(v == 9, $sformatf("S claim 9 got %0d", v));
    wr(32'h0020_1004, 9);
    src[9] = 0; src[5] = 0;
    settle();
    src[9] = 1;
    settle();
    rd(32'h0020_0004, v); check(v == 5, $sformatf("tie to lower id: got %0d", v));
    rd(32'h0020_0004, v); check(v == 9, $sformatf("next claim 9 got %0d", v));
    settle();
    check(!meip, "all claimed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
