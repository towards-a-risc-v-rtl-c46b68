// tb_clic: self-checking test of the CLIC with its 256 lines.
// Checks edge and level triggering (both polarities), software pending, enable
// masking, arbitration by level/priority with ties to the higher id, the level
// encoding for several nlbits values, the SHV flag, clearing of edge pending on
// the valid/ready handshake, and the two-cycle input-to-request latency.
module tb_clic;
  import mcu_pkg::*;

  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] src = '0;
  reg_req_t rq;
  reg_rsp_t rs;
  logic valid, ready = 0, shv;
  logic [7:0] id, level;
  int checks = 0, failures = 0;

  clic #(.NUM_INTR(N)) dut (.clk_i(clk), .rst_ni(rst_n), .intr_src_i(src), .reg_req_i(rq),
       .reg_rsp_o(rs), .irq_valid_o(valid), .irq_ready_i(ready), .irq_id_o(id),
       .irq_level_o(level), .irq_shv_o(shv));

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

  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    rq = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1 v = rs.rdata;
    rq = '0;
  endtask

  // line config: ctl, attr (shv, trig), ie
  task automatic cfg(input int i, input logic [7:0] ctl, input logic shv_b, input logic edge_b,
                     input logic neg, input logic ie);
    wr(32'h1000 + 4 * i, {ctl, 5'b0, neg, edge_b, shv_b, 7'b0, ie, 8'h0}, 4'b1110);
  endtask

  // reference level encoding
  function automatic logic [7:0] ref_level(input logic [7:0] ctl, input int nl);
    logic [7:0] mask;
    mask = (nl >= 8) ? 8'hFF : ~(8'hFF >> nl);
    return (ctl & mask) | ~mask;
  endfunction

  task automatic ack();
    ready = 1;
    @(posedge clk); #1;
    ready = 0;
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
    wr(32'h0, 4);                       // nlbits = 4
    rd(32'h0, v); check(v == 4, "mcliccfg readback");
    cfg(20, 8'hA5, 0, 1, 0, 1);         // rising edge
    rd(32'h1000 + 4 * 20, v); check(v == 32'hA5C2_0100, $sformatf("line 20 regs %h", v));
    repeat (3) @(posedge clk); #1;
    check(!valid, "idle");
    // edge with latency count
    src[20] = 1;
    begin
      int n = 0;
      while (!valid && n < 10) begin @(posedge clk); #1; n++; end
      check(n == 2, $sformatf("edge to valid latency %0d exp 2", n));
    end
    check(id == 20 && level == ref_level(8'hA5, 4) && !shv, $sformatf("id %0d level %h", id, level));
    ack();
    check(!valid, "valid drops after ack");
    @(posedge clk); #1;
    check(!valid, "edge pending cleared by ack");
    rd(32'h1000 + 4 * 20, v); check(v[0] == 0, "ip readback cleared");
    src[20] = 0;
    // arbitration: equal ctl -> higher id; higher level beats
    cfg(30, 8'hC0, 0, 1, 0, 1);
    cfg(40, 8'hC0, 1, 1, 0, 1);
    cfg(50, 8'hF0, 0, 1, 0, 1);
    cfg(60, 8'hFF, 0, 1, 0, 0);         // disabled
    src[30] = 1; src[40] = 1; src[50] = 1; src[60] = 1;
    repeat (3) @(posedge clk); #1;
    check(valid && id == 50, $sformatf("highest level wins: %0d", id));
    ack(); @(posedge clk); #1;
    check(valid && id == 40 && shv, $sformatf("tie to higher id + shv: %0d", id));
    ack(); @(posedge clk); #1;
    check(valid && id == 30, $sformatf("then 30: %0d", id));
    ack(); @(posedge clk); #1;
    check(!valid, "disabled line 60 not offered");
    rd(32'h1000 + 4 * 60, v); check(v[0], "line 60 pending though disabled");
    // level encodings for other nlbits
    wr(32'h0, 2);
    wr(32'h1000 + 4 * 60, 32'h0000_0100, 4'b0010);   // enable 60
    repeat (2) @(posedge clk); #1;
    check(valid && id == 60 && level == ref_level(8'hFF, 2), "nlbits 2 level");
    wr(32'h1000 + 4 * 60, 32'h4000_0000, 4'b1000);   // ctl 0x40
    repeat (2) @(posedge clk); #1;
    check(level == ref_level(8'h40, 2), $sformatf("nlbits 2 ctl 40: %h", level));
    wr(32'h0, 8);
    repeat (2) @(posedge clk); #1;
    check(level == 8'h40, $sformatf("nlbits 8: %h", level));
    wr(32'h0, 0);
    repeat (2) @(posedge clk); #1;
    check(level == 8'hFF, $sformatf("nlbits 0: %h", level));
    ack();
    wr(32'h1000 + 4 * 60, 32'h0, 4'b0010);           // disable 60
    // level triggered, active high: ack does not clear, source does
    cfg(70, 8'h80, 0, 0, 0, 1);
    src[70] = 1;
    repeat (3) @(posedge clk); #1;
    check(valid && id == 70, "level line requests");
    ack(); @(posedge clk); #1;
    check(valid && id == 70, "level line still requests after ack");
    src[70] = 0;
    repeat (3) @(posedge clk); #1;
    check(!valid, "level line withdrawn");
    // active-low level
    cfg(80, 8'h80, 0, 0, 1, 1);
    repeat (3) @(posedge clk); #1;
    check(valid && id == 80, "active-low line with input low requests");
    src[80] = 1;
    repeat (3) @(posedge clk); #1;
    check(!valid, "active-low line idle when input high");
    // falling edge
    cfg(90, 8'h80, 0, 1, 1, 1);
    src[90] = 1;
    repeat (3) @(posedge clk); #1;
    check(!valid, "rising edge ignored on falling-edge line");
    src[90] = 0;
    repeat (3) @(posedge clk); #1;
    check(valid && id == 90, "falling edge detected");
    ack();
    // software pending on line 3 (inter-processor interrupt)
    cfg(3, 8'h90, 0, 1, 0, 1);
    repeat (2) @(posedge clk); #1;
    check(!valid, "line 3 idle");
    wr(32'h1000 + 4 * 3, 32'h1, 4'b0001);
    repeat (2) @(posedge clk); #1;
    check(valid && id == 3, "software pending line 3");
    ack(); @(posedge clk); #1;
    check(!valid, "software pending cleared by ack");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
