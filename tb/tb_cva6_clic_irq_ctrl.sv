// tb_cva6_clic_irq_ctrl: self-checking test of the core-side CLIC interface.
// The CLIC is replaced by directly driven handshake signals. Checks: no trap while
// MIE is clear; vectored (SHV) trap target mtvt + 8*id and direct target mtvec;
// same-cycle acknowledge; saved mepc/mcause/mpil; level-based pre-emption
// (nesting) and its refusal for lower levels; mintthresh; mret restoring the
// level; and mnxti tail-chaining (address returned, acknowledge, mil and exccode
// updated, 0 for SHV or too-low interrupts).
module tb_cva6_clic_irq_ctrl;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0;
  logic valid = 0, ready, shv = 0;
  logic [7:0] id = 0, level = 0;
  logic csr_v = 0;
  logic [1:0] csr_op = 0;
  logic [11:0] csr_a = 0;
  logic [63:0] csr_wd = 0, csr_rd, pc = 64'h1000;
  logic trap, table_b, mret = 0;
  logic [63:0] tpc, cause, mepc;
  int checks = 0, failures = 0;

  cva6_clic_irq_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_valid_i(valid), .irq_ready_o(ready), .irq_id_i(id),
    .irq_level_i(level), .irq_shv_i(shv), .csr_valid_i(csr_v), .csr_op_i(csr_op),
    .csr_addr_i(csr_a), .csr_wdata_i(csr_wd), .csr_rdata_o(csr_rd), .pc_i(pc), .trap_o(trap),
    .trap_pc_o(tpc), .trap_table_o(table_b), .trap_cause_o(cause), .mret_i(mret), .mepc_o(mepc));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic csr(input logic [1:0] op, input logic [11:0] a, input logic [63:0] d,
                     output logic [63:0] r);
    csr_v = 1; csr_op = op; csr_a = a; csr_wd = d;
    #1 r = csr_rd;
    @(posedge clk); #1;
    csr_v = 0; csr_op = 0;
  endtask

  task automatic csr_rd_chk(input logic [11:0] a, input logic [63:0] exp, input string what);
    logic [63:0] r;
    csr(2'd0, a, 0, r);
    check(r == exp, $sformatf("%s: got %h exp %h", what, r, exp));
  endtask

  task automatic req(input logic [7:0] i, input logic [7:0] l, input logic s);
    id = i; level = l; shv = s; valid = 1;
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] r;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    csr(2'd1, 12'h305, 64'h8000_0000, r);   // mtvec (CLIC mode forced)
    csr(2'd1, 12'h307, 64'h9000_0000, r);   // mtvt
    csr_rd_chk(12'h305, 64'h8000_0003, "mtvec CLIC mode");
    // MIE clear: no trap
    req(20, 8'h80, 1);
    check(!trap && !ready, "no trap with MIE=0");
    @(posedge clk); #1;
    valid = 0;
    csr(2'd2, 12'h300, 64'h8, r);           // set MIE
    // vectored trap
    pc = 64'h1234;
    req(20, 8'h80, 1);
    check(trap && ready && table_b && tpc == 64'h9000_0000 + 20 * 8,
          $sformatf("vectored trap target %h", tpc));
    check(cause == {1'b1, 51'h0, 12'd20}, "trap cause");
    @(posedge clk); #1;
    valid = 0;
    csr_rd_chk(12'h341, 64'h1234, "mepc");
    csr_rd_chk(12'hFB1, 64'h8000_0000, "mil = 0x80");
    csr_rd_chk(12'h342, {1'b1, 32'h0, 1'b1, 2'b11, 1'b1, 3'b0, 8'h00, 4'h0, 12'd20}, "mcause");
    csr_rd_chk(12'h300, 64'h1880, "MIE cleared, MPIE set");
    // nesting: re-enable, lower level refused, higher level pre-empts
    csr(2'd2, 12'h300, 64'h8, r);
    req(30, 8'h70, 0);
    check(!trap && !ready, "lower level does not pre-empt");
    @(posedge clk); #1;
    pc = 64'h2000;
    req(31, 8'h90, 0);
    check(trap && ready && !table_b && tpc == 64'h8000_0000, $sformatf("direct trap %h", tpc));
    @(posedge clk); #1;
    valid = 0;
    csr_rd_chk(12'hFB1, 64'h9000_0000, "mil = 0x90 nested");
    csr_rd_chk(12'h342, {1'b1, 32'h0, 1'b0, 2'b11, 1'b1, 3'b0, 8'h80, 4'h0, 12'd31}, "mcause nested mpil");
    // mret restores level 0x80 and MIE from MPIE
    mret = 1; @(posedge clk); #1; mret = 0;
    csr_rd_chk(12'hFB1, 64'h8000_0000, "mil restored");
    csr_rd_chk(12'h300, 64'h1888, "MIE restored");
    // threshold
    csr(2'd1, 12'h347, 64'hA0, r);
    req(32, 8'h90, 0);
    check(!trap, "mintthresh blocks level 0x90");
    req(32, 8'hB0, 0);
    check(trap, "level above threshold taken");
    @(posedge clk); #1;
    valid = 0;
    csr(2'd1, 12'h347, 64'h0, r);
    // mnxti: mcause.mpil is 0x80 now; a non-SHV level 0x90 interrupt is chained
    req(45, 8'h90, 0);
    csr_v = 1; csr_op = 2'd2; csr_a = 12'h345; csr_wd = 64'h8;
    #1;
    check(ready && !trap && csr_rd == 64'h9000_0000 + 45 * 8, $sformatf("mnxti returns %h", csr_rd));
    @(posedge clk); #1;
    csr_v = 0; valid = 0;
    csr_rd_chk(12'hFB1, 64'h9000_0000, "mnxti raised mil");
    r = 0;
    csr(2'd0, 12'h342, 0, r);
    check(r[11:0] == 12'd45 && r[63], "mnxti updated mcause");
    csr_rd_chk(12'h300, 64'h1888, "mnxti set MIE");
    // mnxti with SHV interrupt returns 0 and does not acknowledge
    csr(2'd3, 12'h300, 64'h8, r);             // clear MIE so no trap interferes
    req(46, 8'hC0, 1);
    csr_v = 1; csr_op = 2'd2; csr_a = 12'h345; csr_wd = 64'h0;
    #1;
    check(!ready && csr_rd == 0, "mnxti ignores SHV interrupt");
    @(posedge clk); #1;
    csr_v = 0; valid = 0;
    // mnxti with no request returns 0
    csr(2'd2, 12'h345, 64'h0, r);
    check(r == 0, "mnxti with nothing pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
