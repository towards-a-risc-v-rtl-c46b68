// tb_dma: self-checking test of the DMA engine copying inside a 64 KiB
// scratchpad. Checks the register file, the copied data and that nothing beyond
// the destination is touched, the burst split (at most 16 beats, never across a
// 4 KiB page of source or destination) by watching the AR/AW lengths, busy/done
// status, the interrupt and its clearing, and the copy time against 2n+8 cycles
// per chunk of n words.
module tb_dma;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0;
  axi_req_t dreq;
  axi_rsp_t drsp;
  reg_req_t rq;
  reg_rsp_t rs;
  logic irq;
  int checks = 0, failures = 0;

  dma #(.MAX_BEATS(16)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs),
                             .axi_req_o(dreq), .axi_rsp_i(drsp), .irq_o(irq));
  spm #(.SIZE_BYTES(65536)) mem (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(dreq), .axi_rsp_o(drsp));

  always #5 clk = ~clk;

  // burst monitor
  int ar_lens [$];
  int aw_lens [$];
  always @(posedge clk) begin
    if (dreq.ar_valid && drsp.ar_ready) ar_lens.push_back(int'(dreq.ar.len) + 1);
    if (dreq.aw_valid && drsp.aw_ready) aw_lens.push_back(int'(dreq.aw.len) + 1);
  end

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

  // expected chunk sizes, computed from the rules
  function automatic void chunks(input int src, input int dst, input int words, ref int q [$]);
    q = {};
    while (words > 0) begin
      int n;
      n = words;
      if (n > 16) n = 16;
      if (n > (4096 - src % 4096) / 8) n = (4096 - src % 4096) / 8;
      if (n > (4096 - dst % 4096) / 8) n = (4096 - dst % 4096) / 8;
      q.push_back(n);
      src += 8 * n; dst += 8 * n; words -= n;
    end
  endfunction

  task automatic copy(input int src, input int dst, input int words, output int cycles);
    logic [31:0] v;
    wr(32'h00, src); wr(32'h04, 0);
    wr(32'h08, dst); wr(32'h0C, 0);
    wr(32'h10, 8 * words);
    ar_lens = {}; aw_lens = {};
    wr(32'h14, 1);
    cycles = 1;
    rd(32'h18, v);
    check(v[0] == 1 || words == 0, "busy after start");
    while (!irq && cycles < 20000) begin @(posedge clk); #1; cycles++; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] v;
  int cyc, q [$];
  initial begin
    rq = '0;
    for (int i = 0; i < 8192; i++) mem.mem[i] = {32'(i), 32'hC0DE_0000 + 32'(i)};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wr(32'h00, 32'h1234_5678);
    rd(32'h00, v); check(v == 32'h1234_5678, "src register");
    // 40 words from 0x0000 to 0x8000
    copy(0, 32'h8000, 40, cyc);
    chunks(0, 32'h8000, 40, q);
    check(ar_lens == q && aw_lens == q, $sformatf("chunks %p exp %p", ar_lens, q));
    check(cyc <= 3 * (2 * 16 + 8), $sformatf("40 words took %0d cycles", cyc));
    begin
      int bad = 0;
      for (int i = 0; i < 40; i++) if (mem.mem[32'h1000 + i] != {32'(i), 32'hC0DE_0000 + 32'(i)}) bad++;
      check(bad == 0, $sformatf("copy 1 mismatches %0d", bad));
      check(mem.mem[32'h1000 + 40] == {32'(32'h1000 + 40), 32'hC0DE_0000 + 32'h1028}, "no overrun");
    end
    rd(32'h18, v); check(v[1:0] == 2'b10 && irq, "done, not busy");
    wr(32'h18, 2);
    check(!irq, "done cleared");
    // crossing page boundaries of source and destination at different points
    copy(32'h0FD0, 32'h9FF0, 30, cyc);
    chunks(32'h0FD0, 32'h9FF0, 30, q);
    check(ar_lens == q && aw_lens == q, $sformatf("page split %p exp %p", ar_lens, q));
    begin
      int bad = 0;
      for (int i = 0; i < 30; i++)
        if (mem.mem[(32'h9FF0 >> 3) + i] != {32'((32'h0FD0 >> 3) + i), 32'hC0DE_0000 + 32'((32'h0FD0 >> 3) + i)}) bad++;
      check(bad == 0, $sformatf("copy 2 mismatches %0d", bad));
    end
    wr(32'h18, 2);
    // zero length completes at once
    copy(0, 32'h8000, 0, cyc);
    check(ar_lens.size() == 0 && cyc <= 2, "zero-length copy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
